// pe -- one processing element of the 2-D output-stationary array.
//
// The PE registers an 8-bit weight and an 8-bit input feature, multiplies
// them into a 16-bit product register and adds the product to a 32-bit
// accumulator (the structure of the array's PE inset: two operand
// registers, a multiplier, an intermediate register and an accumulating
// adder). The weight register is passed on to the right-hand neighbour,
// so weights travel one column per cycle along a row.
//
// Timing: operands sampled at edge n are multiplied at edge n+1 and
// accumulated at edge n+2. A tuple flagged `first` restarts the
// accumulation (acc <= product); after the tuple flagged `last` has been
// accumulated, `done_o` is high for exactly one cycle while `acc_o` holds
// the finished output feature.
//
// Fault injection (a design choice, for evaluating the architecture): when
// `fi_en_i` is set, bit `fi_bit_i` of the accumulator register is stuck at
// `fi_val_i`, modelling the stuck-at register faults used to characterise
// faulty PEs. Signed operands and two's-complement arithmetic are assumed.
//
// Source: a PE with multiplier and accumulator in an output-stationary array
// follows the paper; operand widths, the two pipeline registers and the
// fault-injection inputs (evaluation only) are this design's choices.
module pe
  import hyca_pkg::*;
#(
  parameter int unsigned DWID = DW,
  parameter int unsigned PWID = PW,
  parameter int unsigned AWID = AW
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    valid_i,   // operand tuple present
  input  logic                    first_i,   // first tuple of an output feature
  input  logic                    last_i,    // last tuple of an output feature
  input  logic signed [DWID-1:0]  w_i,       // weight from the left
  input  logic signed [DWID-1:0]  x_i,       // input feature from the column bus
  output logic signed [DWID-1:0]  w_o,       // registered weight to the right
  output logic signed [AWID-1:0]  acc_o,     // accumulator
  output logic                    done_o,    // acc_o holds a finished output
  input  logic                    fi_en_i,
  input  logic [$clog2(AWID)-1:0] fi_bit_i,
  input  logic                    fi_val_i
);

  logic signed [DWID-1:0] w_q, x_q;
  logic signed [PWID-1:0] prod_q;
  logic signed [AWID-1:0] acc_q, acc_d;
  logic v1, f1, l1, v2, f2, l2, done_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q <= '0; x_q <= '0; prod_q <= '0;
      v1 <= 1'b0; f1 <= 1'b0; l1 <= 1'b0;
      v2 <= 1'b0; f2 <= 1'b0; l2 <= 1'b0;
    end else begin
      w_q <= w_i;
      x_q <= x_i;
      v1  <= valid_i; f1 <= first_i; l1 <= last_i;
      prod_q <= PWID'(w_q * x_q);
      v2  <= v1; f2 <= f1; l2 <= l1;
    end
  end

  always_comb begin
    acc_d = acc_q;
    if (v2) acc_d = f2 ? AWID'(prod_q) : acc_q + AWID'(prod_q);
    if (fi_en_i) acc_d[fi_bit_i] = fi_val_i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q  <= '0;
      done_q <= 1'b0;
    end else begin
      acc_q  <= acc_d;
      done_q <= v2 & l2;
    end
  end

  assign w_o    = w_q;
  assign acc_o  = acc_q;
  assign done_o = done_q;

endmodule
