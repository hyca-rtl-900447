// dppu_group -- one computing group of the grouped DPPU: a GS-wide dot
// product of weights and input features, fully pipelined.
//
// Stage 1 registers the GS operand pairs read from the WRF/IRF ports.
// The GS multipliers (plus one spare, ring-protected by redundant_ring)
// produce 16-bit products that are registered in stage 2. A binary adder
// tree of GS-1 adders (plus one spare, also ring-protected) sums them,
// one registered tree level per cycle. Adders are numbered as a heap:
// adder n (1..GS-1) adds the results of adders 2n and 2n+1, and the
// bottom adders add product pairs; ring slot n-1 is adder n. Because
// every adder output is registered, the ring's operand muxes never form
// a combinational loop.
//
// Latency: operands presented in cycle p give psum_o/tag_o in cycle
// p + 2 + log2(GS) (4 cycles for GS = 4). One new dot product per cycle.
// The tag is carried alongside unchanged (valid bit first).
//
// Source: four multipliers plus a spare and three adders plus a spare follow
// the paper ("every four multipliers ... grouped and equipped with a redundant
// multiplier, and every three adders ... protected with a redundant adder").
// The pipelining (operand, product and one register per tree level) is this
// design's choice.
module dppu_group
  import hyca_pkg::*;
#(
  parameter int unsigned GS   = DEF_GS,
  parameter int unsigned TAGW = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic signed [GS-1:0][DW-1:0] w_i,
  input  logic signed [GS-1:0][DW-1:0] x_i,
  input  logic [TAGW-1:0]             tag_i,
  input  logic                        mul_fault_en_i,
  input  logic [$clog2(GS+1)-1:0]     mul_fault_idx_i,
  input  logic                        add_fault_en_i,
  input  logic [$clog2(GS)-1:0]       add_fault_idx_i,
  input  logic                        mul_inj_en_i,
  input  logic [$clog2(GS+1)-1:0]     mul_inj_unit_i,
  input  logic                        add_inj_en_i,
  input  logic [$clog2(GS)-1:0]       add_inj_unit_i,
  output logic signed [AW-1:0]        psum_o,
  output logic [TAGW-1:0]             tag_o
);

  localparam int unsigned LV = $clog2(GS);   // adder tree levels
  localparam int unsigned NA = GS - 1;       // adders

  logic signed [GS-1:0][DW-1:0] w_q, x_q;
  logic signed [GS-1:0][PW-1:0] prod, prod_q;
  logic [TAGW-1:0] tag1, tag2;
  logic [LV-1:0][TAGW-1:0] tagl;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q <= '0; x_q <= '0; prod_q <= '0; tag1 <= '0; tag2 <= '0;
    end else begin
      w_q <= w_i; x_q <= x_i; tag1 <= tag_i;
      prod_q <= prod; tag2 <= tag1;
    end
  end

  redundant_ring #(.N(GS), .OP(OP_MUL), .IW(DW), .OW(PW)) u_mul (
    .a_i(w_q), .b_i(x_q),
    .fault_en_i(mul_fault_en_i), .fault_idx_i(mul_fault_idx_i),
    .inj_en_i(mul_inj_en_i), .inj_unit_i(mul_inj_unit_i),
    .y_o(prod)
  );

  // adder tree, heap-indexed: node n in 1..NA, ring slot n-1
  logic signed [NA-1:0][AW-1:0] add_a, add_b, add_y;
  logic signed [GS-1:0][AW-1:0] sum_q;   // index 1..NA used

  always_comb begin
    for (int n = 1; n <= NA; n++) begin
      if (n >= GS / 2) begin
        add_a[n-1] = AW'($signed(prod_q[2*(n - GS/2)]));
        add_b[n-1] = AW'($signed(prod_q[2*(n - GS/2) + 1]));
      end else begin
        add_a[n-1] = sum_q[2*n];
        add_b[n-1] = sum_q[2*n + 1];
      end
    end
  end

  redundant_ring #(.N(NA), .OP(OP_ADD), .IW(AW), .OW(AW)) u_add (
    .a_i(add_a), .b_i(add_b),
    .fault_en_i(add_fault_en_i), .fault_idx_i(add_fault_idx_i),
    .inj_en_i(add_inj_en_i), .inj_unit_i(add_inj_unit_i),
    .y_o(add_y)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum_q <= '0;
      tagl  <= '0;
    end else begin
      for (int n = 1; n <= NA; n++) sum_q[n] <= add_y[n-1];
      tagl[0] <= tag2;
      for (int l = 1; l < LV; l++) tagl[l] <= tagl[l-1];
    end
  end

  assign psum_o = sum_q[1];
  assign tag_o  = tagl[LV-1];

endmodule
