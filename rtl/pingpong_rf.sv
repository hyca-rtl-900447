// pingpong_rf -- ping-pong register file that keeps a copy of the operands
// the 2-D array consumed during the last D cycles (used for both the weight
// register file, WRF, and the input register file, IRF).
//
// Write side: each cycle the operand vector of one tuple (one value per RF
// row: per array row for the WRF, per array column for the IRF) is written
// column-wise into column wr_col of the write bank. On `swap_i` (given
// with the last write of a D-tuple window) the banks trade places: the
// bank just filled becomes the read bank for the next D cycles, the other
// one is overwritten by the next window.
//
// Read side: a DPPU computing group needs a whole row (the D values one
// faulty PE consumed), but reads it through a narrow single port. The row
// is split into NG segments of GS entries, group g's port always sees
// segment position g, and every row of the read bank is a circular shift
// register that rotates by GS entries per cycle. In the p-th cycle after a
// swap, port g therefore delivers segment (g + p) mod NG of the row it
// selects, and after NG cycles it has seen the whole row. Each group can
// select a different row (rd_row_i[g]) in the same cycle without a
// multi-ported file. Reads are combinational from the rotated bank.
//
// This implements the banked, shifting register file of the paper for the
// case DPPU size == D (every segment position has one read port).
module pingpong_rf
  import hyca_pkg::*;
#(
  parameter int unsigned NROWS = DEF_ROWS,
  parameter int unsigned D     = DEF_D,
  parameter int unsigned GS    = DEF_GS,
  parameter int unsigned NG    = DEF_NG
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               wr_en_i,
  input  logic [$clog2(D)-1:0]               wr_col_i,
  input  logic [NROWS-1:0][DW-1:0]           wr_data_i,
  input  logic                               swap_i,
  input  logic [NG-1:0][$clog2(NROWS)-1:0]   rd_row_i,
  output logic [NG-1:0][GS-1:0][DW-1:0]      rd_data_o,
  output logic                               rd_bank_o     // which bank is read
);

  // Elaboration-time check of the supported configuration.
  if (GS * NG != D) begin : g_cfg_err
    $error("pingpong_rf: GS*NG must equal D");
  end

  logic [1:0][NROWS-1:0][D-1:0][DW-1:0] mem;
  logic rb;   // read bank; write bank is ~rb

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < 2; b++)
        for (int r = 0; r < NROWS; r++) mem[b][r] <= '0;
      rb  <= 1'b1;
    end else begin
      for (int b = 0; b < 2; b++) begin
        if (b[0] == rb) begin
          // read bank: rotate every row by one segment
          for (int r = 0; r < NROWS; r++)
            for (int e = 0; e < D; e++)
              mem[b][r][e] <= mem[b][r][(e + GS) % D];
        end else if (wr_en_i) begin
          for (int r = 0; r < NROWS; r++)
            mem[b][r][wr_col_i] <= wr_data_i[r];
        end
      end
      if (swap_i) rb <= ~rb;
    end
  end

  always_comb begin
    for (int g = 0; g < NG; g++)
      for (int k = 0; k < GS; k++)
        rd_data_o[g][k] = mem[rb][rd_row_i[g]][g*GS + k];
  end

  assign rd_bank_o = rb;

endmodule
