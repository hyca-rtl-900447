// out_buffer -- on-chip output-feature SRAM (128 KB by default) with a
// per-feature write mask.
//
// A line holds one array column of results: ROWS accumulators of AW bits.
// The array writes whole lines (mask all ones); the DPPU overwrites single
// features of a line (one mask bit set), which is how a recomputed output
// replaces the wrong value a faulty PE wrote earlier. One write port, and
// one synchronous read port (one cycle latency) for the host. 1024 lines
// of 32 x 4 bytes = 128 KB.
//
// Source: size from the paper (128 KB). Line layout (one array column of
// 32-bit features) and the per-row write mask are this design's choices.
module out_buffer #(
  parameter int unsigned ROWS  = 32,
  parameter int unsigned AWID  = 32,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                      clk,
  input  logic                      we_i,
  input  logic [$clog2(DEPTH)-1:0]  waddr_i,
  input  logic [ROWS-1:0]           wmask_i,
  input  logic [ROWS-1:0][AWID-1:0] wdata_i,
  input  logic                      re_i,
  input  logic [$clog2(DEPTH)-1:0]  raddr_i,
  output logic [ROWS-1:0][AWID-1:0] rdata_o
);

  logic [ROWS-1:0][AWID-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we_i)
      for (int r = 0; r < ROWS; r++)
        if (wmask_i[r]) mem[waddr_i][r] <= wdata_i[r];
    if (re_i) rdata_o <= mem[raddr_i];
  end

endmodule
