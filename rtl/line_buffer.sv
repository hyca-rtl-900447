// line_buffer -- on-chip SRAM used for the input-feature buffer and the
// weight buffer. One line holds the operand vector the array consumes in
// one cycle (COLS input features, or ROWS weights), so one read per cycle
// feeds the array. Written as a plain memory array: one synchronous write
// port (host fill) and one synchronous read port with one cycle latency.
//
// Sizes follow the evaluated configuration: the 128 KB input buffer is
// 4096 lines of 32 bytes and the 512 KB weight buffer 16384 lines of 32
// bytes. The line organisation and the host write port are this design's
// choice; the buffers are described only by their size and role.
module line_buffer #(
  parameter int unsigned WIDTH = 256,
  parameter int unsigned DEPTH = 4096
) (
  input  logic                     clk,
  input  logic                     we_i,
  input  logic [$clog2(DEPTH)-1:0] waddr_i,
  input  logic [WIDTH-1:0]         wdata_i,
  input  logic                     re_i,
  input  logic [$clog2(DEPTH)-1:0] raddr_i,
  output logic [WIDTH-1:0]         rdata_o
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we_i) mem[waddr_i] <= wdata_i;
    if (re_i) rdata_o <= mem[raddr_i];
  end

endmodule
