// tb_line_buffer -- self-checking test of the on-chip line buffer used for
// the input and weight buffers. Writes random lines to random addresses,
// then reads them back and checks the one-cycle registered read latency and
// that the read register holds while re_i is low.
module tb_line_buffer;
  localparam int WIDTH = 64, DEPTH = 256;
  logic clk, we, re;
  logic [$clog2(DEPTH)-1:0] waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata;
  logic [WIDTH-1:0] model [DEPTH];
  int checks, failures;

  line_buffer #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (
    .clk, .we_i(we), .waddr_i(waddr), .wdata_i(wdata), .re_i(re), .raddr_i(raddr), .rdata_o(rdata));

  initial begin clk = 0; forever #5 clk = ~clk; end
  initial begin : watchdog
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    checks = 0; failures = 0;
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = 8'(a); wdata = {$urandom, $urandom};
      model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 600; n++) begin
      int a;
      logic [WIDTH-1:0] held;
      a = int'($urandom % DEPTH);
      @(negedge clk);
      // concurrent write to another address
      we = 1'($urandom); waddr = 8'((a + 1) % DEPTH); wdata = {$urandom, $urandom};
      re = 1; raddr = 8'(a);
      if (we) model[(a + 1) % DEPTH] = wdata;
      @(negedge clk);
      we = 0; re = 0;
      checks++;
      if (rdata !== model[a]) begin failures++; $display("FAIL: addr %0d", a); end
      held = rdata;
      raddr = 8'($urandom);
      @(negedge clk);
      checks++;
      if (rdata !== held) begin failures++; $display("FAIL: read register changed without re"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
