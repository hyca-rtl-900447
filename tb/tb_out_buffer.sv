// tb_out_buffer -- self-checking test of the output buffer: lines of ROWS
// accumulators with a per-row write mask (whole-column writes from the PE
// array and single-feature writes from the ORF). Checks masked writes and
// the one-cycle registered read.
module tb_out_buffer;
  localparam int ROWS = 8, AWID = 32, DEPTH = 64;
  logic clk, we, re;
  logic [$clog2(DEPTH)-1:0] waddr, raddr;
  logic [ROWS-1:0] wmask;
  logic [ROWS-1:0][AWID-1:0] wdata, rdata;
  logic [ROWS-1:0][AWID-1:0] model [DEPTH];
  int checks, failures;

  out_buffer #(.ROWS(ROWS), .AWID(AWID), .DEPTH(DEPTH)) dut (
    .clk, .we_i(we), .waddr_i(waddr), .wmask_i(wmask), .wdata_i(wdata),
    .re_i(re), .raddr_i(raddr), .rdata_o(rdata));

  initial begin clk = 0; forever #5 clk = ~clk; end
  initial begin : watchdog
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    checks = 0; failures = 0;
    we = 0; re = 0; waddr = '0; raddr = '0; wmask = '0; wdata = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = 6'(a); wmask = '1;
      for (int r = 0; r < ROWS; r++) wdata[r] = $urandom;
      model[a] = wdata;
    end
    for (int n = 0; n < 500; n++) begin
      int a;
      a = int'($urandom % DEPTH);
      @(negedge clk);
      we = 1; waddr = 6'(a); wmask = ROWS'($urandom);
      for (int r = 0; r < ROWS; r++) begin
        wdata[r] = $urandom;
        if (wmask[r]) model[a][r] = wdata[r];
      end
      @(negedge clk);
      we = 0; re = 1; raddr = 6'(a);
      @(negedge clk);
      re = 0;
      checks++;
      if (rdata !== model[a]) begin failures++; $display("FAIL: line %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
