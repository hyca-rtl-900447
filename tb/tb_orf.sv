// tb_orf -- self-checking test of the output register file. Drives DPPU
// tags directly: for each iteration a random set of entries receives a
// first (clearing) partial result and then further partial results, the
// last window's fin tag closes the bank, and the bank is drained while the
// output-buffer port grants at random. Checks each drained entry, the
// entry order, that every written entry is drained once, that iterations
// alternate banks with no overrun, and that a clearing write into a bank
// still waiting to drain raises overrun.
module tb_orf;
  import hyca_pkg::*;
  localparam int E = 16, NG = 4;
  logic clk, rst_n;
  logic signed [NG-1:0][AW-1:0] psum;
  dppu_tag_t [NG-1:0] tag;
  logic dr_valid, dr_bank, dr_ready, busy, overrun;
  logic [$clog2(E)-1:0] dr_idx;
  logic signed [AW-1:0] dr_data;
  logic signed [AW-1:0] sum [2][E];
  bit used [2][E];
  int checks, failures, drained;
  bit force_port_busy;

  orf #(.ENTRIES(E), .NG(NG)) dut (
    .clk, .rst_n, .psum_i(psum), .tag_i(tag), .dr_valid_o(dr_valid), .dr_bank_o(dr_bank),
    .dr_idx_o(dr_idx), .dr_data_o(dr_data), .dr_ready_i(dr_ready), .busy_o(busy), .overrun_o(overrun));

  initial begin clk = 0; forever #5 clk = ~clk; end
  initial begin : watchdog
    #2000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // drain monitor
  int last_idx;
  always @(posedge clk) begin
    dr_ready <= !force_port_busy && ($urandom % 3 != 0);
    if (dr_valid && dr_ready) begin
      checks++;
      if (!used[dr_bank][dr_idx] || dr_data !== sum[dr_bank][dr_idx] || int'(dr_idx) <= last_idx) begin
        failures++;
        $display("FAIL: drain bank %0d idx %0d data %0d exp %0d", dr_bank, dr_idx, dr_data,
                 sum[dr_bank][dr_idx]);
      end
      used[dr_bank][dr_idx] = 0;
      last_idx = int'(dr_idx);
      drained++;
    end
    if (!dr_valid) last_idx = -1;
  end

  initial begin
    checks = 0; failures = 0; drained = 0; last_idx = -1; force_port_busy = 0;
    rst_n = 0; psum = '0; tag = '0;
    for (int b = 0; b < 2; b++) for (int e = 0; e < E; e++) begin sum[b][e] = 0; used[b][e] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 12; it++) begin
      int b, nwin, expect_n;
      bit sel [E];
      b = it % 2;
      nwin = 1 + int'($urandom % 3);
      for (int e = 0; e < E; e++) sel[e] = 1'($urandom);
      expect_n = 0;
      for (int e = 0; e < E; e++) if (sel[e]) expect_n++;
      for (int w = 0; w < nwin; w++)
        for (int p = 0; p < E; p++) begin
          @(negedge clk);
          tag = '0;
          for (int g = 0; g < NG; g++) begin
            int e;
            e = (p / NG) * NG + g;
            psum[g] = $urandom;
            tag[g].valid = sel[e];
            tag[g].bank = 1'(b);
            tag[g].idx = 8'(e);
            tag[g].clr = (w == 0) && (p % NG == 0);
            if (sel[e]) begin
              sum[b][e] = tag[g].clr ? psum[g] : sum[b][e] + psum[g];
              used[b][e] = 1;
            end
          end
          tag[NG-1].fin = (w == nwin - 1) && (p == E - 1);
        end
      @(negedge clk);
      tag = '0;
      // next iteration starts right away; its bank is the other one
      if (it % 3 == 2) begin
        repeat (3 * E) @(negedge clk);
        checks++;
        if (busy) begin failures++; $display("FAIL: still busy"); end
      end
    end
    repeat (3 * E) @(negedge clk);
    checks++;
    if (overrun) begin failures++; $display("FAIL: overrun in normal use"); end
    for (int b = 0; b < 2; b++)
      for (int e = 0; e < E; e++) begin
        checks++;
        if (used[b][e]) begin failures++; $display("FAIL: bank %0d idx %0d never drained", b, e); end
      end
    // overrun: hold the port, close bank 0, then clear-write into bank 0 again
    force_port_busy = 1;
    @(negedge clk);
    tag = '0; tag[0].valid = 1; tag[0].clr = 1; tag[0].bank = 0; tag[0].idx = 0; tag[NG-1].fin = 1;
    tag[NG-1].bank = 0;
    @(negedge clk);
    tag = '0;
    repeat (2) @(negedge clk);
    tag[0].valid = 1; tag[0].clr = 1; tag[0].bank = 0; tag[0].idx = 1;
    @(negedge clk);
    tag = '0;
    @(negedge clk);
    checks++;
    if (!overrun) begin failures++; $display("FAIL: overrun not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
