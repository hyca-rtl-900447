// tb_clb -- self-checking test of the check-list buffer: masked BAR/AR
// captures, single-row PR writes, per-bank valid flags, and the done
// clear, including done arriving in the same cycle as a new value (the new
// value's flag must not be set).
module tb_clb;
  import hyca_pkg::*;
  localparam int NR = 8;
  logic clk, rst_n;
  logic bar_we, bar_bank, ar_we, ar_bank, pr_we, pr_bank;
  logic [NR-1:0] bar_mask, ar_mask;
  logic signed [NR-1:0][AW-1:0] bar_data, ar_data;
  logic [$clog2(NR)-1:0] pr_row;
  logic signed [AW-1:0] pr_data;
  logic [1:0][NR-1:0] done, ar_v, pr_v;
  logic signed [1:0][NR-1:0][AW-1:0] bar_s, ar_s, pr_s;
  logic signed [AW-1:0] m_bar [2][NR], m_ar [2][NR], m_pr [2][NR];
  bit m_arv [2][NR], m_prv [2][NR];
  int checks, failures;

  clb #(.NR(NR)) dut (
    .clk, .rst_n,
    .bar_we_i(bar_we), .bar_bank_i(bar_bank), .bar_mask_i(bar_mask), .bar_data_i(bar_data),
    .ar_we_i(ar_we), .ar_bank_i(ar_bank), .ar_mask_i(ar_mask), .ar_data_i(ar_data),
    .pr_we_i(pr_we), .pr_bank_i(pr_bank), .pr_row_i(pr_row), .pr_data_i(pr_data), .done_i(done),
    .bar_o(bar_s), .ar_o(ar_s), .pr_o(pr_s), .ar_v_o(ar_v), .pr_v_o(pr_v));

  initial begin clk = 0; forever #5 clk = ~clk; end
  initial begin : watchdog
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    checks = 0; failures = 0;
    rst_n = 0;
    bar_we = 0; ar_we = 0; pr_we = 0; bar_bank = 0; ar_bank = 0; pr_bank = 0;
    bar_mask = '0; ar_mask = '0; bar_data = '0; ar_data = '0; pr_row = '0; pr_data = '0; done = '0;
    for (int b = 0; b < 2; b++)
      for (int r = 0; r < NR; r++) begin
        m_bar[b][r] = 0; m_ar[b][r] = 0; m_pr[b][r] = 0; m_arv[b][r] = 0; m_prv[b][r] = 0;
      end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      bar_we = 1'($urandom); bar_bank = 1'($urandom); bar_mask = NR'($urandom);
      ar_we = 1'($urandom); ar_bank = 1'($urandom); ar_mask = NR'($urandom);
      pr_we = 1'($urandom); pr_bank = 1'($urandom); pr_row = 3'($urandom); pr_data = $urandom;
      for (int r = 0; r < NR; r++) begin bar_data[r] = $urandom; ar_data[r] = $urandom; end
      done = ($urandom % 4 == 0) ? 16'($urandom) : '0;
      for (int r = 0; r < NR; r++) begin
        if (bar_we && bar_mask[r]) m_bar[bar_bank][r] = bar_data[r];
        if (ar_we && ar_mask[r]) begin m_ar[ar_bank][r] = ar_data[r]; m_arv[ar_bank][r] = !done[ar_bank][r]; end
      end
      if (pr_we) begin m_pr[pr_bank][pr_row] = pr_data; m_prv[pr_bank][pr_row] = !done[pr_bank][pr_row]; end
      for (int b = 0; b < 2; b++)
        for (int r = 0; r < NR; r++)
          if (done[b][r]) begin m_arv[b][r] = 0; m_prv[b][r] = 0; end
      @(posedge clk); #1;
      checks++;
      for (int b = 0; b < 2; b++)
        for (int r = 0; r < NR; r++)
          if (bar_s[b][r] !== m_bar[b][r] || ar_s[b][r] !== m_ar[b][r] || pr_s[b][r] !== m_pr[b][r] ||
              ar_v[b][r] !== m_arv[b][r] || pr_v[b][r] !== m_prv[b][r]) begin
            failures++;
            $display("FAIL: n %0d bank %0d row %0d", n, b, r);
            b = 2; break;
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
