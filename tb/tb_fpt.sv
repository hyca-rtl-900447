// tb_fpt -- self-checking test of the faulty-PE table: host writes and
// clear, detector inserts into the lowest free allowed entry, duplicate
// suppression, the full indication, and host/clear priority over inserts.
module tb_fpt;
  import hyca_pkg::*;
  localparam int E = 16;
  logic clk, rst_n, clear, host_we, ins_valid, dup, full, ack;
  logic [$clog2(E)-1:0] host_idx;
  fpt_entry_t host_entry;
  logic [IDXW-1:0] ins_row, ins_col;
  logic [E-1:0] allow;
  fpt_entry_t [E-1:0] tab;
  fpt_entry_t model [E];
  int checks, failures;

  fpt #(.ENTRIES(E)) dut (
    .clk, .rst_n, .clear_i(clear), .host_we_i(host_we), .host_idx_i(host_idx), .host_entry_i(host_entry),
    .ins_valid_i(ins_valid), .ins_row_i(ins_row), .ins_col_i(ins_col), .ins_allow_i(allow),
    .ins_dup_o(dup), .ins_full_o(full), .ins_ack_o(ack), .table_o(tab));

  initial begin clk = 0; forever #5 clk = ~clk; end
  initial begin : watchdog
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic compare_table(input string what);
    checks++;
    for (int e = 0; e < E; e++)
      if (tab[e] !== model[e]) begin
        failures++;
        $display("FAIL: %s entry %0d", what, e);
        break;
      end
  endtask

  initial begin
    checks = 0; failures = 0;
    rst_n = 0; clear = 0; host_we = 0; ins_valid = 0; host_idx = '0; host_entry = '0;
    ins_row = '0; ins_col = '0; allow = '0;
    for (int e = 0; e < E; e++) model[e] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      int op;
      bit exp_dup, found;
      int fe;
      @(negedge clk);
      op = int'($urandom % 20);
      clear = (op == 0);
      host_we = (op == 1 || op == 2);
      host_idx = 4'($urandom);
      host_entry = '{valid: 1'($urandom), row: 5'($urandom % 8), col: 5'($urandom % 8)};
      ins_valid = (op >= 2);
      ins_row = 5'($urandom % 8); ins_col = 5'($urandom % 8);
      allow = E'($urandom) | E'($urandom);
      exp_dup = 0; found = 0; fe = 0;
      for (int e = 0; e < E; e++) begin
        if (model[e].valid && model[e].row == ins_row && model[e].col == ins_col) exp_dup = 1;
        if (!model[e].valid && allow[e] && !found) begin found = 1; fe = e; end
      end
      #1;
      checks++;
      if (dup !== exp_dup || full !== (ins_valid && !exp_dup && !found) ||
          ack !== (ins_valid && !clear && !host_we)) begin
        failures++;
        $display("FAIL: flags n %0d", n);
      end
      if (clear) for (int e = 0; e < E; e++) model[e] = '0;
      else if (host_we) model[host_idx] = host_entry;
      else if (ins_valid && !exp_dup && found) model[fe] = '{valid: 1'b1, row: ins_row, col: ins_col};
      @(posedge clk); #1;
      compare_table($sformatf("n %0d op %0d", n, op));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
