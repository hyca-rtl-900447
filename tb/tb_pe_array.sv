// tb_pe_array -- self-checking test of the output-stationary PE array.
// Streams several back-to-back output-feature iterations of random length
// and checks every finished column offered on the write-back port against a
// reference matrix product, the column order (one column per cycle,
// column c in cycle T_last + c + 3), and a stuck-at fault in one PE.
module tb_pe_array;
  import hyca_pkg::*;
  localparam int ROWS = 6, COLS = 5, NIT = 6;
  logic clk, rst_n, valid, first, last;
  logic signed [ROWS-1:0][DW-1:0] w;
  logic signed [COLS-1:0][DW-1:0] x;
  logic signed [ROWS-1:0][COLS-1:0][AW-1:0] acc;
  logic wr_valid;
  logic [$clog2(COLS)-1:0] wr_idx;
  logic signed [ROWS-1:0][AW-1:0] wr_data;
  logic [ROWS-1:0][COLS-1:0] fi_en;
  logic signed [AW-1:0] ref_m [NIT][ROWS][COLS];
  int t_last [NIT];
  int checks, failures, cyc, it_out, col_out;

  pe_array #(.ROWS(ROWS), .COLS(COLS)) dut (
    .clk, .rst_n, .valid_i(valid), .first_i(first), .last_i(last), .w_i(w), .x_i(x), .acc_o(acc),
    .col_wr_valid_o(wr_valid), .col_wr_idx_o(wr_idx), .col_wr_data_o(wr_data),
    .fi_en_i(fi_en), .fi_bit_i(5'd0), .fi_val_i(1'b1));

  initial begin clk = 0; forever #5 clk = ~clk; end
  initial begin : watchdog
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (wr_valid && rst_n) begin
      checks++;
      if (int'(wr_idx) != col_out || cyc != t_last[it_out] + col_out + 3) begin
        failures++;
        $display("FAIL: it %0d column %0d at cycle %0d (exp column %0d at %0d)", it_out, wr_idx, cyc,
                 col_out, t_last[it_out] + col_out + 3);
      end
      for (int r = 0; r < ROWS; r++) begin
        checks++;
        if (wr_data[r] !== ref_m[it_out][r][wr_idx]) begin
          failures++;
          $display("FAIL: it %0d r%0d c%0d got %0d exp %0d", it_out, r, wr_idx, wr_data[r],
                   ref_m[it_out][r][wr_idx]);
        end
      end
      if (col_out == COLS - 1) begin col_out <= 0; it_out <= it_out + 1; end
      else col_out <= col_out + 1;
    end
  end

  initial begin
    checks = 0; failures = 0; cyc = 0; it_out = 0; col_out = 0;
    rst_n = 0; valid = 0; first = 0; last = 0; w = '0; x = '0; fi_en = '0;
    fi_en[2][3] = 1'b1;    // PE(2,3): bit 0 stuck at 1
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < NIT; it++) begin
      int k;
      k = COLS + int'($urandom % 8);
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) ref_m[it][r][c] = 0;
      for (int t = 0; t < k; t++) begin
        @(negedge clk);
        valid = 1; first = (t == 0); last = (t == k - 1);
        for (int r = 0; r < ROWS; r++) w[r] = DW'($urandom);
        for (int c = 0; c < COLS; c++) x[c] = DW'($urandom);
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < COLS; c++) begin
            ref_m[it][r][c] = (t == 0) ? AW'($signed(w[r]) * $signed(x[c]))
                                       : ref_m[it][r][c] + AW'($signed(w[r]) * $signed(x[c]));
            if (r == 2 && c == 3) ref_m[it][r][c][0] = 1'b1;
          end
        if (t == k - 1) t_last[it] = cyc;
      end
    end
    @(negedge clk);
    valid = 0; first = 0; last = 0;
    repeat (COLS + 6) @(negedge clk);
    checks++;
    if (it_out != NIT) begin failures++; $display("FAIL: %0d iterations written", it_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
