// tb_pingpong_rf -- self-checking test of the ping-pong register file
// (WRF/IRF). Writes D columns into the write bank, swaps, and checks that
// in cycle p after the swap group g reads segment (g + p) mod NG of the row
// it selects, for D cycles, while the other bank is being refilled. Also
// checks the bank indicator.
module tb_pingpong_rf;
  import hyca_pkg::*;
  localparam int NROWS = 8, D = 16, GS = 4, NG = 4;
  logic clk, rst_n, wr_en, swap, rd_bank;
  logic [$clog2(D)-1:0] wr_col;
  logic [NROWS-1:0][DW-1:0] wr_data;
  logic [NG-1:0][$clog2(NROWS)-1:0] rd_row;
  logic [NG-1:0][GS-1:0][DW-1:0] rd_data;
  logic [DW-1:0] img [2][NROWS][D];
  int checks, failures;
  bit prev_bank;

  pingpong_rf #(.NROWS(NROWS), .D(D), .GS(GS), .NG(NG)) dut (
    .clk, .rst_n, .wr_en_i(wr_en), .wr_col_i(wr_col), .wr_data_i(wr_data),
    .swap_i(swap), .rd_row_i(rd_row), .rd_data_o(rd_data), .rd_bank_o(rd_bank));

  initial begin clk = 0; forever #5 clk = ~clk; end
  initial begin : watchdog
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    checks = 0; failures = 0;
    rst_n = 0; wr_en = 0; swap = 0; wr_col = '0; wr_data = '0; rd_row = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // window -1: fill only
    prev_bank = 0;
    for (int w = 0; w < 6; w++) begin
      for (int p = 0; p < D; p++) begin
        @(negedge clk);
        // check the reads of the bank filled in the previous window
        if (w > 0) begin
          for (int g = 0; g < NG; g++)
            for (int k = 0; k < GS; k++) begin
              checks++;
              if (rd_data[g][k] !== img[(w - 1) % 2][rd_row[g]][((g + p) % NG) * GS + k]) begin
                failures++;
                $display("FAIL: w%0d p%0d g%0d k%0d", w, p, g, k);
              end
            end
          checks++;
          if (p == 0 && w > 1 && rd_bank == prev_bank) begin failures++; $display("FAIL: no bank swap"); end
          if (p > 0 && rd_bank != prev_bank) begin failures++; $display("FAIL: bank changed in window"); end
          prev_bank = rd_bank;
        end
        // write column p of this window's image
        wr_en = 1; wr_col = 4'(p); swap = (p == D - 1);
        for (int r = 0; r < NROWS; r++) begin
          wr_data[r] = DW'($urandom);
          img[w % 2][r][p] = wr_data[r];
        end
        for (int g = 0; g < NG; g++) rd_row[g] = 3'($urandom);
        // combinational read of the new row selection
        #1;
        if (w > 0)
          for (int g = 0; g < NG; g++)
            for (int k = 0; k < GS; k++) begin
              checks++;
              if (rd_data[g][k] !== img[(w - 1) % 2][rd_row[g]][((g + p) % NG) * GS + k]) begin
                failures++;
                $display("FAIL: w%0d p%0d g%0d k%0d (new row)", w, p, g, k);
              end
            end
      end
    end
    @(negedge clk); wr_en = 0; swap = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
