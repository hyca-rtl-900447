// clb -- checking list buffer of the runtime fault detector.
//
// Ping-pong storage (bank = window parity) with one slot per array row of
// the column under test. A slot keeps the base accumulated result (BAR:
// the PE's accumulator just before a GS-tuple segment), the accumulated
// result (AR: the accumulator right after that segment) and, an addition
// of this design, the partial result (PR) of the reserved DPPU group when
// it arrives before the AR. Valid flags tell the detector which of AR and
// PR are present; the detector clears both (done_i) when it has made the
// comparison, so the AR and the PR may arrive in either order.
// Capture ports write several rows at once (all rows that use the same
// segment share a capture cycle); the PR port writes one row per cycle.
// All contents are visible combinationally.
module clb
  import hyca_pkg::*;
#(
  parameter int unsigned NR = DEF_ROWS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          bar_we_i,
  input  logic                          bar_bank_i,
  input  logic [NR-1:0]                 bar_mask_i,
  input  logic signed [NR-1:0][AW-1:0]  bar_data_i,
  input  logic                          ar_we_i,
  input  logic                          ar_bank_i,
  input  logic [NR-1:0]                 ar_mask_i,
  input  logic signed [NR-1:0][AW-1:0]  ar_data_i,
  input  logic                          pr_we_i,
  input  logic                          pr_bank_i,
  input  logic [$clog2(NR)-1:0]         pr_row_i,
  input  logic signed [AW-1:0]          pr_data_i,
  input  logic [1:0][NR-1:0]            done_i,      // check made: clear flags
  output logic signed [1:0][NR-1:0][AW-1:0] bar_o,
  output logic signed [1:0][NR-1:0][AW-1:0] ar_o,
  output logic signed [1:0][NR-1:0][AW-1:0] pr_o,
  output logic [1:0][NR-1:0]            ar_v_o,
  output logic [1:0][NR-1:0]            pr_v_o
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bar_o <= '0; ar_o <= '0; pr_o <= '0; ar_v_o <= '0; pr_v_o <= '0;
    end else begin
      for (int r = 0; r < NR; r++) begin
        if (bar_we_i && bar_mask_i[r])
          bar_o[bar_bank_i][r] <= bar_data_i[r];
        if (ar_we_i && ar_mask_i[r]) begin
          ar_o[ar_bank_i][r]   <= ar_data_i[r];
          ar_v_o[ar_bank_i][r] <= !done_i[ar_bank_i][r];
        end
      end
      if (pr_we_i) begin
        pr_o[pr_bank_i][pr_row_i]   <= pr_data_i;
        pr_v_o[pr_bank_i][pr_row_i] <= !done_i[pr_bank_i][pr_row_i];
      end
      for (int b = 0; b < 2; b++)
        for (int r = 0; r < NR; r++)
          if (done_i[b][r]) begin
            ar_v_o[b][r] <= 1'b0;
            pr_v_o[b][r] <= 1'b0;
          end
    end
  end

endmodule
