// agu -- address generation unit of the recompute path.
//
// Read side: after each register-file swap the AGU runs a D-cycle read
// window (p = 0..D-1). The FPT entries are dealt out round-robin to the NG
// DPPU groups: in cycle p, group g works on entry e = (p / NG) * NG + g,
// phase p mod NG; it reads WRF row fpt[e].row (the weights of the faulty
// PE's array row) and IRF row fpt[e].col (the inputs of its column). Over
// NG cycles the circular shift of the register files hands the group all
// NG segments of those rows, so each group finishes one faulty PE every NG
// cycles and the DPPU covers NG*(D/NG) = D entries per window.
// When fault detection is on, group 0 is reserved for it: in cycle p it
// reads WRF row p and IRF row det_col (the column under test), producing
// the partial result of PE(p, det_col) over one segment.
// Every operation carries a dppu_tag_t (see hyca_pkg).
//
// Write side: for a drain request (ORF bank, entry) from the ORF, the AGU
// forms the output-buffer line (out_base + iteration * COLS + column) and a
// one-hot row mask, using the iteration number it recorded for that ORF
// bank. That number is committed at the end of the iteration's first
// window, not at its swap, so a drain of the previous iteration in the same
// bank that is still waiting for the output-buffer port keeps its address.
//
// Window information (first/last window of an iteration, iteration number,
// detection column) is sampled together with swap_i.
//
// Source: the paper gives the AGU's function (addresses for the register
// files and the output buffer from the FPT). The round-robin deal of entries
// to groups, the tag format and group 0's use for detection are this design's
// own choices.
module agu
  import hyca_pkg::*;
#(
  parameter int unsigned ROWS   = DEF_ROWS,
  parameter int unsigned COLS   = DEF_COLS,
  parameter int unsigned D      = DEF_D,
  parameter int unsigned NG     = DEF_NG,
  parameter int unsigned OADDRW = 10,
  parameter int unsigned ITW    = 16
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  fpt_entry_t [D-1:0]                fpt_i,
  input  logic                              swap_i,
  input  logic                              win_first_i,   // window opens an iteration
  input  logic                              win_last_i,    // window closes an iteration
  input  logic [ITW-1:0]                    win_iter_i,
  input  logic                              det_en_i,
  input  logic [$clog2(COLS)-1:0]           det_col_i,
  input  logic                              rf_bank_i,     // RF bank being read
  output logic [NG-1:0][$clog2(ROWS)-1:0]   wrf_row_o,
  output logic [NG-1:0][$clog2(COLS)-1:0]   irf_row_o,
  output dppu_tag_t [NG-1:0]                tag_o,
  // drain address translation
  input  logic [OADDRW-1:0]                 out_base_i,
  input  logic                              dr_bank_i,
  input  logic [$clog2(D)-1:0]              dr_idx_i,
  output logic [OADDRW-1:0]                 dr_addr_o,
  output logic [ROWS-1:0]                   dr_mask_o
);

  logic                  active;
  logic [$clog2(D)-1:0]  p;
  logic                  first_q, last_q, det_q;
  logic [$clog2(COLS)-1:0] dcol_q;
  logic [1:0][ITW-1:0]   bank_iter;
  logic                  obank_q;
  logic [ITW-1:0]        iter_q;

  // ORF bank = iteration parity
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; p <= '0; first_q <= 1'b0; last_q <= 1'b0; det_q <= 1'b0;
      dcol_q <= '0; bank_iter <= '0; obank_q <= 1'b0; iter_q <= '0;
    end else begin
      if (swap_i) begin
        active  <= 1'b1;
        p       <= '0;
        first_q <= win_first_i;
        last_q  <= win_last_i;
        det_q   <= det_en_i;
        dcol_q  <= det_col_i;
        obank_q <= win_iter_i[0];
        iter_q  <= win_iter_i;
      end else if (active) begin
        if (p == ($clog2(D))'(D - 1)) active <= 1'b0;
        p <= p + 1'b1;
      end
      if (active && first_q && p == ($clog2(D))'(D - 1)) bank_iter[obank_q] <= iter_q;
    end
  end


  logic [NG-1:0][$clog2(D)-1:0] e_idx;   // FPT entry of each group this cycle
  always_comb
    for (int g = 0; g < NG; g++) e_idx[g] = ($clog2(D))'((int'(p) / NG) * NG + g);

  always_comb begin
    for (int g = 0; g < NG; g++) begin
      tag_o[g]     = '0;
      wrf_row_o[g] = '0;
      irf_row_o[g] = '0;
      tag_o[g].fin = active && last_q && (p == ($clog2(D))'(D - 1));
      if (g == 0 && det_q) begin
        tag_o[g].valid = active && (int'(p) < ROWS);
        tag_o[g].det   = 1'b1;
        tag_o[g].bank  = rf_bank_i;
        tag_o[g].idx   = 8'(p);
        wrf_row_o[g]   = ($clog2(ROWS))'(p);
        irf_row_o[g]   = dcol_q;
      end else begin
        tag_o[g].valid = active && fpt_i[e_idx[g]].valid;
        tag_o[g].clr   = first_q && (int'(p) % NG == 0);
        tag_o[g].bank  = obank_q;
        tag_o[g].idx   = 8'(e_idx[g]);
        wrf_row_o[g]   = ($clog2(ROWS))'(fpt_i[e_idx[g]].row);
        irf_row_o[g]   = ($clog2(COLS))'(fpt_i[e_idx[g]].col);
      end
    end
  end

  always_comb begin
    dr_addr_o = out_base_i + OADDRW'(bank_iter[dr_bank_i] * COLS)
                           + OADDRW'(fpt_i[dr_idx_i].col);
    dr_mask_o = '0;
    dr_mask_o[($clog2(ROWS))'(fpt_i[dr_idx_i].row)] = 1'b1;
  end

endmodule
