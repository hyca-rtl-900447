// fault_detect -- runtime fault detection by partial recomputation.
//
// A scan checks one array column per D-tuple window, all of its rows, and
// walks the columns left to right, so a full pass over the array takes
// COLS windows plus the recompute window of the last one (about
// ROWS*COLS + COLS cycles when ROWS = COLS = D). For row j of the column c
// under test, the check covers one GS-tuple segment of the window, segment
// j mod NG (the segment that DPPU group 0, reserved for detection, sees
// for row j because of the register-file rotation):
//   * BAR: PE(j,c)'s accumulator just before the segment (0 if the segment
//     starts an output feature), captured from the array;
//   * AR:  the accumulator right after the segment;
//   * PR:  group 0's dot product of the same GS weights and inputs, read
//     from the WRF/IRF one window later.
// The PE is declared faulty when AR != BAR + PR. Faulty PEs are inserted
// into the FPT one per cycle (skipping those already listed, and only into
// entries not served by group 0), from which the DPPU repairs them.
//
// Capture timing: a tuple applied to the array in cycle T is in PE(r,c)'s
// accumulator from cycle T+c+3, so a delay line of stream positions gives
// the BAR capture cycle (segment's first tuple, age c+2) and the AR
// capture cycle (segment's last tuple, age c+3). All rows sharing a
// segment are captured in the same cycle into the CLB. Because the PR of
// a row can arrive before or after its AR, the comparison is made when the
// later of the two arrives, and then both are released.
//
// Interface: det_start_i arms a pass that begins at the next window
// boundary; det_win_o/det_col_o tell the AGU, at the register-file swap,
// whether the finished window was scanned and which column it tested.
// scan_done_o pulses when the last check of a pass has been made.
//
// Source: BAR/AR/PR and the check AR == BAR + PR follow the paper's
// Sec. IV-D. Scan order, segment choice per row, the capture delay line and
// the FPT insertion are this design's choices. pr_tag_i's fin/clr bits are
// not used here: the detector needs only valid, det, bank and idx.
module fault_detect
  import hyca_pkg::*;
#(
  parameter int unsigned ROWS = DEF_ROWS,
  parameter int unsigned COLS = DEF_COLS,
  parameter int unsigned D    = DEF_D,
  parameter int unsigned GS   = DEF_GS,
  parameter int unsigned NG   = DEF_NG
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               det_start_i,
  // stream as applied to the array
  input  logic                               s_valid_i,
  input  logic                               s_first_i,
  input  logic [$clog2(D)-1:0]               s_pos_i,
  input  logic                               s_bank_i,     // RF write bank
  input  logic signed [ROWS-1:0][COLS-1:0][AW-1:0] acc_i,
  // reserved DPPU group result
  input  logic signed [AW-1:0]               pr_i,
  input  dppu_tag_t                          pr_tag_i,
  // to the AGU (sampled at the RF swap)
  output logic                               det_win_o,
  output logic [$clog2(COLS)-1:0]            det_col_o,
  output logic                               busy_o,
  // FPT insert port
  output logic                               ins_valid_o,
  output logic [IDXW-1:0]                    ins_row_o,
  output logic [IDXW-1:0]                    ins_col_o,
  output logic [D-1:0]                       ins_allow_o,
  input  logic                               ins_ack_i,
  input  logic                               ins_dup_i,
  // status
  output logic                               scan_done_o,
  output logic [15:0]                        faults_found_o,
  output logic                               timing_err_o   // sticky: capture collision
);

  localparam int unsigned DL = COLS + 3;   // delay-line depth (ages 1..DL)
  localparam int unsigned CW = $clog2(COLS);
  localparam int unsigned RW = $clog2(ROWS);

  typedef struct packed {
    logic                 valid;
    logic                 first;
    logic [$clog2(D)-1:0] pos;
    logic [CW-1:0]        col;
    logic                 bank;
  } dl_t;

  logic          run, armed;
  logic [CW-1:0] c_scan;
  dl_t [DL-1:0]  dl;          // dl[a-1] = entry of age a

  // ---------------- scan control ----------------
  wire win_end = s_valid_i && (s_pos_i == ($clog2(D))'(D - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; armed <= 1'b0; c_scan <= '0;
    end else begin
      if (det_start_i && !run) armed <= 1'b1;
      if (armed && s_valid_i && s_pos_i == '0) begin
        run <= 1'b1; armed <= 1'b0; c_scan <= '0;
      end
      if (run && win_end) begin
        if (c_scan == CW'(COLS - 1)) run <= 1'b0;
        c_scan <= c_scan + 1'b1;
      end
    end
  end

  wire run_now = run || (armed && s_valid_i && s_pos_i == '0);
  assign det_win_o = run;
  assign det_col_o = c_scan;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dl <= '0;
    else begin
      dl[0] <= '{valid: s_valid_i && run_now, first: s_first_i, pos: s_pos_i,
                 col: (run ? c_scan : '0), bank: s_bank_i};
      for (int a = 1; a < DL; a++) dl[a] <= dl[a-1];
    end
  end

  // ---------------- capture events ----------------
  logic bar_we, ar_we, bar_bank, ar_bank, bar_first;
  logic [CW-1:0] bar_col, ar_col;
  logic [$clog2(D)-1:0] bar_pos, ar_pos;
  logic [1:0] n_bar, n_ar;

  always_comb begin
    bar_we = 1'b0; ar_we = 1'b0; bar_bank = 1'b0; ar_bank = 1'b0; bar_first = 1'b0;
    bar_col = '0; ar_col = '0; bar_pos = '0; ar_pos = '0; n_bar = '0; n_ar = '0;
    for (int a = 1; a <= DL; a++) begin
      if (dl[a-1].valid && int'(dl[a-1].pos) % GS == 0 && a == int'(dl[a-1].col) + 2) begin
        if (!bar_we) begin
          bar_we = 1'b1; bar_bank = dl[a-1].bank; bar_col = dl[a-1].col;
          bar_pos = dl[a-1].pos; bar_first = dl[a-1].first;
        end
        n_bar = n_bar + 1'b1;
      end
      if (dl[a-1].valid && int'(dl[a-1].pos) % GS == GS - 1 && a == int'(dl[a-1].col) + 3) begin
        if (!ar_we) begin
          ar_we = 1'b1; ar_bank = dl[a-1].bank; ar_col = dl[a-1].col; ar_pos = dl[a-1].pos;
        end
        n_ar = n_ar + 1'b1;
      end
    end
  end

  // rows whose segment (j mod NG) is the captured one, and column data
  logic [ROWS-1:0] bar_mask, ar_mask;
  logic signed [ROWS-1:0][AW-1:0] bar_data, ar_data;
  always_comb begin
    for (int j = 0; j < ROWS; j++) begin
      bar_mask[j] = (j % NG) == int'(bar_pos) / GS;
      ar_mask[j]  = (j % NG) == int'(ar_pos) / GS;
      bar_data[j] = bar_first ? '0 : acc_i[j][bar_col];
      ar_data[j]  = acc_i[j][ar_col];
    end
  end

  // ---------------- CLB ----------------
  logic signed [1:0][ROWS-1:0][AW-1:0] bar_s, ar_s, pr_s;
  logic [1:0][ROWS-1:0] ar_v, pr_v;
  logic [1:0][CW-1:0]   bank_col;
  wire pr_we = pr_tag_i.valid && pr_tag_i.det && int'(pr_tag_i.idx) < ROWS;
  wire [RW-1:0] pr_row = RW'(pr_tag_i.idx);

  logic [1:0][ROWS-1:0] mism;   // mismatches found this cycle, per CLB bank
  logic [1:0][ROWS-1:0] done;   // checks made this cycle

  clb #(.NR(ROWS)) u_clb (
    .clk, .rst_n,
    .bar_we_i(bar_we), .bar_bank_i(bar_bank), .bar_mask_i(bar_mask), .bar_data_i(bar_data),
    .ar_we_i(ar_we),   .ar_bank_i(ar_bank),   .ar_mask_i(ar_mask),   .ar_data_i(ar_data),
    .pr_we_i(pr_we),   .pr_bank_i(pr_tag_i.bank), .pr_row_i(pr_row), .pr_data_i(pr_i), .done_i(done),
    .bar_o(bar_s), .ar_o(ar_s), .pr_o(pr_s), .ar_v_o(ar_v), .pr_v_o(pr_v)
  );

  // ---------------- comparison ----------------
  logic                 last_check;
  always_comb begin
    mism = '0; done = '0; last_check = 1'b0;
    for (int j = 0; j < ROWS; j++) begin
      if (ar_we && ar_mask[j]) begin
        if (pr_we && pr_row == RW'(j) && pr_tag_i.bank == ar_bank) begin
          done[ar_bank][j] = 1'b1;
          if (ar_data[j] != bar_s[ar_bank][j] + pr_i) mism[ar_bank][j] = 1'b1;
        end else if (pr_v[ar_bank][j]) begin
          done[ar_bank][j] = 1'b1;
          if (ar_data[j] != bar_s[ar_bank][j] + pr_s[ar_bank][j]) mism[ar_bank][j] = 1'b1;
        end
      end
    end
    if (pr_we && !(ar_we && ar_mask[pr_row] && pr_tag_i.bank == ar_bank)
        && ar_v[pr_tag_i.bank][pr_row]) begin
      done[pr_tag_i.bank][pr_row] = 1'b1;
      if (ar_s[pr_tag_i.bank][pr_row] != bar_s[pr_tag_i.bank][pr_row] + pr_i)
        mism[pr_tag_i.bank][pr_row] = 1'b1;
    end
    if (pr_we && pr_row == RW'(ROWS - 1) && bank_col[pr_tag_i.bank] == CW'(COLS - 1))
      last_check = 1'b1;
  end

  // ---------------- found faults -> FPT ----------------
  logic [1:0][ROWS-1:0] found;
  logic                 pick_v, pick_b;
  logic [RW-1:0]        pick_r;

  always_comb begin
    pick_v = 1'b0; pick_b = 1'b0; pick_r = '0;
    for (int b = 0; b < 2; b++)
      for (int j = 0; j < ROWS; j++)
        if (found[b][j] && !pick_v) begin
          pick_v = 1'b1; pick_b = b[0]; pick_r = RW'(j);
        end
  end

  assign ins_valid_o = pick_v;
  assign ins_row_o   = IDXW'(pick_r);
  assign ins_col_o   = IDXW'(bank_col[pick_b]);
  always_comb
    for (int e = 0; e < D; e++) ins_allow_o[e] = (e % NG) != 0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      found <= '0; bank_col <= '0; faults_found_o <= '0; scan_done_o <= 1'b0;
      timing_err_o <= 1'b0;
    end else begin
      if (bar_we) bank_col[bar_bank] <= bar_col;
      if (pick_v && ins_ack_i) begin
        found[pick_b][pick_r] <= 1'b0;
        if (!ins_dup_i) faults_found_o <= faults_found_o + 1'b1;
      end
      for (int b = 0; b < 2; b++)
        for (int j = 0; j < ROWS; j++)
          if (mism[b][j]) found[b][j] <= 1'b1;
      scan_done_o <= last_check;
      if (n_bar > 2'd1 || n_ar > 2'd1) timing_err_o <= 1'b1;
    end
  end

  assign busy_o = run || armed || (found != '0);

endmodule
