// hyca_top -- deep-learning accelerator with the hybrid computing
// architecture (HyCA): a ROWS x COLS output-stationary PE array plus a
// grouped DPPU that recomputes, D cycles late, the outputs of the PEs
// listed in the fault PE table, and overwrites their wrong results in the
// output buffer.
//
// Data path per cycle: the sequencer (hyca_ctrl) reads one weight line and
// one input line; the tuple goes to the PE array and is copied into the
// write banks of the WRF and IRF. Every D tuples the register files swap;
// during the following D cycles the AGU steers each DPPU group to the
// WRF row / IRF row of one faulty PE, the groups' partial dot products
// are accumulated per FPT entry in the ORF, and after the last window of
// an output-feature iteration the ORF writes the recomputed features into
// the output buffer with a one-feature mask. The array's own column
// write-backs have priority on the output-buffer port; the ORF waits
// (stall) while the array writes.
//
// Runtime fault detection (fault_detect + CLB) borrows DPPU group 0 to
// recheck one array column per window and adds faulty PEs to the FPT.
// Columns at or beyond active_cols are not written back (degraded mode,
// see repair_planner, which computes FPT contents and active_cols from a
// fault map).
//
// Host side: write ports of the input/weight buffers, read port of the
// output buffer, FPT writes, operation start/config, DPPU redundancy
// settings. fi_* and *_inj_* inputs inject faults for evaluation.
// Timing: an iteration of K tuples finishes its array write-back about
// K + COLS + 3 cycles after its first tuple; the repaired features follow
// after the next window's recompute (D + 5 cycles) plus one cycle each.
//
// Source: the block structure follows the paper's Fig. 4. Port sharing of
// the output buffer, the detector wiring and the configuration/injection
// inputs are this design's choices.
module hyca_top
  import hyca_pkg::*;
#(
  parameter int unsigned ROWS       = DEF_ROWS,
  parameter int unsigned COLS       = DEF_COLS,
  parameter int unsigned D          = DEF_D,
  parameter int unsigned GS         = DEF_GS,
  parameter int unsigned NG         = DEF_NG,
  parameter int unsigned IBUF_DEPTH = 4096,    // 128 KB of COLS-byte lines
  parameter int unsigned WBUF_DEPTH = 16384,   // 512 KB of ROWS-byte lines
  parameter int unsigned OBUF_DEPTH = 1024,    // 128 KB of ROWS x 4-byte lines
  parameter int unsigned ITW        = 16,
  localparam int unsigned IAW = $clog2(IBUF_DEPTH),
  localparam int unsigned WAW = $clog2(WBUF_DEPTH),
  localparam int unsigned OAW = $clog2(OBUF_DEPTH)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // host: buffers
  input  logic                           ibuf_we_i,
  input  logic [IAW-1:0]                 ibuf_waddr_i,
  input  logic [COLS-1:0][DW-1:0]        ibuf_wdata_i,
  input  logic                           wbuf_we_i,
  input  logic [WAW-1:0]                 wbuf_waddr_i,
  input  logic [ROWS-1:0][DW-1:0]        wbuf_wdata_i,
  input  logic                           obuf_re_i,
  input  logic [OAW-1:0]                 obuf_raddr_i,
  output logic [ROWS-1:0][AW-1:0]        obuf_rdata_o,
  // host: fault PE table
  input  logic                           fpt_clear_i,
  input  logic                           fpt_we_i,
  input  logic [$clog2(D)-1:0]           fpt_idx_i,
  input  fpt_entry_t                     fpt_entry_i,
  output fpt_entry_t [D-1:0]             fpt_o,
  output logic                           fpt_full_o,     // detector found no free entry
  // host: operation
  input  logic                           start_i,
  input  logic [ITW-1:0]                 n_iter_i,
  input  logic [ITW-1:0]                 k_win_i,
  input  logic [IAW-1:0]                 in_base_i,
  input  logic [IAW-1:0]                 in_stride_i,
  input  logic [WAW-1:0]                 w_base_i,
  input  logic [WAW-1:0]                 w_stride_i,
  input  logic [OAW-1:0]                 out_base_i,
  input  logic [$clog2(COLS):0]          active_cols_i,
  output logic                           busy_o,
  // host: fault detection
  input  logic                           det_start_i,
  output logic                           det_busy_o,
  output logic                           det_scan_done_o,
  output logic [15:0]                    det_faults_found_o,
  // DPPU redundancy configuration
  input  logic [NG-1:0]                  mul_fault_en_i,
  input  logic [NG-1:0][$clog2(GS+1)-1:0] mul_fault_idx_i,
  input  logic [NG-1:0]                  add_fault_en_i,
  input  logic [NG-1:0][$clog2(GS)-1:0]  add_fault_idx_i,
  // fault injection (evaluation)
  input  logic [ROWS-1:0][COLS-1:0]      fi_en_i,
  input  logic [$clog2(AW)-1:0]          fi_bit_i,
  input  logic                           fi_val_i,
  input  logic [NG-1:0]                  mul_inj_en_i,
  input  logic [NG-1:0][$clog2(GS+1)-1:0] mul_inj_unit_i,
  input  logic [NG-1:0]                  add_inj_en_i,
  input  logic [NG-1:0][$clog2(GS)-1:0]  add_inj_unit_i,
  // status / events
  output logic                           ev_swap_o,        // register-file swap
  output logic                           ev_dppu_wr_o,     // recomputed feature written
  output logic                           ev_stall_o,       // ORF write-back waits for the array
  output logic [15:0]                    cols_discarded_o,
  output logic                           orf_overrun_o,
  output logic                           det_timing_err_o
);

  // ---------------- buffers ----------------
  logic                 rd_en;
  logic [IAW-1:0]       in_addr;
  logic [WAW-1:0]       w_addr;
  logic [COLS-1:0][DW-1:0] x_line;
  logic [ROWS-1:0][DW-1:0] w_line;

  line_buffer #(.WIDTH(COLS*DW), .DEPTH(IBUF_DEPTH)) u_ibuf (
    .clk, .we_i(ibuf_we_i), .waddr_i(ibuf_waddr_i), .wdata_i(ibuf_wdata_i),
    .re_i(rd_en), .raddr_i(in_addr), .rdata_o(x_line)
  );
  line_buffer #(.WIDTH(ROWS*DW), .DEPTH(WBUF_DEPTH)) u_wbuf (
    .clk, .we_i(wbuf_we_i), .waddr_i(wbuf_waddr_i), .wdata_i(wbuf_wdata_i),
    .re_i(rd_en), .raddr_i(w_addr), .rdata_o(w_line)
  );

  // ---------------- sequencer ----------------
  logic s_valid, s_first, s_last, swap, win_first, win_last;
  logic [$clog2(D)-1:0] s_pos;
  logic [ITW-1:0] win_iter;
  logic col_wr_valid;
  logic [$clog2(COLS)-1:0] col_wr_idx;
  logic signed [ROWS-1:0][AW-1:0] col_wr_data;
  logic arr_we;
  logic [OAW-1:0] arr_addr;
  logic ctrl_busy;

  hyca_ctrl #(.COLS(COLS), .D(D), .IADDRW(IAW), .WADDRW(WAW), .OADDRW(OAW), .ITW(ITW)) u_ctrl (
    .clk, .rst_n,
    .start_i, .n_iter_i, .k_win_i, .in_base_i, .in_stride_i, .w_base_i, .w_stride_i,
    .out_base_i, .active_cols_i,
    .busy_o(ctrl_busy),
    .rd_en_o(rd_en), .in_addr_o(in_addr), .w_addr_o(w_addr),
    .s_valid_o(s_valid), .s_first_o(s_first), .s_last_o(s_last), .s_pos_o(s_pos),
    .swap_o(swap), .win_first_o(win_first), .win_last_o(win_last), .win_iter_o(win_iter),
    .col_wr_valid_i(col_wr_valid), .col_wr_idx_i(col_wr_idx),
    .obuf_we_o(arr_we), .obuf_addr_o(arr_addr), .cols_discarded_o
  );

  // ---------------- 2-D computing array ----------------
  logic signed [ROWS-1:0][COLS-1:0][AW-1:0] acc_all;

  pe_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .rst_n,
    .valid_i(s_valid), .first_i(s_first), .last_i(s_last),
    .w_i(w_line), .x_i(x_line),
    .acc_o(acc_all),
    .col_wr_valid_o(col_wr_valid), .col_wr_idx_o(col_wr_idx), .col_wr_data_o(col_wr_data),
    .fi_en_i, .fi_bit_i, .fi_val_i
  );

  // ---------------- register files ----------------
  logic [NG-1:0][$clog2(ROWS)-1:0] wrf_row;
  logic [NG-1:0][$clog2(COLS)-1:0] irf_row;
  logic [NG-1:0][GS-1:0][DW-1:0]   wseg, xseg;
  logic wrf_bank, irf_bank;

  pingpong_rf #(.NROWS(ROWS), .D(D), .GS(GS), .NG(NG)) u_wrf (
    .clk, .rst_n, .wr_en_i(s_valid), .wr_col_i(s_pos), .wr_data_i(w_line),
    .swap_i(swap), .rd_row_i(wrf_row), .rd_data_o(wseg), .rd_bank_o(wrf_bank)
  );
  pingpong_rf #(.NROWS(COLS), .D(D), .GS(GS), .NG(NG)) u_irf (
    .clk, .rst_n, .wr_en_i(s_valid), .wr_col_i(s_pos), .wr_data_i(x_line),
    .swap_i(swap), .rd_row_i(irf_row), .rd_data_o(xseg), .rd_bank_o(irf_bank)
  );

  // both register files are written and swapped together
  a_rf_banks: assert property (@(posedge clk) !rst_n || wrf_bank == irf_bank);

  // ---------------- FPT, AGU ----------------
  fpt_entry_t [D-1:0] fpt_tab;
  logic ins_valid, ins_dup, ins_ack;
  logic [IDXW-1:0] ins_row, ins_col;
  logic [D-1:0] ins_allow;

  fpt #(.ENTRIES(D)) u_fpt (
    .clk, .rst_n, .clear_i(fpt_clear_i),
    .host_we_i(fpt_we_i), .host_idx_i(fpt_idx_i), .host_entry_i(fpt_entry_i),
    .ins_valid_i(ins_valid), .ins_row_i(ins_row), .ins_col_i(ins_col),
    .ins_allow_i(ins_allow), .ins_dup_o(ins_dup), .ins_full_o(fpt_full_o), .ins_ack_o(ins_ack),
    .table_o(fpt_tab)
  );
  assign fpt_o = fpt_tab;

  dppu_tag_t [NG-1:0] agu_tag, dppu_tag;
  logic det_win;
  logic [$clog2(COLS)-1:0] det_col;
  logic dr_valid, dr_bank, dr_ready;
  logic [$clog2(D)-1:0] dr_idx;
  logic signed [AW-1:0] dr_data;
  logic [OAW-1:0] dr_addr;
  logic [ROWS-1:0] dr_mask;

  agu #(.ROWS(ROWS), .COLS(COLS), .D(D), .NG(NG), .OADDRW(OAW), .ITW(ITW)) u_agu (
    .clk, .rst_n, .fpt_i(fpt_tab),
    .swap_i(swap), .win_first_i(win_first), .win_last_i(win_last), .win_iter_i(win_iter),
    .det_en_i(det_win), .det_col_i(det_col), .rf_bank_i(wrf_bank),
    .wrf_row_o(wrf_row), .irf_row_o(irf_row), .tag_o(agu_tag),
    .out_base_i, .dr_bank_i(dr_bank), .dr_idx_i(dr_idx), .dr_addr_o(dr_addr), .dr_mask_o(dr_mask)
  );

  // ---------------- DPPU, ORF ----------------
  logic signed [NG-1:0][AW-1:0] psum;

  dppu #(.GS(GS), .NG(NG), .TAGW($bits(dppu_tag_t))) u_dppu (
    .clk, .rst_n, .w_i(wseg), .x_i(xseg), .tag_i(agu_tag),
    .mul_fault_en_i, .mul_fault_idx_i, .add_fault_en_i, .add_fault_idx_i,
    .mul_inj_en_i, .mul_inj_unit_i, .add_inj_en_i, .add_inj_unit_i,
    .psum_o(psum), .tag_o(dppu_tag)
  );

  logic orf_busy;
  orf #(.ENTRIES(D), .NG(NG)) u_orf (
    .clk, .rst_n, .psum_i(psum), .tag_i(dppu_tag),
    .dr_valid_o(dr_valid), .dr_bank_o(dr_bank), .dr_idx_o(dr_idx), .dr_data_o(dr_data),
    .dr_ready_i(dr_ready), .busy_o(orf_busy), .overrun_o(orf_overrun_o)
  );

  // ---------------- output buffer port: array first, then DPPU ----------------
  logic                    ob_we;
  logic [OAW-1:0]          ob_addr;
  logic [ROWS-1:0]         ob_mask;
  logic [ROWS-1:0][AW-1:0] ob_data;

  assign dr_ready = !arr_we;
  always_comb begin
    if (arr_we) begin
      ob_we = 1'b1; ob_addr = arr_addr; ob_mask = '1; ob_data = col_wr_data;
    end else begin
      ob_we = dr_valid; ob_addr = dr_addr; ob_mask = dr_mask;
      for (int r = 0; r < ROWS; r++) ob_data[r] = dr_data;
    end
  end

  out_buffer #(.ROWS(ROWS), .AWID(AW), .DEPTH(OBUF_DEPTH)) u_obuf (
    .clk, .we_i(ob_we), .waddr_i(ob_addr), .wmask_i(ob_mask), .wdata_i(ob_data),
    .re_i(obuf_re_i), .raddr_i(obuf_raddr_i), .rdata_o(obuf_rdata_o)
  );

  // ---------------- runtime fault detection ----------------
  fault_detect #(.ROWS(ROWS), .COLS(COLS), .D(D), .GS(GS), .NG(NG)) u_det (
    .clk, .rst_n, .det_start_i,
    .s_valid_i(s_valid), .s_first_i(s_first), .s_pos_i(s_pos), .s_bank_i(~wrf_bank),
    .acc_i(acc_all),
    .pr_i(psum[0]), .pr_tag_i(dppu_tag[0]),
    .det_win_o(det_win), .det_col_o(det_col), .busy_o(det_busy_o),
    .ins_valid_o(ins_valid), .ins_row_o(ins_row), .ins_col_o(ins_col), .ins_allow_o(ins_allow),
    .ins_ack_i(ins_ack), .ins_dup_i(ins_dup),
    .scan_done_o(det_scan_done_o), .faults_found_o(det_faults_found_o),
    .timing_err_o(det_timing_err_o)
  );

  assign busy_o       = ctrl_busy || orf_busy;
  assign ev_swap_o    = swap;
  assign ev_dppu_wr_o = dr_valid && dr_ready;
  assign ev_stall_o   = dr_valid && !dr_ready;

endmodule
