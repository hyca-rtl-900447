// tb_hyca_top -- end-to-end test of the HyCA accelerator at a reduced size
// (16x16 array, D = 16, four DPPU groups of four).
//
// Random signed 8-bit weights and inputs are loaded into the buffers, the
// output features are computed independently in the testbench
// (out[i][r][c] = sum_t W[i][t][r] * X[i][t][c], 32-bit wrap), and the
// output buffer is compared after every operation. Scenarios:
//   1. faulty PEs (stuck-at accumulator bits) listed in the FPT, long
//      iterations: every output must be correct (repair by recompute);
//   2. a nearly full FPT (D - 2 faulty PEs): the DPPU write-back collides
//      with the next array write-back and must stall, results still
//      correct, no ORF overrun;
//   3. a faulty DPPU multiplier and adder, bypassed by the redundancy
//      rings: results correct; without the bypass: wrong results appear;
//   4. runtime fault detection with an empty FPT: the faults the model
//      predicts to be visible are found and entered into the FPT within
//      about ROWS*COLS + COLS cycles, then a rerun repairs them;
//   5. degraded mode: columns from active_cols on are not written.
// Each mechanism is counted; one that never happens counts as a failure.
module tb_hyca_top;
  import hyca_pkg::*;

  localparam int ROWS = 16, COLS = 16, D = 16, GS = 4, NG = 4;
  localparam int IBD = 512, WBD = 512, OBD = 256;
  localparam int IAW = $clog2(IBD), WAW = $clog2(WBD), OAW = $clog2(OBD);
  localparam int MAXI = 12, MAXK = 2 * D;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ibuf_we = 0, wbuf_we = 0, obuf_re = 0;
  logic [IAW-1:0] ibuf_waddr = '0;
  logic [WAW-1:0] wbuf_waddr = '0;
  logic [OAW-1:0] obuf_raddr = '0;
  logic [COLS-1:0][DW-1:0] ibuf_wdata = '0;
  logic [ROWS-1:0][DW-1:0] wbuf_wdata = '0;
  logic [ROWS-1:0][AW-1:0] obuf_rdata;
  logic fpt_clear = 0, fpt_we = 0;
  logic [$clog2(D)-1:0] fpt_idx = '0;
  fpt_entry_t fpt_entry = '0;
  fpt_entry_t [D-1:0] fpt_tab;
  logic start = 0;
  logic [15:0] n_iter = '0, k_win = '0;
  logic [$clog2(COLS):0] active_cols = ($clog2(COLS) + 1)'(COLS);
  logic fpt_full;
  logic busy, det_start = 0, det_busy, det_done, orf_overrun, det_terr;
  logic [15:0] det_found, cols_disc;
  logic [NG-1:0] mul_fen = '0, add_fen = '0, mul_inj = '0, add_inj = '0;
  logic [NG-1:0][$clog2(GS+1)-1:0] mul_fidx = '0, mul_iu = '0;
  logic [NG-1:0][$clog2(GS)-1:0]   add_fidx = '0, add_iu = '0;
  logic [ROWS-1:0][COLS-1:0] fi_en = '0;
  logic [$clog2(AW)-1:0] fi_bit = 5'd2;
  logic fi_val = 1'b1;
  logic ev_swap, ev_dwr, ev_stall;

  hyca_top #(.ROWS(ROWS), .COLS(COLS), .D(D), .GS(GS), .NG(NG),
             .IBUF_DEPTH(IBD), .WBUF_DEPTH(WBD), .OBUF_DEPTH(OBD)) dut (
    .clk, .rst_n,
    .ibuf_we_i(ibuf_we), .ibuf_waddr_i(ibuf_waddr), .ibuf_wdata_i(ibuf_wdata),
    .wbuf_we_i(wbuf_we), .wbuf_waddr_i(wbuf_waddr), .wbuf_wdata_i(wbuf_wdata),
    .obuf_re_i(obuf_re), .obuf_raddr_i(obuf_raddr), .obuf_rdata_o(obuf_rdata),
    .fpt_clear_i(fpt_clear), .fpt_we_i(fpt_we), .fpt_idx_i(fpt_idx), .fpt_entry_i(fpt_entry),
    .fpt_o(fpt_tab), .fpt_full_o(fpt_full),
    .start_i(start), .n_iter_i(n_iter), .k_win_i(k_win),
    .in_base_i('0), .in_stride_i(IAW'(k_win * D)), .w_base_i('0), .w_stride_i(WAW'(k_win * D)),
    .out_base_i('0), .active_cols_i(active_cols), .busy_o(busy),
    .det_start_i(det_start), .det_busy_o(det_busy), .det_scan_done_o(det_done),
    .det_faults_found_o(det_found),
    .mul_fault_en_i(mul_fen), .mul_fault_idx_i(mul_fidx),
    .add_fault_en_i(add_fen), .add_fault_idx_i(add_fidx),
    .fi_en_i(fi_en), .fi_bit_i(fi_bit), .fi_val_i(fi_val),
    .mul_inj_en_i(mul_inj), .mul_inj_unit_i(mul_iu), .add_inj_en_i(add_inj), .add_inj_unit_i(add_iu),
    .ev_swap_o(ev_swap), .ev_dppu_wr_o(ev_dwr), .ev_stall_o(ev_stall),
    .cols_discarded_o(cols_disc), .orf_overrun_o(orf_overrun), .det_timing_err_o(det_terr)
  );

  int checks = 0, failures = 0;
  int n_swap = 0, n_dwr = 0, n_stall = 0, n_repaired_ok = 0, n_ring_ok = 0, n_ring_bad = 0;
  int n_detected = 0, n_discard = 0, cyc = 0;
  logic signed [7:0] W [MAXI][MAXK][ROWS];
  logic signed [7:0] X [MAXI][MAXK][COLS];
  logic signed [31:0] REF [MAXI][ROWS][COLS];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (ev_swap) n_swap++;
    if (ev_dwr) n_dwr++;
    if (ev_stall) n_stall++;
  end

  initial begin : watchdog
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // random data, written to the buffers, and the reference outputs
  task automatic load_data(input int ni, input int kw);
    int K = kw * D;
    for (int i = 0; i < ni; i++) begin
      for (int t = 0; t < K; t++) begin
        for (int r = 0; r < ROWS; r++) W[i][t][r] = 8'($urandom);
        for (int c = 0; c < COLS; c++) X[i][t][c] = 8'($urandom);
      end
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          logic signed [31:0] s = 0;
          for (int t = 0; t < K; t++) s += 32'(W[i][t][r] * X[i][t][c]);
          REF[i][r][c] = s;
        end
      for (int t = 0; t < K; t++) begin
        @(negedge clk);
        ibuf_we = 1; wbuf_we = 1;
        ibuf_waddr = IAW'(i * K + t); wbuf_waddr = WAW'(i * K + t);
        for (int c = 0; c < COLS; c++) ibuf_wdata[c] = X[i][t][c];
        for (int r = 0; r < ROWS; r++) wbuf_wdata[r] = W[i][t][r];
      end
      @(negedge clk);
      ibuf_we = 0; wbuf_we = 0;
    end
  endtask

  task automatic set_fpt(input int idx, input int r, input int c);
    @(negedge clk);
    fpt_we = 1; fpt_idx = ($clog2(D))'(idx);
    fpt_entry = '{valid: 1'b1, row: IDXW'(r), col: IDXW'(c)};
    @(negedge clk);
    fpt_we = 0;
  endtask

  task automatic clear_fpt();
    @(negedge clk); fpt_clear = 1; @(negedge clk); fpt_clear = 0;
  endtask

  task automatic run_op(input int ni, input int kw);
    @(negedge clk);
    n_iter = 16'(ni); k_win = 16'(kw); start = 1;
    @(negedge clk);
    start = 0;
    @(negedge clk);
    while (busy) @(negedge clk);
    repeat (4) @(negedge clk);
  endtask

  // read back and compare; returns the number of wrong features
  task automatic compare(input int ni, input int ncols, input bit expect_ok, output int nbad);
    nbad = 0;
    for (int i = 0; i < ni; i++)
      for (int c = 0; c < ncols; c++) begin
        @(negedge clk);
        obuf_re = 1; obuf_raddr = OAW'(i * COLS + c);
        @(negedge clk);
        obuf_re = 0;
        for (int r = 0; r < ROWS; r++) begin
          if ($signed(obuf_rdata[r]) != REF[i][r][c]) nbad++;
          if (expect_ok) check($signed(obuf_rdata[r]) == REF[i][r][c],
                               $sformatf("out it%0d r%0d c%0d got %0d exp %0d", i, r, c,
                                         $signed(obuf_rdata[r]), REF[i][r][c]));
        end
      end
  endtask

  // detection model: is a stuck-at fault at PE(r,c) visible in the check of
  // window w (segment r mod NG)?
  function automatic bit visible(input int r, input int c, input int w, input int kw);
    int K = kw * D;
    int it = (w * D) / K;
    int base = (w * D) % K;
    int t0 = base + (r % NG) * GS;
    logic signed [31:0] acc = 0, bar = 0, ar = 0, pr = 0;
    for (int t = 0; t < t0 + GS; t++) begin
      logic signed [31:0] p = 32'(W[it][t][r] * X[it][t][c]);
      acc = (t == 0) ? p : acc + p;
      acc[fi_bit] = fi_val;
      if (t == t0 - 1) bar = acc;
      if (t >= t0) pr += p;
      if (t == t0 + GS - 1) ar = acc;
    end
    if (t0 == 0) bar = 0;
    return ar != bar + pr;
  endfunction

  int nbad;
  int fr [4] = '{1, 5, 9, 14};
  int fc [4] = '{0, 3, 3, 15};

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- 1. repair of listed faulty PEs, K = 2D ----
    load_data(3, 2);
    for (int f = 0; f < 4; f++) fi_en[fr[f]][fc[f]] = 1'b1;
    // FPT entries 1,2,3,5 (any entry may hold any PE)
    set_fpt(1, fr[0], fc[0]); set_fpt(2, fr[1], fc[1]);
    set_fpt(3, fr[2], fc[2]); set_fpt(5, fr[3], fc[3]);
    begin
      int d0;
      d0 = n_dwr;
      run_op(3, 2);
      compare(3, COLS, 1'b1, nbad);
      check(n_dwr - d0 == 3 * 4, $sformatf("dppu writes %0d", n_dwr - d0));
      if (nbad == 0) n_repaired_ok++;
    end
    // sanity: without the FPT the injected faults must be visible
    clear_fpt();
    run_op(3, 2);
    compare(3, COLS, 1'b0, nbad);
    check(nbad > 0, "faults visible without repair");

    // ---- 2. a nearly full FPT: write-back collides with the next
    //         iteration's array write-back and stalls ----
    clear_fpt();
    fi_en = '0;
    for (int e = 0; e < D - 2; e++) begin
      int r, c;
      r = (e * 5 + 3) % ROWS;
      c = (e * 7 + e / 4) % COLS;
      fi_en[r][c] = 1'b1;
      set_fpt(e, r, c);
    end
    load_data(3, 2);
    begin
      int s0, d0;
      s0 = n_stall; d0 = n_dwr;
      run_op(3, 2);
      compare(3, COLS, 1'b1, nbad);
      check(n_stall > s0, "write-back stall happened");
      check(n_dwr - d0 == 3 * (D - 2), $sformatf("dppu writes %0d", n_dwr - d0));
      check(!orf_overrun, "no ORF overrun");
    end

    // ---- 3. DPPU redundancy rings ----
    load_data(2, 2);
    mul_inj[2] = 1; mul_iu[2] = 3'd3;     // physical multiplier 3 of group 2 broken
    add_inj[2] = 1; add_iu[2] = 2'd1;     // physical adder 1 of group 2 broken
    mul_fen[2] = 1; mul_fidx[2] = 3'd2;   // bypass slot 2 (physical unit 3)
    add_fen[2] = 1; add_fidx[2] = 2'd0;   // bypass slot 0 (physical unit 1)
    run_op(2, 2);
    compare(2, COLS, 1'b1, nbad);
    if (nbad == 0) n_ring_ok++;
    mul_fen[2] = 0; add_fen[2] = 0;       // no bypass: the fault shows
    run_op(2, 2);
    compare(2, COLS, 1'b0, nbad);
    check(nbad > 0, "broken DPPU unit without bypass gives wrong result");
    if (nbad > 0) n_ring_bad++;
    mul_inj = '0; add_inj = '0;

    // ---- 4. runtime fault detection ----
    clear_fpt();
    fi_en = '0;
    for (int f = 0; f < 4; f++) fi_en[fr[f]][fc[f]] = 1'b1;
    load_data(10, 2);
    begin
      int t_start, t_done, expect_found;
      bit seen [4];
      t_done = -1; expect_found = 0;
      for (int f = 0; f < 4; f++) begin
        seen[f] = visible(fr[f], fc[f], fc[f], 2);
        if (seen[f]) expect_found++;
      end
      @(negedge clk); det_start = 1; @(negedge clk); det_start = 0;
      t_start = cyc;
      fork
        run_op(10, 2);
        begin
          @(posedge clk iff det_done);
          t_done = cyc;
        end
      join
      check(t_done > 0, "detection pass finished");
      $display("detection: %0d cycles (ROWS*COLS+COLS = %0d), found %0d, expected %0d",
               t_done - t_start, ROWS * COLS + COLS, det_found, expect_found);
      check(t_done - t_start >= ROWS * COLS + COLS && t_done - t_start <= ROWS * COLS + COLS + 12,
            "detection time ~ ROWS*COLS + COLS");
      check(int'(det_found) == expect_found, "number of faults found");
      check(!det_terr, "no capture collision");
      check(expect_found > 0, "model predicts some detections");
      for (int f = 0; f < 4; f++) begin
        bit in_tab;
        in_tab = 0;
        for (int e = 0; e < D; e++)
          if (fpt_tab[e].valid && fpt_tab[e].row == IDXW'(fr[f]) && fpt_tab[e].col == IDXW'(fc[f]))
            in_tab = 1;
        check(in_tab == seen[f], $sformatf("fault %0d in FPT = %0d", f, in_tab));
        if (in_tab) n_detected++;
      end
      // repair what was found: rerun, then check every PE that is healthy or listed
      fi_en = '0;
      for (int f = 0; f < 4; f++) if (seen[f]) fi_en[fr[f]][fc[f]] = 1'b1;
      run_op(10, 2);
      compare(10, COLS, 1'b1, nbad);
    end

    // ---- 5. degraded mode: discard columns 12..15 ----
    clear_fpt();
    fi_en = '0;
    load_data(2, 2);
    // mark old contents of the discarded columns
    begin
      int d0;
      d0 = int'(cols_disc);
      active_cols = 12;
      run_op(2, 2);
      compare(2, 12, 1'b1, nbad);
      check(int'(cols_disc) - d0 == 2 * 4, "discarded column write-backs");
      n_discard = int'(cols_disc) - d0;
      active_cols = ($clog2(COLS) + 1)'(COLS);
    end

    // ---- mechanism coverage ----
    $display("events: swaps=%0d dppu_writes=%0d stalls=%0d repaired=%0d ring_ok=%0d ring_bad=%0d detected=%0d discarded=%0d",
             n_swap, n_dwr, n_stall, n_repaired_ok, n_ring_ok, n_ring_bad, n_detected, n_discard);
    check(n_swap > 0, "ping-pong swap happened");
    check(n_dwr > 0, "DPPU overwrite happened");
    check(n_stall > 0, "stall happened");
    check(n_repaired_ok > 0, "repair happened");
    check(n_ring_ok > 0, "ring bypass happened");
    check(n_detected > 0, "detection happened");
    check(n_discard > 0, "column discard happened");
    check(!orf_overrun, "no ORF overrun at end");
    check(!fpt_full, "detector never found the FPT full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
