// hyca_ctrl -- operation sequencer of the accelerator.
//
// An operation is n_iter output-feature iterations of K = k_win * D tuples
// each (every PE produces one output feature per iteration; K is the
// k*k*c dot-product length, padded to a multiple of the window D). Each
// cycle the sequencer reads one input-feature line and one weight line,
// tuple t of iteration i at in_base + i*in_stride + t and
// w_base + i*w_stride + t (the host lays the data out in that order; the
// paper does not describe the address generation of the baseline
// accelerator, so this linear scheme is this design's choice).
//
// One cycle later (buffer read latency) the tuple is on the stream
// outputs, going to the array and, in parallel, to the WRF/IRF. The
// stream carries the iteration flags first/last, the position in the
// D-tuple window, and at the last tuple of each window `swap_o` together
// with that window's information for the AGU. The stream never stalls
// within an operation.
//
// The sequencer also addresses the array's column write-backs: finished
// column c of iteration i goes to out_base + i*COLS + c. Columns at or to
// the right of active_cols are discarded (not written), the degraded mode
// used when faults cannot all be repaired.
module hyca_ctrl
  import hyca_pkg::*;
#(
  parameter int unsigned COLS   = DEF_COLS,
  parameter int unsigned D      = DEF_D,
  parameter int unsigned IADDRW = 12,
  parameter int unsigned WADDRW = 14,
  parameter int unsigned OADDRW = 10,
  parameter int unsigned ITW    = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start_i,
  input  logic [ITW-1:0]           n_iter_i,
  input  logic [ITW-1:0]           k_win_i,
  input  logic [IADDRW-1:0]        in_base_i,
  input  logic [IADDRW-1:0]        in_stride_i,
  input  logic [WADDRW-1:0]        w_base_i,
  input  logic [WADDRW-1:0]        w_stride_i,
  input  logic [OADDRW-1:0]        out_base_i,
  input  logic [$clog2(COLS):0]    active_cols_i,
  output logic                     busy_o,
  // buffer reads
  output logic                     rd_en_o,
  output logic [IADDRW-1:0]        in_addr_o,
  output logic [WADDRW-1:0]        w_addr_o,
  // stream (aligned with buffer read data)
  output logic                     s_valid_o,
  output logic                     s_first_o,
  output logic                     s_last_o,
  output logic [$clog2(D)-1:0]     s_pos_o,
  output logic                     swap_o,
  output logic                     win_first_o,
  output logic                     win_last_o,
  output logic [ITW-1:0]           win_iter_o,
  // array column write-back
  input  logic                     col_wr_valid_i,
  input  logic [$clog2(COLS)-1:0]  col_wr_idx_i,
  output logic                     obuf_we_o,
  output logic [OADDRW-1:0]        obuf_addr_o,
  output logic [15:0]              cols_discarded_o
);

  logic                 run;
  logic [ITW-1:0]       it, wi;          // iteration, window within iteration
  logic [$clog2(D)-1:0] pos;
  logic [IADDRW-1:0]    iaddr, ibase;
  logic [WADDRW-1:0]    waddr, wbase;
  logic [ITW-1:0]       wr_it, it_left;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; it <= '0; wi <= '0; pos <= '0;
      iaddr <= '0; ibase <= '0; waddr <= '0; wbase <= '0;
      s_valid_o <= 1'b0; s_first_o <= 1'b0; s_last_o <= 1'b0; s_pos_o <= '0;
      swap_o <= 1'b0; win_first_o <= 1'b0; win_last_o <= 1'b0; win_iter_o <= '0;
    end else begin
      // stream stage (one cycle behind the read request)
      s_valid_o   <= run;
      s_first_o   <= run && wi == '0 && pos == '0;
      s_last_o    <= run && wi == k_win_i - 1'b1 && pos == ($clog2(D))'(D - 1);
      s_pos_o     <= pos;
      swap_o      <= run && pos == ($clog2(D))'(D - 1);
      win_first_o <= wi == '0;
      win_last_o  <= wi == k_win_i - 1'b1;
      win_iter_o  <= it;
      if (start_i && !run && n_iter_i != '0 && k_win_i != '0) begin
        run <= 1'b1; it <= '0; wi <= '0; pos <= '0;
        iaddr <= in_base_i; ibase <= in_base_i;
        waddr <= w_base_i;  wbase <= w_base_i;
      end else if (run) begin
        pos   <= pos + 1'b1;
        iaddr <= iaddr + 1'b1;
        waddr <= waddr + 1'b1;
        if (pos == ($clog2(D))'(D - 1)) begin
          if (wi == k_win_i - 1'b1) begin
            wi    <= '0;
            it    <= it + 1'b1;
            iaddr <= ibase + in_stride_i;  ibase <= ibase + in_stride_i;
            waddr <= wbase + w_stride_i;   wbase <= wbase + w_stride_i;
            if (it == n_iter_i - 1'b1) run <= 1'b0;
          end else begin
            wi <= wi + 1'b1;
          end
        end
      end
    end
  end

  assign rd_en_o   = run;
  assign in_addr_o = iaddr;
  assign w_addr_o  = waddr;

  // column write-back addressing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_it <= '0; it_left <= '0; cols_discarded_o <= '0;
    end else begin
      if (start_i && !run) begin
        wr_it <= '0; it_left <= n_iter_i;
      end else if (col_wr_valid_i) begin
        if ({1'b0, col_wr_idx_i} >= active_cols_i) cols_discarded_o <= cols_discarded_o + 1'b1;
        if (col_wr_idx_i == ($clog2(COLS))'(COLS - 1)) begin
          wr_it   <= wr_it + 1'b1;
          it_left <= it_left - 1'b1;
        end
      end
    end
  end

  assign obuf_we_o   = col_wr_valid_i && ({1'b0, col_wr_idx_i} < active_cols_i);
  assign obuf_addr_o = out_base_i + OADDRW'(wr_it * COLS) + OADDRW'(col_wr_idx_i);
  assign busy_o      = run || s_valid_o || (it_left != '0);

endmodule
