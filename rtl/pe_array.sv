// pe_array -- ROWS x COLS mesh of PEs running an output-stationary dataflow.
//
// Every cycle the array takes one operand tuple: a vector of ROWS weights
// (one per array row) and a vector of COLS input features (one per array
// column). Weights enter column 0 and move one column to the right per
// cycle through the PEs' weight registers; each column's input feature is
// broadcast to all PEs of that column after a skew of c cycles, so that
// PE(r,c) multiplies weight r and input c of the same tuple. The control
// flags (valid/first/last) follow the same column skew. PE(r,c) therefore
// accumulates  sum_t W_r(t) * X_c(t)  over one output-feature iteration.
//
// Timing: a tuple applied in cycle T is accumulated in PE(r,c) at the end
// of cycle T+c+2. When the last tuple of an iteration has been absorbed,
// column c is finished in cycle T_last+c+3, one column per cycle, and the
// array offers that column (ROWS accumulators) on the col_wr_* port, the
// write to the output buffer. acc_o exposes every accumulator for the
// runtime fault detector.
//
// The row/column roles (rows = weight streams, columns = input streams)
// are this design's reading of the array figure; see README.
//
// Only row 0's done flags drive the write-back port: every PE of a column
// finishes in the same cycle, so the other rows' done outputs are unused.
module pe_array
  import hyca_pkg::*;
#(
  parameter int unsigned ROWS = DEF_ROWS,
  parameter int unsigned COLS = DEF_COLS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          valid_i,
  input  logic                          first_i,
  input  logic                          last_i,
  input  logic signed [ROWS-1:0][DW-1:0] w_i,
  input  logic signed [COLS-1:0][DW-1:0] x_i,
  output logic signed [ROWS-1:0][COLS-1:0][AW-1:0] acc_o,
  output logic                          col_wr_valid_o,
  output logic [$clog2(COLS)-1:0]       col_wr_idx_o,
  output logic signed [ROWS-1:0][AW-1:0] col_wr_data_o,
  input  logic [ROWS-1:0][COLS-1:0]     fi_en_i,
  input  logic [$clog2(AW)-1:0]         fi_bit_i,
  input  logic                          fi_val_i
);

  // Column skew: stage k of column c's chain holds the data that column c
  // will see k cycles later. col_x[c]/col_v[c] is the skewed column bus.
  logic signed [COLS-1:0][DW-1:0] col_x;
  logic [COLS-1:0] col_v, col_f, col_l;

  for (genvar c = 0; c < COLS; c++) begin : g_skew
    if (c == 0) begin : g_noskew
      assign col_x[c] = x_i[c];
      assign col_v[c] = valid_i;
      assign col_f[c] = first_i;
      assign col_l[c] = last_i;
    end else begin : g_chain
      logic signed [c-1:0][DW-1:0] xs;
      logic [c-1:0] vs, fs, ls;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          xs <= '0; vs <= '0; fs <= '0; ls <= '0;
        end else begin
          for (int k = 0; k < c; k++) begin
            if (k == c - 1) begin
              xs[k] <= x_i[c]; vs[k] <= valid_i; fs[k] <= first_i; ls[k] <= last_i;
            end else begin
              xs[k] <= xs[k+1]; vs[k] <= vs[k+1]; fs[k] <= fs[k+1]; ls[k] <= ls[k+1];
            end
          end
        end
      end
      assign col_x[c] = xs[0];
      assign col_v[c] = vs[0];
      assign col_f[c] = fs[0];
      assign col_l[c] = ls[0];
    end
  end

  logic signed [ROWS-1:0][COLS:0][DW-1:0] wbus;   // weight passed along each row
  logic [ROWS-1:0][COLS-1:0] done;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    assign wbus[r][0] = w_i[r];
    for (genvar c = 0; c < COLS; c++) begin : g_col
      pe u_pe (
        .clk, .rst_n,
        .valid_i (col_v[c]),
        .first_i (col_f[c]),
        .last_i  (col_l[c]),
        .w_i     (wbus[r][c]),
        .x_i     (col_x[c]),
        .w_o     (wbus[r][c+1]),
        .acc_o   (acc_o[r][c]),
        .done_o  (done[r][c]),
        .fi_en_i (fi_en_i[r][c]),
        .fi_bit_i,
        .fi_val_i
      );
    end
  end

  // At most one column finishes per cycle (iterations are at least COLS
  // tuples long), so a simple priority pick forms the output-buffer write.
  always_comb begin
    col_wr_valid_o = 1'b0;
    col_wr_idx_o   = '0;
    col_wr_data_o  = '0;
    for (int c = 0; c < COLS; c++) begin
      if (done[0][c] && !col_wr_valid_o) begin
        col_wr_valid_o = 1'b1;
        col_wr_idx_o   = ($clog2(COLS))'(c);
        for (int r = 0; r < ROWS; r++) col_wr_data_o[r] = acc_o[r][c];
      end
    end
  end

endmodule
