// fpt -- fault PE table: the coordinates of the faulty PEs that the DPPU
// repairs. ENTRIES (= DPPU size, 32) entries of a 5-bit row and a 5-bit
// column index, plus a valid bit added by this design.
//
// Two write paths:
//  * host port: write entry `host_idx_i` directly (e.g. results of a
//    power-on self test or of repair planning), or clear the table;
//  * insert port, used by the runtime fault detector: a newly found
//    faulty PE is put in the lowest free entry whose bit is set in
//    `ins_allow_i`; nothing is written if the PE is already listed
//    (ins_dup_o) or if no allowed entry is free (ins_full_o).
// Host writes take priority. Writes take effect at the next clock edge;
// ins_* status outputs are combinational for the current request; an
// insert request is consumed (ins_ack_o) unless a host write has priority.
module fpt
  import hyca_pkg::*;
#(
  parameter int unsigned ENTRIES = DEF_NG * DEF_GS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear_i,
  input  logic                          host_we_i,
  input  logic [$clog2(ENTRIES)-1:0]    host_idx_i,
  input  fpt_entry_t                    host_entry_i,
  input  logic                          ins_valid_i,
  input  logic [IDXW-1:0]               ins_row_i,
  input  logic [IDXW-1:0]               ins_col_i,
  input  logic [ENTRIES-1:0]            ins_allow_i,
  output logic                          ins_dup_o,
  output logic                          ins_full_o,
  output logic                          ins_ack_o,    // request consumed this cycle
  output fpt_entry_t [ENTRIES-1:0]      table_o
);

  fpt_entry_t [ENTRIES-1:0] tab;
  logic                         free_found;
  logic [$clog2(ENTRIES)-1:0]   free_idx;

  always_comb begin
    ins_dup_o  = 1'b0;
    free_found = 1'b0;
    free_idx   = '0;
    for (int e = 0; e < ENTRIES; e++) begin
      if (tab[e].valid && tab[e].row == ins_row_i && tab[e].col == ins_col_i)
        ins_dup_o = 1'b1;
      if (!tab[e].valid && ins_allow_i[e] && !free_found) begin
        free_found = 1'b1;
        free_idx   = ($clog2(ENTRIES))'(e);
      end
    end
    ins_full_o = ins_valid_i && !ins_dup_o && !free_found;
    ins_ack_o  = ins_valid_i && !clear_i && !host_we_i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tab <= '0;
    end else if (clear_i) begin
      tab <= '0;
    end else if (host_we_i) begin
      tab[host_idx_i] <= host_entry_i;
    end else if (ins_valid_i && !ins_dup_o && free_found) begin
      tab[free_idx] <= '{valid: 1'b1, row: ins_row_i, col: ins_col_i};
    end
  end

  assign table_o = tab;

endmodule
