// orf -- ping-pong output register file of the DPPU.
//
// Each of the two banks holds one partial/final recomputed output per FPT
// entry (ENTRIES x AW bits). The bank is the parity of the output-feature
// iteration, so the DPPU accumulates iteration i+1 into one bank while the
// other bank is written back to the output buffer.
//
// Accumulate side: every cycle each DPPU group may deliver a partial dot
// product for one entry (groups always address different entries). A tag
// with `clr` starts the entry (entry <= psum), otherwise the psum is
// added. Detection results (tag.det) are ignored here.
// Drain side: a tag with `fin` marks the last contribution of an iteration;
// the bank is then drained, one entry per cycle, lowest index first, only
// entries that were written in that iteration, each drain beat handshaken
// by dr_ready_i (the output-buffer arbiter). So the write-back costs one
// cycle per repaired PE. overrun_o (sticky) reports a bank that was
// reused before its drain had finished.
//
// Source: the paper gives a ping-pong ORF between DPPU and output buffer;
// entry width (32-bit accumulators rather than the paper's 64-byte total),
// drain order and the overrun flag are this design's choices.
module orf
  import hyca_pkg::*;
#(
  parameter int unsigned ENTRIES = DEF_D,
  parameter int unsigned NG      = DEF_NG
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic signed [NG-1:0][AW-1:0]       psum_i,
  input  dppu_tag_t [NG-1:0]                 tag_i,
  output logic                               dr_valid_o,
  output logic                               dr_bank_o,
  output logic [$clog2(ENTRIES)-1:0]         dr_idx_o,
  output logic signed [AW-1:0]               dr_data_o,
  input  logic                               dr_ready_i,
  output logic                               busy_o,
  output logic                               overrun_o
);

  logic signed [1:0][ENTRIES-1:0][AW-1:0] mem;
  logic [1:0][ENTRIES-1:0] written;
  logic [1:0] pending;
  logic       draining, dbank;
  logic [ENTRIES-1:0] remain;
  logic       fin;
  logic       fin_bank;
  logic [$clog2(ENTRIES)-1:0] pick;
  logic       have;

  assign fin      = tag_i[NG-1].fin;
  assign fin_bank = tag_i[NG-1].bank;

  always_comb begin
    have = 1'b0;
    pick = '0;
    for (int e = 0; e < ENTRIES; e++)
      if (remain[e] && !have) begin
        have = 1'b1;
        pick = ($clog2(ENTRIES))'(e);
      end
  end

  assign dr_valid_o = draining && have;
  assign dr_bank_o  = dbank;
  assign dr_idx_o   = pick;
  assign dr_data_o  = mem[dbank][pick];
  assign busy_o     = draining || (pending != 2'b00);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem <= '0; written <= '0; pending <= '0; draining <= 1'b0; dbank <= 1'b0;
      remain <= '0; overrun_o <= 1'b0;
    end else begin
      for (int g = 0; g < NG; g++) begin
        if (tag_i[g].valid && !tag_i[g].det) begin
          if (tag_i[g].clr) begin
            mem[tag_i[g].bank][tag_i[g].idx[$clog2(ENTRIES)-1:0]] <= psum_i[g];
            if (pending[tag_i[g].bank] || (draining && dbank == tag_i[g].bank))
              overrun_o <= 1'b1;
          end else begin
            mem[tag_i[g].bank][tag_i[g].idx[$clog2(ENTRIES)-1:0]] <=
              mem[tag_i[g].bank][tag_i[g].idx[$clog2(ENTRIES)-1:0]] + psum_i[g];
          end
          written[tag_i[g].bank][tag_i[g].idx[$clog2(ENTRIES)-1:0]] <= 1'b1;
        end
      end
      if (fin) pending[fin_bank] <= 1'b1;
      if (draining) begin
        if (!have) draining <= 1'b0;
        else if (dr_ready_i) begin
          remain[pick] <= 1'b0;
          if ((remain & ~(ENTRIES'(1) << pick)) == '0) draining <= 1'b0;
        end
      end else begin
        for (int b = 0; b < 2; b++) begin
          if (pending[b] && !draining && !(fin && fin_bank == b[0])) begin
            draining   <= 1'b1;
            dbank      <= b[0];
            remain     <= written[b];
            written[b] <= '0;
            pending[b] <= 1'b0;
            break;
          end
        end
      end
    end
  end

endmodule
