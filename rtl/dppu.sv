// dppu -- grouped dot-production processing unit: NG independent groups
// of GS multipliers each (DPPU size NG*GS, 32 by default as eight groups
// G1..G8 of four). Each group takes its own operand segment from its own
// WRF/IRF read port and recomputes a different faulty PE, so the DPPU
// size need not divide the row length of the register files. Each group
// has its own multiplier-ring and adder-ring redundancy settings.
// Latency and tag handling are those of dppu_group.
//
// Source: grouping of the DPPU follows the paper's Fig. 6 (eight groups of
// four multipliers for a 32-wide DPPU). Entry-to-group assignment is this
// design's choice (see agu). Interface: per group GS weights, GS inputs and a
// tag in; a partial dot product and the tag out, 2 + log2(GS) cycles later.
module dppu
  import hyca_pkg::*;
#(
  parameter int unsigned GS   = DEF_GS,
  parameter int unsigned NG   = DEF_NG,
  parameter int unsigned TAGW = 8
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic [NG-1:0][GS-1:0][DW-1:0]       w_i,
  input  logic [NG-1:0][GS-1:0][DW-1:0]       x_i,
  input  logic [NG-1:0][TAGW-1:0]             tag_i,
  input  logic [NG-1:0]                       mul_fault_en_i,
  input  logic [NG-1:0][$clog2(GS+1)-1:0]     mul_fault_idx_i,
  input  logic [NG-1:0]                       add_fault_en_i,
  input  logic [NG-1:0][$clog2(GS)-1:0]       add_fault_idx_i,
  input  logic [NG-1:0]                       mul_inj_en_i,
  input  logic [NG-1:0][$clog2(GS+1)-1:0]     mul_inj_unit_i,
  input  logic [NG-1:0]                       add_inj_en_i,
  input  logic [NG-1:0][$clog2(GS)-1:0]       add_inj_unit_i,
  output logic signed [NG-1:0][AW-1:0]        psum_o,
  output logic [NG-1:0][TAGW-1:0]             tag_o
);

  for (genvar g = 0; g < NG; g++) begin : g_grp
    dppu_group #(.GS(GS), .TAGW(TAGW)) u_grp (
      .clk, .rst_n,
      .w_i(w_i[g]), .x_i(x_i[g]), .tag_i(tag_i[g]),
      .mul_fault_en_i(mul_fault_en_i[g]), .mul_fault_idx_i(mul_fault_idx_i[g]),
      .add_fault_en_i(add_fault_en_i[g]), .add_fault_idx_i(add_fault_idx_i[g]),
      .mul_inj_en_i(mul_inj_en_i[g]),     .mul_inj_unit_i(mul_inj_unit_i[g]),
      .add_inj_en_i(add_inj_en_i[g]),     .add_inj_unit_i(add_inj_unit_i[g]),
      .psum_o(psum_o[g]), .tag_o(tag_o[g])
    );
  end

endmodule
