// redundant_ring -- N arithmetic units (multipliers or adders) plus one
// spare, connected as a directed ring so that a single faulty unit can be
// bypassed without a high-fan-out shared spare.
//
// Physical units: U0 is the spare, U1..UN are the regular units that serve
// logical slots 0..N-1. The ring runs U0 -> U1 -> ... -> UN. Every unit
// has a 2:1 operand mux (its own slot's operands or those of the slot of
// its downstream neighbour) and every slot has a 2:1 result mux (its own
// unit or the upstream unit). When regular unit f (slot f, physical U(f+1))
// is marked faulty, slots 0..f shift one unit upstream: slot i is computed
// by U(i) and the spare takes slot 0; slots above f are unchanged. Results
// are combinational.
//
// `inj_en_i/inj_unit_i` corrupt (invert) the result of one physical unit,
// to model a hardware fault in evaluation; this port is this design's
// addition. OP selects multiply (signed, IW x IW -> OW) or add (signed,
// sign-extended to OW).
module redundant_ring
  import hyca_pkg::*;
#(
  parameter int unsigned N  = 4,
  parameter ring_op_e    OP = OP_MUL,
  parameter int unsigned IW = 8,
  parameter int unsigned OW = 16
) (
  input  logic signed [N-1:0][IW-1:0]  a_i,
  input  logic signed [N-1:0][IW-1:0]  b_i,
  input  logic                         fault_en_i,   // one regular unit is bypassed
  input  logic [$clog2(N+1)-1:0]       fault_idx_i,  // its slot index 0..N-1
  input  logic                         inj_en_i,
  input  logic [$clog2(N+1)-1:0]       inj_unit_i,   // physical unit 0 (spare)..N
  output logic signed [N-1:0][OW-1:0]  y_o
);

  logic signed [N:0][IW-1:0] ua, ub;
  logic signed [N:0][OW-1:0] uy;

  // operand muxes
  always_comb begin
    ua[0] = a_i[0];
    ub[0] = b_i[0];
    for (int p = 1; p <= N; p++) begin
      if (fault_en_i && p < N && ($clog2(N+1))'(p) <= fault_idx_i) begin
        ua[p] = a_i[p];     // take over the downstream slot
        ub[p] = b_i[p];
      end else begin
        ua[p] = a_i[p-1];
        ub[p] = b_i[p-1];
      end
    end
  end

  // the N+1 physical units
  for (genvar p = 0; p <= N; p++) begin : g_unit
    logic signed [OW-1:0] res;
    if (OP == OP_MUL) begin : g_mul
      assign res = OW'($signed(ua[p])) * OW'($signed(ub[p]));
    end else begin : g_add
      assign res = OW'($signed(ua[p])) + OW'($signed(ub[p]));
    end
    assign uy[p] = (inj_en_i && inj_unit_i == ($clog2(N+1))'(p)) ? ~res : res;
  end

  // result muxes
  always_comb begin
    for (int i = 0; i < N; i++)
      y_o[i] = (fault_en_i && ($clog2(N+1))'(i) <= fault_idx_i) ? uy[i] : uy[i+1];
  end

endmodule
