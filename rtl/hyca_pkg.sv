// hyca_pkg -- types and default sizes shared by the HyCA fault-tolerant
// accelerator. A 2-D output-stationary PE array is shadowed by a grouped
// dot-product unit (DPPU) that recomputes the outputs of faulty PEs from
// ping-pong register-file copies of the operands.
//
// Defaults follow the evaluated configuration: 32x32 array, DPPU of 32
// multipliers, recompute delay D = 32 cycles, 8-bit operands, 16-bit
// products and 32-bit accumulators. Group size 4 (eight groups G1..G8)
// follows the DPPU figure and the "every four multipliers share a spare"
// redundancy setting; the text also mentions groups of 8, see README.
//
// Source: default sizes follow the paper's main configuration (32x32 array,
// DPPU of 32 multipliers in eight groups, D = Col = 32, 5-bit FPT indices).
// Operand and product widths and the tag layout are this design's choices.
package hyca_pkg;

  localparam int unsigned DEF_ROWS = 32;
  localparam int unsigned DEF_COLS = 32;
  localparam int unsigned DEF_D    = 32;   // recompute delay = register-file window
  localparam int unsigned DEF_GS   = 4;    // multipliers per DPPU group
  localparam int unsigned DEF_NG   = 8;    // DPPU groups (DPPU size 32)
  localparam int unsigned DW       = 8;    // weight / input feature width
  localparam int unsigned PW       = 16;   // product register width
  localparam int unsigned AW       = 32;   // accumulator width
  localparam int unsigned IDXW     = 5;    // FPT row / column index width

  // One fault PE table entry: 5-bit row and 5-bit column index of a faulty
  // PE plus a valid flag.
  typedef struct packed {
    logic            valid;
    logic [IDXW-1:0] row;
    logic [IDXW-1:0] col;
  } fpt_entry_t;

  // Tag that travels with every DPPU group operation.
  typedef struct packed {
    logic       valid;  // the group does useful work this cycle
    logic       det;    // fault-detection check (not a repair recompute)
    logic       fin;    // last cycle of the last window of an iteration
    logic       clr;    // first contribution to this ORF entry in the iteration
    logic       bank;   // ORF bank (repair) or CLB bank (detection)
    logic [7:0] idx;    // FPT entry (repair) or array row under test (detection)
  } dppu_tag_t;

  // Operation performed by a ring-protected unit group.
  typedef enum logic {OP_MUL = 1'b0, OP_ADD = 1'b1} ring_op_e;

endpackage
