// bcp_pkg: types and constants shared by the BCP coprocessor.
//
// A literal is a variable index plus a negation flag. Variable index 0 is reserved to
// mean "no literal in this slot", so a 6-bit index addresses the 63 variables the
// coprocessor supports and a clause may have one, two or three literals. Every clause
// processor keeps a two-bit assignment next to each literal (unassigned, false, true).
// The 63-variable and 3-literal figures follow the paper; the encodings are this
// design's own choice.
package bcp_pkg;

  localparam int unsigned NUM_VARS = 63;                    // variables held on chip
  localparam int unsigned VAR_W    = $clog2(NUM_VARS + 1);  // 6 bits, index 0 = empty slot
  localparam int unsigned LITS     = 3;                     // literals per clause processor
  localparam int unsigned CP_IDX_W = 8;                     // addresses up to 256 clause processors

  typedef logic [VAR_W-1:0] var_t;

  // Value of a variable as seen by a clause processor.
  typedef enum logic [1:0] {
    VAL_UNASSIGNED = 2'b00,
    VAL_FALSE      = 2'b10,
    VAL_TRUE       = 2'b11
  } val_t;

  typedef struct packed {
    logic neg;   // 1: the literal is the negation of the variable
    var_t v;     // 0: slot unused
  } lit_t;

  // One literal slot as loaded by the host: the literal plus the current value of its variable.
  typedef struct packed {
    val_t a;
    lit_t l;
  } slot_t;                                   // 9 bits

  typedef slot_t [LITS-1:0] clause_t;         // 27 bits, fits one 32-bit register

  typedef enum logic [2:0] {
    CL_EMPTY      = 3'd0,   // no literal loaded: the clause processor is unused
    CL_UNRESOLVED = 3'd1,   // two or more literals unassigned, none true
    CL_SAT        = 3'd2,   // at least one literal true
    CL_UNIT       = 3'd3,   // exactly one literal unassigned, the others false
    CL_CONFLICT   = 3'd4    // every literal false
  } clause_status_t;

  // Assignment to a variable: an implication or a decision.
  typedef struct packed {
    var_t v;
    logic value;
  } impl_t;                                   // 7 bits

  // Assignment broadcast from the control unit to every clause processor.
  typedef struct packed {
    logic valid;
    var_t v;
    val_t val;          // VAL_UNASSIGNED retracts the variable (backtrack); with v = 0, all
  } bcast_t;

  typedef enum logic [1:0] {
    OP_NOP       = 2'd0,
    OP_UPDATE    = 2'd1,   // overwrite one clause processor's clause
    OP_DECIDE    = 2'd2,   // assign a variable and run BCP to completion
    OP_BACKTRACK = 2'd3    // retract a variable's assignment (variable 0: all of them)
  } op_t;

  typedef struct packed {
    op_t                 op;
    logic [CP_IDX_W-1:0] cp_idx;
    var_t                v;
    logic                value;
    clause_t             clause;
  } cmd_t;

  // Status the control unit reports to the host.
  typedef struct packed {
    logic        busy;        // BCP running for the last decision
    logic        conflict;    // the last decision ended in a conflict
    logic [15:0] stalls;      // cycles BCP waited on a full implication FIFO (saturating)
    logic [15:0] cycles;      // cycles the last decision took, from accept to done (saturating)
  } cu_status_t;

endpackage
