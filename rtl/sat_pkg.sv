// sat_pkg: types and constants shared by the BCP accelerator.
//
// A literal is a sign bit plus a 6-bit variable number. Variable number 0 is
// reserved to mark an empty literal slot, so one partition can name up to 63
// variables (1..63); 63 variables is the largest formula the accelerator holds
// without partitioning. Each clause processor holds three literals, the clause
// width drawn for the clause processor. Every value assigned to a variable is
// one of three states: unassigned, false or true.
//
// The command, broadcast, implication and status encodings below are this
// design's own choices; only their meaning (update clause, backtrack, propagate
// decision; success / running / implication found / conflict / SAT) follows the
// control unit state diagram of the original design.
package sat_pkg;

  localparam int unsigned VAR_W       = 6;   // bits of a variable number
  localparam int unsigned MAX_VARS    = 63;  // variables per partition (0 reserved)
  localparam int unsigned LITS        = 3;   // literals per clause processor
  localparam int unsigned CP_COUNT    = 224; // clause processors in the BCP engine
  localparam int unsigned CIDX_W      = 16;  // width of a clause processor index

  typedef logic [VAR_W-1:0]  var_t;
  typedef logic [CIDX_W-1:0] cidx_t;

  // One literal: neg=1 means the negated variable. vid==0 is an empty slot.
  typedef struct packed {
    logic neg;
    var_t vid;
  } lit_t;

  // Three-state variable assignment as held inside a clause processor.
  typedef enum logic [1:0] {
    VAL_UNASSIGNED = 2'b00,
    VAL_FALSE      = 2'b10,
    VAL_TRUE       = 2'b11
  } val_t;

  // Operation codes written by the processor.
  typedef enum logic [1:0] {
    OP_NOP           = 2'd0,
    OP_UPDATE_CLAUSE = 2'd1,
    OP_BACKTRACK     = 2'd2,
    OP_DECISION      = 2'd3
  } opcode_t;

  // One command from the register interface to the control unit.
  typedef struct packed {
    opcode_t          op;
    cidx_t            clause_idx; // OP_UPDATE_CLAUSE: target clause processor
    lit_t [LITS-1:0]  lits;       // OP_UPDATE_CLAUSE: new literals
    var_t             vid;        // OP_DECISION / OP_BACKTRACK: variable
    logic             value;      // OP_DECISION: value given to vid
  } cmd_t;

  // Status reported to the processor (updateCPUStatus arguments).
  typedef enum logic [2:0] {
    ST_SUCCESS    = 3'd0,
    ST_RUNNING    = 3'd1,
    ST_IMPL_FOUND = 3'd2,
    ST_CONFLICT   = 3'd3,
    ST_SAT        = 3'd4
  } status_t;

  // Broadcast from the control unit to every clause processor.
  typedef enum logic [1:0] {
    BC_NONE   = 2'd0,
    BC_LOAD   = 2'd1,  // load lits into clause processor clause_idx
    BC_ASSIGN = 2'd2,  // vid := value in every clause processor
    BC_CLEAR  = 2'd3   // vid := unassigned in every clause processor
  } bc_op_t;

  typedef struct packed {
    bc_op_t           op;
    cidx_t            clause_idx;
    lit_t [LITS-1:0]  lits;
    var_t             vid;
    logic             value;
  } bcast_t;

  // A unit implication: variable vid must take value.
  typedef struct packed {
    logic valid;
    var_t vid;
    logic value;
  } impl_t;

  // Result of one clause's evaluation (ClauseStatus).
  typedef struct packed {
    logic sat;       // at least one literal is true (or the slot is empty)
    logic conflict;  // every literal present is false
    logic unit;      // not sat, exactly one literal unassigned
  } clause_status_t;

endpackage
