// control_unit: the state machine that runs the BCP engine.
//
// It takes one command at a time from the processor interface (valid/ready
// handshake, accepted only in Idle) and drives a registered broadcast bus to
// all clause processors:
//   Update Clause      BC_LOAD of the new literals into one clause processor,
//                      then back to Idle with status success.
//   Backtrack          BC_CLEAR of one variable in every clause processor,
//                      then back to Idle with status success.
//   Propagate Decision BC_ASSIGN of the decided value, then Evaluate.
//   Evaluate           if any clause processor is unit, the selector's choice
//                      is latched and the machine goes to Get Implication with
//                      status running; otherwise it returns to Idle with status
//                      conflict (some clause has every literal false), SAT (every
//                      clause satisfied) or success.
//   Get Implication    on leaving, pushes the implication into the implication
//                      FIFO (it waits here while the FIFO is full), sets status
//                      implication found, and moves to Propagate Implication.
//   Propagate Impl.    BC_ASSIGN of the implied value, then Evaluate again.
//
// Timing: a command accepted in cycle 0 occupies the machine for 1 cycle
// (update clause, backtrack) or 2 + 3*k cycles (a decision that leads to k
// implications, with the FIFO never full); busy is high in all those cycles.
//
// The states, their entry/exit actions and the transitions follow the
// original design's control unit state diagram, including that Evaluate
// looks only at whether a unit clause exists: a conflict that coexists with a
// unit clause is reported once no unit clause is left. One clock per state,
// the FIFO-full wait and the encodings are this design's own choices.
module control_unit
  import sat_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  // command from the processor interface
  input  cmd_t    cmd,
  input  logic    cmd_valid,
  output logic    cmd_ready,
  // broadcast to the clause processors
  output bcast_t  bc,
  // evaluation results of the clause processor array
  input  logic    any_conflict,
  input  logic    all_sat,
  input  impl_t   chosen_impl,   // from the implication selector
  // implication FIFO
  output logic    fifo_push,
  output impl_t   fifo_data,
  input  logic    fifo_full,
  // status to the processor
  output status_t status,
  output logic    busy
);

  typedef enum logic [2:0] {
    S_IDLE,
    S_UPDATE_CLAUSE,
    S_BACKTRACK,
    S_PROP_DECISION,
    S_EVALUATE,
    S_GET_IMPL,
    S_PROP_IMPL
  } state_t;

  state_t  state_q;
  bcast_t  bc_q;
  status_t status_q;
  impl_t   impl_q;

  assign cmd_ready = (state_q == S_IDLE);
  assign busy      = (state_q != S_IDLE);
  assign bc        = bc_q;
  assign status    = status_q;

  // sendImplicationToCPU(): exit action of Get Implication.
  assign fifo_push = (state_q == S_GET_IMPL) && !fifo_full;
  assign fifo_data = impl_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= S_IDLE;
      bc_q     <= '0;
      status_q <= ST_SUCCESS;
      impl_q   <= '0;
    end else begin
      bc_q.op <= BC_NONE;
      unique case (state_q)
        S_IDLE: begin
          if (cmd_valid) begin
            bc_q.clause_idx <= cmd.clause_idx;
            bc_q.lits       <= cmd.lits;
            bc_q.vid        <= cmd.vid;
            bc_q.value      <= cmd.value;
            unique case (cmd.op)
              OP_UPDATE_CLAUSE: begin  // entry: updateClauseLiterals()
                state_q <= S_UPDATE_CLAUSE;
                bc_q.op <= BC_LOAD;
              end
              OP_BACKTRACK: begin      // entry: clearVariableAssignment()
                state_q <= S_BACKTRACK;
                bc_q.op <= BC_CLEAR;
              end
              OP_DECISION: begin       // entry: updateVariableAssignment()
                state_q <= S_PROP_DECISION;
                bc_q.op <= BC_ASSIGN;
              end
              default: ;               // OP_NOP: nothing to do
            endcase
          end
        end
        S_UPDATE_CLAUSE, S_BACKTRACK: begin
          state_q  <= S_IDLE;
          status_q <= ST_SUCCESS;
        end
        S_PROP_DECISION, S_PROP_IMPL: begin
          state_q <= S_EVALUATE;
        end
        S_EVALUATE: begin
          if (chosen_impl.valid) begin
            state_q  <= S_GET_IMPL;
            status_q <= ST_RUNNING;
            impl_q   <= chosen_impl;
          end else begin
            state_q  <= S_IDLE;
            status_q <= any_conflict ? ST_CONFLICT : (all_sat ? ST_SAT : ST_SUCCESS);
          end
        end
        S_GET_IMPL: begin
          if (!fifo_full) begin
            state_q    <= S_PROP_IMPL;
            status_q   <= ST_IMPL_FOUND;
            bc_q.op    <= BC_ASSIGN;
            bc_q.vid   <= impl_q.vid;
            bc_q.value <= impl_q.value;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // A command is taken only in Idle; the interface must hold it until then.
  a_cmd_stable: assert property (@(posedge clk) disable iff (!rst_n)
      cmd_valid && !cmd_ready |=> cmd_valid && $stable(cmd))
    else $error("control_unit: command changed before it was accepted");

endmodule
