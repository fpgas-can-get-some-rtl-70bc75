// clause_processor: one clause of the current partition, evaluated in parallel
// with all the others.
//
// It stores the clause as three literals and keeps its own copy of the values
// of those three literals' variables. The copy is updated from the control
// unit's broadcast: BC_ASSIGN (a decision or an implication) sets every slot
// whose variable matches, BC_CLEAR (backtrack) returns matching slots to
// unassigned, and BC_LOAD addressed to this processor's INDEX replaces the
// literals (hot swap) and clears the copy. The ClauseStatus logic then works
// out, combinationally from the registers, whether the clause is satisfied,
// in conflict (every literal present is false) or unit (not satisfied and
// exactly one literal unassigned); a unit clause drives a unit implication
// that makes its last literal true.
//
// Timing: a broadcast presented in cycle t is absorbed at the clock edge that
// ends cycle t; status and implication reflect it from cycle t+1.
//
// Following the original design: three literals and three variable
// assignments per clause, a status output to the control unit and a unit
// implication to the implication selector. This design's own choices: an
// empty slot is a literal with variable number 0; a processor with no literals
// reports itself satisfied, so unused processors never stall a result;
// loading a clause clears its assignment copy, and the processor re-learns
// the values from the decisions the host broadcasts after a swap.
module clause_processor
  import sat_pkg::*;
#(
  parameter int unsigned INDEX = 0  // clause processor number for BC_LOAD
) (
  input  logic           clk,
  input  logic           rst_n,
  input  bcast_t         bc,       // broadcast from the control unit
  output clause_status_t status,   // to the control unit
  output impl_t          impl      // unit implication to the selector
);

  lit_t [LITS-1:0] lits_q;
  val_t [LITS-1:0] vals_q;

  // Literal and assignment storage.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lits_q <= '0;
      vals_q <= {LITS{VAL_UNASSIGNED}};
    end else begin
      unique case (bc.op)
        BC_LOAD: begin
          if (bc.clause_idx == cidx_t'(INDEX)) begin
            lits_q <= bc.lits;
            vals_q <= {LITS{VAL_UNASSIGNED}};
          end
        end
        BC_ASSIGN: begin
          for (int i = 0; i < LITS; i++)
            if (lits_q[i].vid != '0 && lits_q[i].vid == bc.vid)
              vals_q[i] <= bc.value ? VAL_TRUE : VAL_FALSE;
        end
        BC_CLEAR: begin
          for (int i = 0; i < LITS; i++)
            if (lits_q[i].vid != '0 && lits_q[i].vid == bc.vid)
              vals_q[i] <= VAL_UNASSIGNED;
        end
        default: ;
      endcase
    end
  end

  // ClauseStatus.
  always_comb begin
    logic any_true, any_present;
    int unsigned n_unassigned;
    any_true     = 1'b0;
    any_present  = 1'b0;
    n_unassigned = 0;
    impl         = '0;
    for (int i = 0; i < LITS; i++) begin
      if (lits_q[i].vid != '0) begin
        any_present = 1'b1;
        if (vals_q[i] == VAL_UNASSIGNED) begin
          n_unassigned = n_unassigned + 1;
          impl.vid     = lits_q[i].vid;
          impl.value   = ~lits_q[i].neg;   // make this literal true
        end else if ((vals_q[i] == VAL_TRUE) != lits_q[i].neg) begin
          any_true = 1'b1;
        end
      end
    end
    status.sat      = any_true || !any_present;
    status.conflict = any_present && !any_true && (n_unassigned == 0);
    status.unit     = !any_true && (n_unassigned == 1);
    impl.valid      = status.unit;
    if (!status.unit) begin
      impl.vid   = '0;
      impl.value = 1'b0;
    end
  end

endmodule
