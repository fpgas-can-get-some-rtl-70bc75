// bcp_engine: Boolean constraint propagation engine.
//
// NUM_CLAUSES clause processors evaluate every clause of the loaded partition
// in parallel. The control unit broadcasts clause loads, decisions,
// implications and backtracks to all of them; their unit implications go to
// the implication selector, whose choice returns to the control unit, and
// their status words are reduced to "some clause is in conflict" and "every
// clause is satisfied" for the Evaluate state. The whole evaluation (clause
// status, selection, reduction) is combinational within one clock.
//
// Interface: command valid/ready from the processor interface, status and busy
// back to it, and the FIFO push port for implications found.
// Timing: as the control unit (1 cycle per clause update or backtrack,
// 2 + 3*k cycles for a decision that leads to k implications).
//
// The three parts and their connections follow the original design's BCP
// engine block diagram; the reduction of status words into two flags is this
// design's own choice.
module bcp_engine
  import sat_pkg::*;
#(
  parameter int unsigned NUM_CLAUSES = sat_pkg::CP_COUNT
) (
  input  logic    clk,
  input  logic    rst_n,
  input  cmd_t    cmd,
  input  logic    cmd_valid,
  output logic    cmd_ready,
  output logic    fifo_push,
  output impl_t   fifo_data,
  input  logic    fifo_full,
  output status_t status,
  output logic    busy
);

  bcast_t                           bc;
  clause_status_t [NUM_CLAUSES-1:0] cstat;
  impl_t          [NUM_CLAUSES-1:0] cimpl;
  impl_t                            chosen;
  logic                             any_conflict, all_sat;

  control_unit u_ctrl (
    .clk, .rst_n,
    .cmd, .cmd_valid, .cmd_ready,
    .bc,
    .any_conflict, .all_sat,
    .chosen_impl (chosen),
    .fifo_push, .fifo_data, .fifo_full,
    .status, .busy
  );

  for (genvar c = 0; c < NUM_CLAUSES; c++) begin : g_cp
    clause_processor #(.INDEX(c)) u_cp (
      .clk, .rst_n,
      .bc,
      .status (cstat[c]),
      .impl   (cimpl[c])
    );
  end

  implication_selector #(.N(NUM_CLAUSES)) u_sel (
    .impl_in  (cimpl),
    .impl_out (chosen)
  );

  always_comb begin
    any_conflict = 1'b0;
    all_sat      = 1'b1;
    for (int c = 0; c < NUM_CLAUSES; c++) begin
      any_conflict = any_conflict | cstat[c].conflict;
      all_sat      = all_sat & cstat[c].sat;
    end
  end

endmodule
