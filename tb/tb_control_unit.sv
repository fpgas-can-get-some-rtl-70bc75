// Testbench for control_unit. The clause processor array is replaced by a
// scripted model: after a decision it offers a given list of unit
// implications one evaluation at a time, then a given final outcome. The
// testbench checks the broadcasts (load, clear, the decision and every
// implication, in order), the FIFO pushes, the final status, that the busy
// time is 1 cycle for update/backtrack and 2 + 3k cycles for a decision with
// k implications, and that the machine waits in Get Implication while the
// FIFO is full.
module tb_control_unit;
  import sat_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  cmd_t cmd;
  logic cmd_valid, cmd_ready;
  bcast_t bc;
  logic any_conflict, all_sat;
  impl_t chosen_impl;
  logic fifo_push, fifo_full;
  impl_t fifo_data;
  status_t status;
  logic busy;
  int checks = 0, failures = 0;

  control_unit dut (.clk, .rst_n, .cmd, .cmd_valid, .cmd_ready, .bc, .any_conflict, .all_sat,
                    .chosen_impl, .fifo_push, .fifo_data, .fifo_full, .status, .busy);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  // Scripted clause array.
  impl_t script [$];    // implications still to offer
  int    outcome;       // 0 success, 1 conflict, 2 sat
  int    stall_left;    // cycles of FIFO full to insert at the next Get Implication
  assign chosen_impl  = (script.size() > 0) ? script[0] : '0;
  assign any_conflict = (script.size() == 0) && (outcome == 1);
  assign all_sat      = (script.size() == 0) && (outcome == 2);

  // Observed broadcasts and pushes.
  bcast_t seen_bc [$];
  impl_t  seen_push [$];
  int     busy_cycles, stall_cycles;

  always @(posedge clk) begin
    if (rst_n) begin
      if (bc.op != BC_NONE) seen_bc.push_back(bc);
      if (busy) busy_cycles++;
      if (fifo_full && busy) stall_cycles++;
      if (fifo_push) begin
        seen_push.push_back(fifo_data);
        void'(script.pop_front());
      end
    end
  end

  always @(negedge clk) begin
    // raise FIFO full once the machine has latched an implication
    if (stall_left > 0 && busy && status == ST_RUNNING && !fifo_full) fifo_full <= 1'b1;
    else if (fifo_full) begin
      if (stall_left > 1) stall_left--; else begin stall_left = 0; fifo_full <= 1'b0; end
    end
  end

  task automatic issue(cmd_t c);
    @(negedge clk);
    seen_bc.delete(); seen_push.delete();
    busy_cycles = 0; stall_cycles = 0;
    cmd = c; cmd_valid = 1'b1;
    do @(posedge clk); while (!cmd_ready);
    @(negedge clk);
    cmd_valid = 1'b0;
    cmd = cmd_t'($urandom);
    while (busy) @(negedge clk);
  endtask

  task automatic decision(var_t v, logic val, int k, int oc, int stall, status_t exp_status);
    cmd_t c;
    impl_t list [$];
    c = '0; c.op = OP_DECISION; c.vid = v; c.value = val;
    for (int i = 0; i < k; i++) begin
      impl_t im;
      im.valid = 1'b1; im.vid = var_t'($urandom_range(1, 63)); im.value = 1'($urandom);
      list.push_back(im);
    end
    script = list; outcome = oc; stall_left = stall;
    issue(c);
    check(busy_cycles == 2 + 3 * k + stall_cycles, $sformatf("decision busy %0d cycles, k=%0d stall=%0d",
          busy_cycles, k, stall_cycles));
    check(stall_cycles == stall, $sformatf("stall %0d cycles, wanted %0d", stall_cycles, stall));
    check(seen_bc.size() == k + 1, $sformatf("%0d broadcasts for k=%0d", seen_bc.size(), k));
    if (seen_bc.size() == k + 1) begin
      check(seen_bc[0].op == BC_ASSIGN && seen_bc[0].vid == v && seen_bc[0].value == val,
            "decision broadcast");
      for (int i = 0; i < k; i++)
        check(seen_bc[i+1].op == BC_ASSIGN && seen_bc[i+1].vid == list[i].vid &&
              seen_bc[i+1].value == list[i].value, $sformatf("implication %0d broadcast", i));
    end
    check(seen_push.size() == k, "number of FIFO pushes");
    for (int i = 0; i < k && i < seen_push.size(); i++)
      check(seen_push[i] == list[i], $sformatf("push %0d", i));
    check(status == exp_status, $sformatf("final status %s, wanted %s", status.name(),
          exp_status.name()));
  endtask

  initial begin
    cmd_t c;
    cmd = '0; cmd_valid = 1'b0; fifo_full = 1'b0; outcome = 0; stall_left = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    check(status == ST_SUCCESS && !busy && cmd_ready, "reset state");

    // Update Clause
    c = '0; c.op = OP_UPDATE_CLAUSE; c.clause_idx = 16'd37;
    c.lits[0] = '{neg: 1'b1, vid: 6'd5}; c.lits[1] = '{neg: 1'b0, vid: 6'd63};
    c.lits[2] = '{neg: 1'b0, vid: 6'd0};
    issue(c);
    check(busy_cycles == 1, "update clause takes one cycle");
    check(seen_bc.size() == 1 && seen_bc[0].op == BC_LOAD && seen_bc[0].clause_idx == 16'd37 &&
          seen_bc[0].lits == c.lits, "load broadcast");
    check(status == ST_SUCCESS, "update clause status");

    // Backtrack
    c = '0; c.op = OP_BACKTRACK; c.vid = 6'd9;
    issue(c);
    check(busy_cycles == 1, "backtrack takes one cycle");
    check(seen_bc.size() == 1 && seen_bc[0].op == BC_CLEAR && seen_bc[0].vid == 6'd9,
          "clear broadcast");
    check(status == ST_SUCCESS, "backtrack status");

    // NOP leaves the machine idle
    c = '0; c.op = OP_NOP;
    issue(c);
    check(busy_cycles == 0 && seen_bc.size() == 0, "nop does nothing");

    // Decisions with various implication chains and outcomes
    decision(6'd1, 1'b1, 0, 0, 0, ST_SUCCESS);
    decision(6'd2, 1'b0, 0, 1, 0, ST_CONFLICT);
    decision(6'd3, 1'b1, 0, 2, 0, ST_SAT);
    decision(6'd4, 1'b0, 1, 0, 0, ST_SUCCESS);
    decision(6'd5, 1'b1, 5, 1, 0, ST_CONFLICT);
    decision(6'd6, 1'b0, 12, 2, 0, ST_SAT);
    decision(6'd7, 1'b1, 3, 0, 4, ST_SUCCESS);   // FIFO full for 4 cycles
    for (int i = 0; i < 30; i++) begin
      int oc, k;
      oc = $urandom_range(0, 2);
      k  = $urandom_range(0, 20);
      decision(var_t'($urandom_range(1, 63)), 1'($urandom), k, oc,
               (k > 0) ? $urandom_range(0, 3) : 0, oc == 1 ? ST_CONFLICT : (oc == 2 ? ST_SAT : ST_SUCCESS));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
