// Testbench for bcp_engine with 8 clause processors. Random small formulas
// (up to three distinct variables out of six per clause, some slots and some
// clauses empty) are loaded; then random decisions and backtracks are issued.
// After every decision a reference propagation written here (the unit clause
// with the lowest index is taken first, until no clause is unit) gives the
// implications expected in the FIFO, in order, and the final status; the busy
// time must be 2 + 3k cycles for k implications plus any cycles the FIFO was
// held full.
module tb_bcp_engine;
  import sat_pkg::*;

  localparam int unsigned NC = 8;
  localparam int unsigned NV = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  cmd_t cmd;
  logic cmd_valid, cmd_ready, fifo_push, fifo_full, busy;
  impl_t fifo_data;
  status_t status;
  int checks = 0, failures = 0;

  bcp_engine #(.NUM_CLAUSES(NC)) dut (.clk, .rst_n, .cmd, .cmd_valid, .cmd_ready, .fifo_push,
                                      .fifo_data, .fifo_full, .status, .busy);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  // Reference formula and assignment (0 unassigned, 1 false, 2 true).
  lit_t cl [NC][LITS];
  int   asg [64];

  function automatic int lit_state(lit_t l);  // 0 unassigned, 1 false, 2 true
    if (asg[l.vid] == 0) return 0;
    return ((asg[l.vid] == 2) != l.neg) ? 2 : 1;
  endfunction

  // Reference BCP: returns implications in order and the final status.
  task automatic ref_bcp(output impl_t imps [$], output status_t st);
    imps.delete();
    forever begin
      int found;
      found = -1;
      for (int c = 0; c < NC && found < 0; c++) begin
        int n_true = 0, n_unas = 0, last = 0;
        for (int i = 0; i < LITS; i++) begin
          if (cl[c][i].vid == 0) continue;
          case (lit_state(cl[c][i]))
            0: begin n_unas++; last = i; end
            2: n_true++;
            default: ;
          endcase
        end
        if (n_true == 0 && n_unas == 1) found = c * LITS + last;
      end
      if (found < 0) break;
      begin
        lit_t l;
        impl_t im;
        l = cl[found / LITS][found % LITS];
        im.valid = 1'b1; im.vid = l.vid; im.value = !l.neg;
        imps.push_back(im);
        asg[l.vid] = im.value ? 2 : 1;
      end
    end
    begin
      bit conf = 0, sat = 1;
      for (int c = 0; c < NC; c++) begin
        int n_present = 0, n_false = 0, n_true = 0;
        for (int i = 0; i < LITS; i++) begin
          if (cl[c][i].vid == 0) continue;
          n_present++;
          if (lit_state(cl[c][i]) == 1) n_false++;
          if (lit_state(cl[c][i]) == 2) n_true++;
        end
        if (n_present > 0 && n_false == n_present) conf = 1;
        if (n_present > 0 && n_true == 0) sat = 0;
      end
      st = conf ? ST_CONFLICT : (sat ? ST_SAT : ST_SUCCESS);
    end
  endtask

  impl_t pushes [$];
  int busy_cycles, full_cycles;
  always @(posedge clk) if (rst_n) begin
    if (fifo_push) pushes.push_back(fifo_data);
    if (busy) busy_cycles++;
    if (busy && fifo_full) full_cycles++;
  end
  // FIFO held full now and then
  always @(negedge clk) fifo_full <= ($urandom_range(0, 9) == 0);

  task automatic issue(cmd_t c);
    @(negedge clk);
    pushes.delete(); busy_cycles = 0; full_cycles = 0;
    cmd = c; cmd_valid = 1'b1;
    do @(posedge clk); while (!cmd_ready);
    @(negedge clk);
    cmd_valid = 1'b0;
    while (busy) @(negedge clk);
  endtask

  initial begin
    int n_impl = 0, n_conf = 0, n_sat = 0, n_succ = 0, n_stall = 0;
    cmd = '0; cmd_valid = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int trial = 0; trial < 400; trial++) begin
      // load a fresh formula
      foreach (asg[i]) asg[i] = 0;
      for (int c = 0; c < NC; c++) begin
        cmd_t ld;
        int vs [$];
        ld = '0; ld.op = OP_UPDATE_CLAUSE; ld.clause_idx = cidx_t'(c);
        for (int v = 1; v <= NV; v++) vs.push_back(v);
        vs.shuffle();
        for (int i = 0; i < LITS; i++) begin
          cl[c][i] = '0;
          if ($urandom_range(0, 5) != 0 && !(c == NC - 1 && trial % 3 == 0)) begin
            cl[c][i].vid = var_t'(vs[i]); cl[c][i].neg = 1'($urandom);
          end
          ld.lits[i] = cl[c][i];
        end
        issue(ld);
        check(status == ST_SUCCESS && busy_cycles == 1, "clause load");
      end
      // decisions and backtracks
      for (int step = 0; step < 8; step++) begin
        cmd_t d;
        d = '0;
        if ($urandom_range(0, 3) == 0) begin
          d.op = OP_BACKTRACK; d.vid = var_t'($urandom_range(1, NV));
          asg[d.vid] = 0;
          issue(d);
          check(status == ST_SUCCESS && busy_cycles == 1, "backtrack");
        end else begin
          impl_t exp [$];
          status_t exp_st;
          d.op = OP_DECISION; d.vid = var_t'($urandom_range(1, NV)); d.value = 1'($urandom);
          asg[d.vid] = d.value ? 2 : 1;
          ref_bcp(exp, exp_st);
          issue(d);
          check(pushes.size() == exp.size(), $sformatf("%0d implications, expected %0d",
                pushes.size(), exp.size()));
          for (int i = 0; i < exp.size() && i < pushes.size(); i++)
            check(pushes[i] == exp[i], $sformatf("implication %0d: %h expected %h", i, pushes[i],
                  exp[i]));
          check(status == exp_st, $sformatf("status %s expected %s", status.name(), exp_st.name()));
          // 2 + 3k cycles, plus waits in Get Implication while the FIFO is full
          check(busy_cycles >= 2 + 3 * exp.size() &&
                busy_cycles <= 2 + 3 * exp.size() + full_cycles &&
                (full_cycles > 0 || busy_cycles == 2 + 3 * exp.size()),
                $sformatf("decision took %0d cycles for %0d implications (%0d full)", busy_cycles,
                exp.size(), full_cycles));
          n_impl += exp.size();
          if (busy_cycles > 2 + 3 * exp.size()) n_stall++;
          case (exp_st)
            ST_CONFLICT: n_conf++;
            ST_SAT: n_sat++;
            default: n_succ++;
          endcase
        end
      end
    end
    check(n_impl > 0 && n_conf > 0 && n_sat > 0 && n_succ > 0 && n_stall > 0,
          "all outcomes covered");
    $display("implications=%0d conflict=%0d sat=%0d success=%0d stalled=%0d", n_impl, n_conf,
             n_sat, n_succ, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
