// End-to-end testbench for sat_accel_top at its default size (224 clause
// processors, 64-entry implication FIFO). The testbench plays the processor:
// it partitions formulas greedily, hot-swaps partitions into the clause
// processors, runs a DPLL search whose propagation is done by the
// accelerator, and checks the answers.
//
//   Phase A  a 62-clause implication chain x1 -> x2 -> ... -> x63: one
//            decision must return the 62 implications in order and status
//            SAT; a second run without draining fills the FIFO so the engine
//            waits; a command written while another is pending is dropped.
//   Phase B  random formulas with a planted solution, one that needs two
//            partitions for clause count and one with more than 63 variables
//            that needs several partitions with renumbered variables; the
//            model found must satisfy every clause.
//   Phase C  an unsatisfiable formula (all eight sign patterns over three
//            variables); the search must end UNSAT.
// Each mechanism (clause update, hot swap, renumbering, decision, backtrack,
// implication, conflict status, SAT status, FIFO-full wait, dropped command)
// is counted, and one that never happens counts as a failure.
module tb_sat_accel_top;
  import sat_pkg::*;

  localparam int unsigned NC = sat_pkg::CP_COUNT;   // clause processors in the top
  localparam int unsigned FIFO_DEPTH = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [7:0]  awaddr = '0, araddr = '0;
  logic        awvalid = 1'b0, wvalid = 1'b0, bready = 1'b0, arvalid = 1'b0, rready = 1'b0;
  logic [31:0] wdata = '0, rdata;
  logic [3:0]  wstrb = '0;
  logic        awready, wready, bvalid, arready, rvalid;
  logic [1:0]  bresp, rresp;
  int checks = 0, failures = 0;

  sat_accel_top dut (
    .clk, .rst_n,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready));

  always #5 clk = ~clk;

  longint cycles = 0;
  always @(posedge clk) cycles++;

  initial begin : watchdog
    repeat (40_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  `include "axil_master_tasks.svh"

  localparam logic [7:0] A_CMD = 8'h00, A_VAR = 8'h04, A_CIDX = 8'h08, A_LITS = 8'h0C,
                         A_STATUS = 8'h10, A_IMPL = 8'h14;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  `include "sat_host_tasks.svh"

  // ---------------------------------------------------------------- phases
  task automatic phase_chain();
    lit_t l [LITS];
    logic [31:0] st, d;
    logic [1:0] resp;
    impl_t imps [$];
    bit waited = 0;
    for (int k = 0; k < 62; k++) begin
      l[0] = '{neg: 1'b1, vid: var_t'(k + 1)};
      l[1] = '{neg: 1'b0, vid: var_t'(k + 2)};
      l[2] = '0;
      load_clause(k, l);
    end
    loaded_cnt = 62;
    // one decision, 62 implications in chain order
    begin
      longint t0;
      t0 = cycles;
      decide_hw(6'd1, 1'b1, st);
      check(st[2:0] == 3'(ST_SAT), "chain ends satisfied");
      read_impls(imps);
      check(imps.size() == 62, $sformatf("chain gives %0d implications", imps.size()));
      foreach (imps[i]) check(imps[i].vid == var_t'(i + 2) && imps[i].value, "chain order");
      n_impl += imps.size();
    end
    // clear and decide twice without draining: 124 implications, FIFO of 64
    for (int v = 1; v <= 63; v++) backtrack_hw(var_t'(v));
    axi_write(A_VAR, 32'h0000_0101, 4'hF, resp);
    issue(OP_DECISION);
    wait_idle(st);
    for (int v = 1; v <= 63; v++) backtrack_hw(var_t'(v));
    axi_write(A_VAR, 32'h0000_0101, 4'hF, resp);
    issue(OP_DECISION);
    n_decide += 2;
    // while the engine is stalled a second and third command are written:
    // the second waits (pending), the third is dropped
    axi_write(A_VAR, 32'h0000_0001, 4'hF, resp);
    axi_write(A_CMD, 32'(OP_BACKTRACK), 4'h1, resp);
    check(resp == 2'b00, "second command accepted as pending");
    axi_write(A_CMD, 32'(OP_BACKTRACK), 4'h1, resp);
    check(resp == 2'b10, "third command dropped");
    if (resp == 2'b10) n_dropped++;
    axi_read(A_STATUS, st);
    check(st[7] && st[4], "dropped flag and busy");
    repeat (400) @(posedge clk);
    axi_read(A_STATUS, st);
    if (st[4] && st[6] && st[2:0] == 3'(ST_RUNNING)) begin waited = 1; n_fifo_wait++; end
    check(waited, "engine waits on a full FIFO");
    // drain while busy; the engine resumes
    imps.delete();
    do begin
      axi_read(A_IMPL, d);
      if (d[31]) imps.push_back('{valid: 1'b1, vid: d[5:0], value: d[8]});
      axi_read(A_STATUS, st);
    end while (st[4] || !st[5]);
    check(imps.size() == 124, $sformatf("%0d implications from two runs", imps.size()));
    for (int i = 0; i < imps.size(); i++)
      check(imps[i].vid == var_t'((i % 62) + 2), "order across the full FIFO");
    backtrack_hw(6'd1);  // the one the pending command did
    n_backtrack++;
  endtask

  task automatic run_planted(int n_vars, int n_clauses, int min_parts);
    bit sat;
    longint t0;
    planted(n_vars, n_clauses);
    partition_formula();
    check(part_first.size() >= min_parts, $sformatf("%0d partitions", part_first.size()));
    t0 = cycles;
    dpll_solve(sat);
    check(sat, "planted formula found satisfiable");
    if (sat) check(model_ok(), "model satisfies every clause");
    $display("planted %0d vars %0d clauses: %0d partitions, SAT=%0d, %0d cycles", n_vars,
             n_clauses, part_first.size(), sat, cycles - t0);
  endtask

  task automatic run_unsat();
    bit sat;
    nv = 3;
    F.delete();
    for (int m = 0; m < 8; m++) begin
      glit_t c [LITS];
      for (int i = 0; i < LITS; i++) begin c[i].v = i + 1; c[i].neg = m[i]; end
      F.push_back(c);
    end
    partition_formula();
    dpll_solve(sat);
    check(!sat, "unsatisfiable formula reported UNSAT");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    loaded_cnt = 0; cur = -1; epoch = 0;
    phase_chain();
    run_planted(40, 300, 2);
    run_planted(80, 400, 3);
    run_unsat();
    $display("loads=%0d swaps=%0d renumbered=%0d decisions=%0d backtracks=%0d implications=%0d",
             n_load, n_swap, n_renum, n_decide, n_backtrack, n_impl);
    $display("conflicts=%0d sat_status=%0d fifo_waits=%0d dropped=%0d cycles=%0d", n_conflict,
             n_sat_status, n_fifo_wait, n_dropped, cycles);
    check(n_load > 0, "clause update happened");
    check(n_swap > 1, "hot swap happened");
    check(n_renum > 0, "variable renumbering happened");
    check(n_decide > 0, "decision happened");
    check(n_backtrack > 0, "backtrack happened");
    check(n_impl > 0, "implication happened");
    check(n_conflict > 0, "conflict status happened");
    check(n_sat_status > 0, "SAT status happened");
    check(n_fifo_wait > 0, "FIFO-full wait happened");
    check(n_dropped > 0, "dropped command happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
