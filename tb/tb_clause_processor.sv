// Testbench for clause_processor: random loads, assignments and clears on the
// broadcast bus; after each one the clause status and unit implication are
// compared with a reference evaluation of the clause under the testbench's
// own record of the variable values.
module tb_clause_processor;
  import sat_pkg::*;

  localparam int unsigned IDX = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  bcast_t bc;
  clause_status_t status;
  impl_t impl;
  int checks = 0, failures = 0;

  clause_processor #(.INDEX(IDX)) dut (.clk, .rst_n, .bc, .status, .impl);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference state: literals of this clause, values of all variables
  // (0 unassigned, 1 false, 2 true) as seen since the last load.
  lit_t lits [LITS];
  int   val  [64];

  task automatic expect_status();
    int n_true, n_false, n_unas, n_present;
    clause_status_t exp;
    impl_t exp_impl;
    n_true = 0; n_false = 0; n_unas = 0; n_present = 0;
    exp_impl = '0;
    foreach (lits[i]) begin
      if (lits[i].vid == 0) continue;
      n_present++;
      case (val[lits[i].vid])
        0: begin n_unas++; exp_impl.vid = lits[i].vid; exp_impl.value = !lits[i].neg; end
        1: if (lits[i].neg) n_true++; else n_false++;
        2: if (lits[i].neg) n_false++; else n_true++;
        default: ;
      endcase
    end
    exp.sat      = (n_true > 0) || (n_present == 0);
    exp.conflict = (n_present > 0) && (n_false == n_present);
    exp.unit     = (n_true == 0) && (n_unas == 1);
    exp_impl.valid = exp.unit;
    if (!exp.unit) exp_impl = '0;
    checks++;
    if (status !== exp || impl !== exp_impl) begin
      failures++;
      $display("FAIL: status=%b impl=%h expected status=%b impl=%h", status, impl, exp, exp_impl);
    end
  endtask

  task automatic send(bcast_t b);
    @(negedge clk);
    bc = b;
    @(negedge clk);
    bc = '0;
  endtask

  initial begin
    bcast_t b;
    int n_unit = 0, n_conf = 0, n_sat = 0;
    bc = '0;
    foreach (lits[i]) lits[i] = '0;
    foreach (val[i]) val[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    expect_status();  // empty after reset: satisfied, nothing implied

    for (int t = 0; t < 20000; t++) begin
      int r;
      b = '0;
      r = $urandom_range(0, 99);
      if (r < 8) begin
        // load a clause of 1..3 distinct variables (or, rarely, none)
        int n, v0, v1, v2;
        b.op = BC_LOAD;
        b.clause_idx = ($urandom_range(0, 3) == 0) ? cidx_t'($urandom_range(0, 9)) : cidx_t'(IDX);
        n  = $urandom_range(0, 3);
        v0 = $urandom_range(1, 7);
        v1 = 1 + (v0 % 7);
        v2 = 1 + (v1 % 7);
        if ($urandom_range(0, 9) == 0) v2 = 63;
        for (int i = 0; i < LITS; i++) b.lits[i] = '0;
        if (n > 0) begin b.lits[0].vid = var_t'(v0); b.lits[0].neg = 1'($urandom); end
        if (n > 1) begin b.lits[2].vid = var_t'(v1); b.lits[2].neg = 1'($urandom); end
        if (n > 2) begin b.lits[1].vid = var_t'(v2); b.lits[1].neg = 1'($urandom); end
        if (b.clause_idx == cidx_t'(IDX)) begin
          foreach (lits[i]) lits[i] = b.lits[i];
          foreach (val[i]) val[i] = 0;
        end
      end else if (r < 70) begin
        int v;
        v = ($urandom_range(0, 15) == 0) ? 63 : $urandom_range(0, 8);
        b.op = BC_ASSIGN; b.vid = var_t'(v); b.value = 1'($urandom);
        if (v != 0) val[v] = b.value ? 2 : 1;
      end else if (r < 90) begin
        int v;
        v = ($urandom_range(0, 15) == 0) ? 63 : $urandom_range(0, 8);
        b.op = BC_CLEAR; b.vid = var_t'(v);
        if (v != 0) val[v] = 0;
      end else begin
        b.op = BC_NONE; b.vid = var_t'($urandom_range(1, 8)); b.value = 1'($urandom);
        b.lits = '1;
      end
      send(b);
      expect_status();
      if (status.unit) n_unit++;
      if (status.conflict) n_conf++;
      if (status.sat) n_sat++;
    end
    // every outcome must have been seen
    checks++;
    if (n_unit == 0 || n_conf == 0 || n_sat == 0) begin
      failures++;
      $display("FAIL: outcomes not all covered unit=%0d conflict=%0d sat=%0d", n_unit, n_conf, n_sat);
    end
    $display("outcomes: unit=%0d conflict=%0d sat=%0d", n_unit, n_conf, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
