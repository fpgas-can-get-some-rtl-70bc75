// DPLL host shared by the testbenches that drive sat_accel_top: it plays the
// processor side of the accelerator. Included inside a module that declares
// clk, the AXI master signals, the axi_write/axi_read tasks, a check task,
// NC (clause processors of the device under test) and a cycle counter
// "cycles"; sat_pkg must be imported and the A_* register addresses defined.
//
// Formula: F (clauses over global variable numbers 1..nv). partition_formula
// cuts it greedily, in clause order, into partitions of at most NC clauses
// and MAX_VARS distinct variables, and numbers each partition's variables
// 1..n. dpll_solve runs a chronological-backtracking DPLL whose propagation
// is done by the accelerator: a partition is "dirty" when a variable it
// contains has been assigned since it was last propagated; dirty partitions
// are swapped in (cyclic order, the loaded one first) and sent the
// assignments they have not seen as decisions, and every implication read
// back is added to the trail. On a conflict the loaded partition's copy is
// cleared with one Backtrack per local variable and rebuilt from the trail.

  // mechanism counters
  int n_load = 0, n_swap = 0, n_renum = 0, n_decide = 0, n_backtrack = 0, n_impl = 0;
  int n_conflict = 0, n_sat_status = 0, n_fifo_wait = 0, n_dropped = 0;

  // ---------------------------------------------------------------- host I/O
  typedef struct { int v; bit neg; } glit_t;     // literal with a global variable number

  function automatic logic [31:0] pack_lits(lit_t l [LITS]);
    logic [31:0] w;
    w = '0;
    for (int i = 0; i < LITS; i++) w[8*i +: 7] = l[i];
    return w;
  endfunction

  task automatic issue(opcode_t op);
    logic [1:0] resp;
    axi_write(A_CMD, 32'(op), 4'h1, resp);
    check(resp == 2'b00, "command accepted");
  endtask

  task automatic wait_idle(output logic [31:0] st);
    do axi_read(A_STATUS, st); while (st[4]);
  endtask

  task automatic read_impls(output impl_t l [$]);
    logic [31:0] d;
    l.delete();
    forever begin
      impl_t im;
      axi_read(A_IMPL, d);
      if (!d[31]) break;
      im.valid = 1'b1; im.vid = d[VAR_W-1:0]; im.value = d[8];
      l.push_back(im);
    end
  endtask

  task automatic load_clause(int idx, lit_t l [LITS]);
    logic [1:0] resp;
    logic [31:0] st;
    axi_write(A_CIDX, 32'(idx), 4'hF, resp);
    axi_write(A_LITS, pack_lits(l), 4'hF, resp);
    issue(OP_UPDATE_CLAUSE);
    wait_idle(st);
    check(st[2:0] == 3'(ST_SUCCESS), "clause update status");
    n_load++;
  endtask

  task automatic decide_hw(var_t v, bit value, output logic [31:0] st);
    logic [1:0] resp;
    axi_write(A_VAR, {23'b0, value, 2'b0, v}, 4'hF, resp);
    issue(OP_DECISION);
    wait_idle(st);
    n_decide++;
    if (st[2:0] == 3'(ST_CONFLICT)) n_conflict++;
    if (st[2:0] == 3'(ST_SAT)) n_sat_status++;
  endtask

  task automatic backtrack_hw(var_t v);
    logic [1:0] resp;
    logic [31:0] st;
    axi_write(A_VAR, {26'b0, v}, 4'hF, resp);
    issue(OP_BACKTRACK);
    wait_idle(st);
    check(st[2:0] == 3'(ST_SUCCESS), "backtrack status");
    n_backtrack++;
  endtask

  // ---------------------------------------------------------------- formula
  int    nv;
  glit_t F [$][LITS];          // clauses, global variable numbers
  // partitions
  int    part_first [$], part_last [$];
  int    g2l [$][int];         // per partition: global -> local variable number
  int    l2g [$][64];          // per partition: local -> global
  int    loaded_cnt;           // clause processors holding a clause

  task automatic partition_formula();
    int p;
    part_first.delete(); part_last.delete(); g2l.delete(); l2g.delete();
    p = -1;
    for (int c = 0; c < F.size(); c++) begin
      int new_vars = 0;
      if (p >= 0) begin
        for (int i = 0; i < LITS; i++)
          if (F[c][i].v != 0 && !g2l[p].exists(F[c][i].v)) begin
            new_vars++;
            for (int j = 0; j < i; j++) if (F[c][j].v == F[c][i].v) new_vars--;
          end
      end
      if (p < 0 || (c - part_first[p]) >= NC || g2l[p].size() + new_vars > MAX_VARS) begin
        int empty_map [int];
        int zero [64];
        p++;
        part_first.push_back(c); part_last.push_back(c);
        g2l.push_back(empty_map);
        foreach (zero[i]) zero[i] = 0;
        l2g.push_back(zero);
      end
      part_last[p] = c;
      for (int i = 0; i < LITS; i++)
        if (F[c][i].v != 0 && !g2l[p].exists(F[c][i].v)) begin
          int l;
          l = g2l[p].size() + 1;
          g2l[p][F[c][i].v] = l;
          l2g[p][l] = F[c][i].v;
          if (l != F[c][i].v) n_renum++;
        end
    end
  endtask

  // ---------------------------------------------------------------- DPLL host
  typedef struct { int v; bit decision; bit flipped; int epoch; } trail_t;
  int     val [];            // 0 unassigned, 1 false, 2 true
  trail_t trail [$];
  bit     dirty [];
  int     cur, epoch, hw_synced;

  task automatic swap_in(int p);
    int n;
    n = part_last[p] - part_first[p] + 1;
    for (int k = 0; k < n || k < loaded_cnt; k++) begin
      lit_t l [LITS];
      for (int i = 0; i < LITS; i++) begin
        l[i] = '0;
        if (k < n && F[part_first[p] + k][i].v != 0) begin
          l[i].vid = var_t'(g2l[p][F[part_first[p] + k][i].v]);
          l[i].neg = F[part_first[p] + k][i].neg;
        end
      end
      load_clause(k, l);
    end
    loaded_cnt = n;
    cur = p; epoch++; hw_synced = 0;
    n_swap++;
  endtask

  function automatic void assign_var(int g, bit value, bit decision, bit flipped, int ep);
    trail_t t;
    val[g] = value ? 2 : 1;
    t.v = g; t.decision = decision; t.flipped = flipped; t.epoch = ep;
    trail.push_back(t);
    foreach (g2l[p]) if (g2l[p].exists(g)) dirty[p] = 1'b1;
  endfunction

  // Broadcast to the loaded partition what it has not seen; absorb implications.
  task automatic sync_cur(output bit conflict);
    conflict = 0;
    dirty[cur] = 1'b0;
    while (hw_synced < trail.size() && !conflict) begin
      trail_t t;
      logic [31:0] st;
      impl_t imps [$];
      t = trail[hw_synced];
      hw_synced++;
      if (t.epoch == epoch || !g2l[cur].exists(t.v)) continue;
      decide_hw(var_t'(g2l[cur][t.v]), val[t.v] == 2, st);
      read_impls(imps);
      foreach (imps[i]) begin
        int g;
        g = l2g[cur][imps[i].vid];
        n_impl++;
        if (val[g] == 0) begin
          assign_var(g, imps[i].value, 0, 0, epoch);
          dirty[cur] = 1'b0;
        end else if ((val[g] == 2) != imps[i].value) conflict = 1;
      end
      if (st[2:0] == 3'(ST_CONFLICT)) conflict = 1;
    end
  endtask

  task automatic propagate(output bit conflict);
    conflict = 0;
    forever begin
      int p;
      // the loaded partition first, then the next dirty one in cyclic order
      p = -1;
      if (cur >= 0 && dirty[cur]) p = cur;
      else for (int k = 1; k <= dirty.size() && p < 0; k++) begin
        int q;
        q = (cur + k) % dirty.size();
        if (q < 0) q += dirty.size();
        if (dirty[q]) p = q;
      end
      if (p < 0) break;
      if (p != cur) swap_in(p);
      sync_cur(conflict);
      if (conflict) break;
    end
  endtask

  // Undo to the last decision not yet flipped; clear the loaded partition's
  // assignment copy so it is rebuilt from the trail.
  task automatic backtrack(output bit exhausted);
    exhausted = 1;
    while (trail.size() > 0) begin
      trail_t t;
      t = trail.pop_back();
      val[t.v] = 0;
      if (t.decision && !t.flipped) begin
        exhausted = 0;
        assign_var(t.v, 1'b1, 1, 1, -1);
        break;
      end
    end
    for (int l = 1; l <= g2l[cur].size(); l++) backtrack_hw(var_t'(l));
    epoch++; hw_synced = 0; dirty[cur] = 1'b1;
  endtask

  task automatic dpll_solve(output bit sat);
    val = new[nv + 1]; foreach (val[i]) val[i] = 0;
    dirty = new[part_first.size()]; foreach (dirty[i]) dirty[i] = 1'b1;
    trail.delete();
    cur = -1;
    forever begin
      bit conflict, exhausted;
      int pick;
      propagate(conflict);
      if (conflict) begin
        backtrack(exhausted);
        if (exhausted) begin sat = 0; return; end
        continue;
      end
      pick = 0;
      for (int g = 1; g <= nv && pick == 0; g++) if (val[g] == 0) pick = g;
      if (pick == 0) begin sat = 1; return; end
      assign_var(pick, 1'b0, 1, 0, -1);
    end
  endtask

  function automatic bit model_ok();
    foreach (F[c]) begin
      bit any = 0;
      for (int i = 0; i < LITS; i++)
        if (F[c][i].v != 0 && ((val[F[c][i].v] == 2) != F[c][i].neg) && val[F[c][i].v] != 0)
          any = 1;
      if (!any) return 0;
    end
    return 1;
  endfunction

  task automatic planted(int n_vars, int n_clauses);
    int hidden [];
    hidden = new[n_vars + 1];
    foreach (hidden[i]) hidden[i] = $urandom_range(0, 1);
    nv = n_vars;
    F.delete();
    while (F.size() < n_clauses) begin
      glit_t c [LITS];
      int vs [$];
      bit ok = 0;
      for (int v = 1; v <= n_vars; v++) vs.push_back(v);
      vs.shuffle();
      for (int i = 0; i < LITS; i++) begin
        c[i].v = vs[i]; c[i].neg = 1'($urandom);
        if ((hidden[vs[i]] == 1) != c[i].neg) ok = 1;
      end
      if (ok) F.push_back(c);
    end
  endtask

