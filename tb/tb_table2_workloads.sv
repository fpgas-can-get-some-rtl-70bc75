// Workload testbench for sat_accel_top at its default size: formulas with the
// variable and clause counts of the original design's software-versus-
// accelerator evaluation (random 3-literal formulas; 63 to 252 variables,
// 224 to 2240 clauses), solved by the DPLL host with the accelerator doing
// all propagation. The formulas are generated with a planted solution, so
// each must come out satisfiable and the model found is checked against every
// clause. For each size the testbench prints the number of partitions, hot
// swaps, commands and clock cycles used.
module tb_table2_workloads;
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

  task automatic run_cell(int n_vars, int n_clauses);
    bit sat;
    longint t0;
    int s0, d0, i0, b0;
    planted(n_vars, n_clauses);
    partition_formula();
    t0 = cycles; s0 = n_swap; d0 = n_decide; i0 = n_impl; b0 = n_backtrack;
    dpll_solve(sat);
    check(sat, $sformatf("%0d x %0d found satisfiable", n_vars, n_clauses));
    if (sat) check(model_ok(), $sformatf("%0d x %0d model satisfies every clause", n_vars,
                   n_clauses));
    check(part_first.size() >= (n_clauses + NC - 1) / NC, "partition count");
    $display("%0d variables x %0d clauses: %0d partitions, %0d swaps, %0d decisions, %0d implications, %0d backtracks, %0d cycles",
             n_vars, n_clauses, part_first.size(), n_swap - s0, n_decide - d0, n_impl - i0,
             n_backtrack - b0, cycles - t0);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    loaded_cnt = 0; cur = -1; epoch = 0;
    run_cell(63, 224);
    run_cell(63, 448);
    run_cell(126, 224);
    run_cell(126, 448);
    run_cell(252, 448);
    run_cell(63, 2240);
    run_cell(126, 2240);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
