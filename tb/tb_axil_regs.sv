// Testbench for axil_regs. An AXI4-Lite master writes and reads the
// registers; the BCP engine side is a model that accepts commands when told
// to and a queue standing in for the implication FIFO. Checks: register
// read-back with byte strobes, the command fields presented to the engine,
// that a command is held until accepted, that a second command written while
// one is pending is dropped with SLVERR and flagged in STATUS, the STATUS
// fields, and that reading IMPL returns and pops the queue head.
module tb_axil_regs;
  import sat_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [7:0]  awaddr = '0, araddr = '0;
  logic        awvalid = 1'b0, wvalid = 1'b0, bready = 1'b0, arvalid = 1'b0, rready = 1'b0;
  logic [31:0] wdata = '0, rdata;
  logic [3:0]  wstrb = '0;
  logic        awready, wready, bvalid, arready, rvalid;
  logic [1:0]  bresp, rresp;

  cmd_t    cmd;
  logic    cmd_valid, cmd_ready = 1'b0, busy = 1'b0;
  status_t status = ST_SUCCESS;
  impl_t   fifo_head;
  logic    fifo_empty, fifo_full, fifo_pop;
  logic [6:0] fifo_count;
  int checks = 0, failures = 0;

  axil_regs #(.FIFO_CW(7)) dut (
    .clk, .rst_n,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .cmd, .cmd_valid, .cmd_ready, .status, .busy,
    .fifo_head, .fifo_empty, .fifo_full, .fifo_count, .fifo_pop);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  `include "axil_master_tasks.svh"

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  // implication queue model
  impl_t q [$];
  assign fifo_head  = (q.size() > 0) ? q[0] : '0;
  assign fifo_empty = (q.size() == 0);
  assign fifo_full  = (q.size() == 64);
  assign fifo_count = 7'(q.size());
  always @(posedge clk) if (fifo_pop) void'(q.pop_front());

  int n_taken = 0;
  cmd_t taken;
  always @(posedge clk) if (cmd_valid && cmd_ready) begin n_taken++; taken <= cmd; end

  initial begin
    logic [1:0] resp;
    logic [31:0] d;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;

    // register write / read-back with strobes
    axi_write(8'h04, 32'h0000_0125, 4'hF, resp); check(resp == 2'b00, "VAR write OKAY");
    axi_read(8'h04, d);                          check(d == 32'h0000_0125, "VAR read-back");
    axi_write(8'h08, 32'hABCD_00DF, 4'h1, resp);
    axi_read(8'h08, d);                          check(d == 32'h0000_00DF, "CLAUSE_IDX strobe");
    axi_write(8'h0C, 32'h0043_8705, 4'hF, resp);
    axi_read(8'h0C, d);                          check(d == 32'h0043_8705, "CLAUSE_LITS read-back");
    check(cmd_valid == 1'b0, "no command before CMD write");

    // issue an update-clause command; engine not ready yet
    axi_write(8'h00, 32'h1, 4'h1, resp);
    check(resp == 2'b00, "CMD write OKAY");
    check(cmd_valid && cmd.op == OP_UPDATE_CLAUSE && cmd.clause_idx == 16'h00DF,
          "command presented");
    check(cmd.lits[0] == '{neg: 1'b0, vid: 6'd5} && cmd.lits[1] == '{neg: 1'b0, vid: 6'd7} &&
          cmd.lits[2] == '{neg: 1'b1, vid: 6'd3}, "literal unpacking");
    check(cmd.vid == 6'd37 && cmd.value == 1'b1, "variable / value fields");
    axi_read(8'h10, d); check(d[4] == 1'b1, "busy while command pending");
    // second command while pending is dropped
    axi_write(8'h00, 32'h3, 4'h1, resp);
    check(resp == 2'b10, "dropped command answered SLVERR");
    check(cmd.op == OP_UPDATE_CLAUSE, "pending command unchanged");
    axi_read(8'h10, d); check(d[7] == 1'b1, "dropped flag set");
    axi_read(8'h10, d); check(d[7] == 1'b0, "dropped flag cleared by read");
    // accept it
    repeat (3) @(posedge clk);
    check(n_taken == 0, "held until ready");
    @(negedge clk); cmd_ready = 1'b1;
    @(negedge clk); cmd_ready = 1'b0;
    check(n_taken == 1 && !cmd_valid && taken.op == OP_UPDATE_CLAUSE, "accepted once");

    // decision command, immediately accepted
    cmd_ready = 1'b1;
    axi_write(8'h04, 32'h0000_0009, 4'hF, resp);
    axi_write(8'h00, 32'h3, 4'h1, resp);
    repeat (2) @(negedge clk);
    check(n_taken == 2 && taken.op == OP_DECISION && taken.vid == 6'd9 && taken.value == 1'b0,
          "decision taken");
    cmd_ready = 1'b0;

    // status fields
    busy = 1'b1; status = ST_IMPL_FOUND;
    q.push_back('{valid: 1'b1, vid: 6'd12, value: 1'b1});
    q.push_back('{valid: 1'b1, vid: 6'd63, value: 1'b0});
    axi_read(8'h10, d);
    check(d[2:0] == 3'(ST_IMPL_FOUND) && d[4] && !d[5] && !d[6] && d[15:8] == 8'd2,
          $sformatf("status word %h", d));
    busy = 1'b0; status = ST_CONFLICT;
    axi_read(8'h10, d);
    check(d[2:0] == 3'(ST_CONFLICT) && !d[4], "status idle conflict");

    // implication reads pop the queue
    axi_read(8'h14, d); check(d == 32'h8000_010C, $sformatf("first implication %h", d));
    axi_read(8'h14, d); check(d == 32'h8000_003F, $sformatf("second implication %h", d));
    axi_read(8'h14, d); check(d[31] == 1'b0, "empty queue reads invalid");
    check(q.size() == 0, "queue drained");
    axi_read(8'h10, d); check(d[5] && d[15:8] == 0, "empty flag");
    for (int i = 0; i < 64; i++) q.push_back('{valid: 1'b1, vid: 6'(i), value: 1'(i)});
    axi_read(8'h10, d); check(d[6] && d[15:8] == 8'd64, "full flag and count");
    for (int i = 0; i < 64; i++) begin
      axi_read(8'h14, d);
      check(d[31] && d[5:0] == 6'(i) && d[8] == 1'(i), "implication order");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
