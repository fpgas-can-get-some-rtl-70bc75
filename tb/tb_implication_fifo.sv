// Testbench for implication_fifo: random pushes and pops (including pushes
// into a full queue together with a pop) against a queue model; checks the
// head word, empty, full and occupancy every cycle, and that the queue fills
// to exactly DEPTH words.
module tb_implication_fifo;
  localparam int unsigned W = 8, DEPTH = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  logic push = 1'b0, pop = 1'b0;
  logic [W-1:0] din = '0, dout;
  logic empty, full;
  logic [$clog2(DEPTH):0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];

  implication_fifo #(.W(W), .DEPTH(DEPTH)) dut (.clk, .rst_n, .push, .din, .pop, .dout,
                                                .empty, .full, .count);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    checks++;
    if (empty !== (model.size() == 0) || full !== (model.size() == DEPTH) ||
        count !== ($clog2(DEPTH)+1)'(model.size()) ||
        (model.size() > 0 && dout !== model[0])) begin
      failures++;
      $display("FAIL: size=%0d empty=%b full=%b count=%0d dout=%h", model.size(), empty, full,
               count, dout);
    end
  endtask

  initial begin
    int n_full = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 20000; t++) begin
      int bias;
      @(negedge clk);
      compare();
      if (full) n_full++;
      bias = ((t / 500) % 2 == 0) ? 70 : 30;  // alternate filling and draining
      pop  = !empty && ($urandom_range(0, 99) >= bias);
      push = ($urandom_range(0, 99) < bias) && (!full || pop);
      din  = W'($urandom);
      @(posedge clk);
      #1;
      if (pop)  void'(model.pop_front());
      if (push) model.push_back(din);
    end
    @(negedge clk);
    push = 1'b0; pop = 1'b0;
    compare();
    checks++;
    if (n_full == 0) begin failures++; $display("FAIL: never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
