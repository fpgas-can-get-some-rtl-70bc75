// implication_fifo: queue of the implications the BCP engine has found,
// waiting for the processor to read them.
//
// A synchronous first-in first-out buffer of DEPTH words held in a register
// array, with separate read and write pointers one bit wider than the address
// so that full and empty are told apart. The head word is always visible on
// dout; pop removes it. A push and a pop in the same cycle are both taken
// (a push is refused only when the queue is full and no pop is made).
// Pushing into a full queue or popping an empty one is a protocol error,
// checked by assertions; the control unit waits while the queue is full.
//
// The original design names an implication FIFO between the implication
// selector and the processor interface but gives no size; DEPTH = 64 is this
// design's choice, one more than the largest number of variables a partition
// can name, so one decision's implications always fit.
module implication_fifo #(
  parameter int unsigned W     = 8,   // word width
  parameter int unsigned DEPTH = 64   // words, a power of two
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  logic [W-1:0]             din,
  input  logic                     pop,
  output logic [W-1:0]             dout,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH):0]   count
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW:0]   wr_q, rd_q;

  logic do_push, do_pop;
  assign do_pop  = pop && !empty;
  assign do_push = push && (!full || do_pop);

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_q[AW-1:0]] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_q <= '0;
      rd_q <= '0;
    end else begin
      if (do_push) wr_q <= wr_q + 1'b1;
      if (do_pop)  rd_q <= rd_q + 1'b1;
    end
  end

  assign count = wr_q - rd_q;
  assign empty = (wr_q == rd_q);
  assign full  = (wr_q[AW-1:0] == rd_q[AW-1:0]) && (wr_q[AW] != rd_q[AW]);
  assign dout  = mem[rd_q[AW-1:0]];

  // Protocol rules for the two users of the queue.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop))
    else $error("implication_fifo: push while full");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("implication_fifo: pop while empty");

endmodule
