// sat_accel_top: FPGA side of the BCP accelerator for a processor/FPGA SoC.
//
// The processor, which runs the DPLL search and keeps the whole formula in its
// own memory, reaches the accelerator through the AXI4-Lite register
// interface. Commands go to the BCP engine (control unit, NUM_CLAUSES clause
// processors, implication selector); every implication the engine finds is
// queued in the implication FIFO, read by the processor through the same
// interface. Formulas larger than the engine are handled by the processor,
// which swaps partitions of clauses in (Update Clause) and re-broadcasts the
// current assignment as decisions.
//
// Ports: clock, active-low reset, and the AXI4-Lite slave port of axil_regs
// (register map there). Timing: see control_unit and axil_regs.
//
// The division into interface, BCP engine and implication FIFO follows the
// original design's block diagram. FIFO_DEPTH is this design's choice.
module sat_accel_top
  import sat_pkg::*;
#(
  parameter int unsigned NUM_CLAUSES = sat_pkg::CP_COUNT,
  parameter int unsigned FIFO_DEPTH  = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  s_axi_awaddr,
  input  logic        s_axi_awvalid,
  output logic        s_axi_awready,
  input  logic [31:0] s_axi_wdata,
  input  logic [3:0]  s_axi_wstrb,
  input  logic        s_axi_wvalid,
  output logic        s_axi_wready,
  output logic [1:0]  s_axi_bresp,
  output logic        s_axi_bvalid,
  input  logic        s_axi_bready,
  input  logic [7:0]  s_axi_araddr,
  input  logic        s_axi_arvalid,
  output logic        s_axi_arready,
  output logic [31:0] s_axi_rdata,
  output logic [1:0]  s_axi_rresp,
  output logic        s_axi_rvalid,
  input  logic        s_axi_rready
);

  localparam int unsigned CW = $clog2(FIFO_DEPTH) + 1;

  cmd_t    cmd;
  logic    cmd_valid, cmd_ready;
  status_t status;
  logic    busy;
  logic    fifo_push, fifo_pop, fifo_empty, fifo_full;
  impl_t   fifo_din, fifo_head;
  logic [CW-1:0] fifo_count;

  axil_regs #(.FIFO_CW(CW)) u_regs (
    .clk, .rst_n,
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready,
    .s_axi_wdata, .s_axi_wstrb, .s_axi_wvalid, .s_axi_wready,
    .s_axi_bresp, .s_axi_bvalid, .s_axi_bready,
    .s_axi_araddr, .s_axi_arvalid, .s_axi_arready,
    .s_axi_rdata, .s_axi_rresp, .s_axi_rvalid, .s_axi_rready,
    .cmd, .cmd_valid, .cmd_ready,
    .status, .busy,
    .fifo_head, .fifo_empty, .fifo_full, .fifo_count, .fifo_pop
  );

  bcp_engine #(.NUM_CLAUSES(NUM_CLAUSES)) u_bcp (
    .clk, .rst_n,
    .cmd, .cmd_valid, .cmd_ready,
    .fifo_push, .fifo_data (fifo_din), .fifo_full,
    .status, .busy
  );

  implication_fifo #(.W($bits(impl_t)), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .push  (fifo_push),
    .din   (fifo_din),
    .pop   (fifo_pop),
    .dout  (fifo_head),
    .empty (fifo_empty),
    .full  (fifo_full),
    .count (fifo_count)
  );

endmodule
