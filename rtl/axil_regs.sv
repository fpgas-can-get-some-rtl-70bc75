// axil_regs: the processor-side register interface of the accelerator.
//
// An AXI4-Lite slave (32-bit data, one transaction of each kind at a time)
// through which the processor writes commands and their data into registers
// and polls status and implications. Register map (byte addresses):
//   0x00 CMD         W   [1:0] operation code; the write issues the command.
//                    R   [1:0] last operation code written.
//   0x04 VAR         RW  [5:0] variable, [8] value (decision / backtrack).
//   0x08 CLAUSE_IDX  RW  [15:0] clause processor to load.
//   0x0C CLAUSE_LITS RW  literal i in [8i+6:8i] = {negated, variable[5:0]},
//                        i = 0..2; variable 0 marks an empty slot.
//   0x10 STATUS      R   [2:0] status code, [4] busy, [5] FIFO empty,
//                        [6] FIFO full, [7] command dropped (sticky, cleared
//                        by this read), [15:8] FIFO occupancy.
//   0x14 IMPL        R   head of the implication FIFO: [5:0] variable,
//                        [8] value, [31] valid; reading a valid entry pops it.
// A command written while the previous one has not yet been taken by the
// control unit is dropped and answered with SLVERR.
//
// Timing: write and read address/data are accepted in the cycle they are both
// valid (write) or the address is valid (read) and no response is pending;
// the response follows in the next cycle. An issued command is offered to the
// control unit from the cycle after the write until it is accepted.
//
// The original design says only that the processor writes commands and data to
// hardware registers over AXI and polls for status and implications; the
// register map, the handshake and the dropped-command rule are this design's
// own.
module axil_regs
  import sat_pkg::*;
#(
  parameter int unsigned FIFO_CW = 7   // width of the FIFO occupancy count
) (
  input  logic               clk,
  input  logic               rst_n,
  // AXI4-Lite slave
  input  logic [7:0]         s_axi_awaddr,
  input  logic               s_axi_awvalid,
  output logic               s_axi_awready,
  input  logic [31:0]        s_axi_wdata,
  input  logic [3:0]         s_axi_wstrb,
  input  logic               s_axi_wvalid,
  output logic               s_axi_wready,
  output logic [1:0]         s_axi_bresp,
  output logic               s_axi_bvalid,
  input  logic               s_axi_bready,
  input  logic [7:0]         s_axi_araddr,
  input  logic               s_axi_arvalid,
  output logic               s_axi_arready,
  output logic [31:0]        s_axi_rdata,
  output logic [1:0]         s_axi_rresp,
  output logic               s_axi_rvalid,
  input  logic               s_axi_rready,
  // command to the BCP engine
  output cmd_t               cmd,
  output logic               cmd_valid,
  input  logic               cmd_ready,
  input  status_t            status,
  input  logic               busy,
  // implication FIFO read side
  input  impl_t              fifo_head,
  input  logic               fifo_empty,
  input  logic               fifo_full,
  input  logic [FIFO_CW-1:0] fifo_count,
  output logic               fifo_pop
);

  localparam logic [7:0] A_CMD = 8'h00, A_VAR = 8'h04, A_CIDX = 8'h08,
                         A_LITS = 8'h0C, A_STATUS = 8'h10, A_IMPL = 8'h14;
  localparam logic [1:0] RESP_OKAY = 2'b00, RESP_SLVERR = 2'b10;

  logic [31:0] var_q, cidx_q, lits_q;
  opcode_t     op_q;
  logic        pending_q, dropped_q;

  // ---------------- write channel
  logic wr_fire;
  assign s_axi_awready = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
  assign s_axi_wready  = s_axi_awready;
  assign wr_fire       = s_axi_awready;

  function automatic logic [31:0] merge(logic [31:0] old, logic [31:0] d, logic [3:0] be);
    for (int b = 0; b < 4; b++)
      if (be[b]) old[8*b +: 8] = d[8*b +: 8];
    return old;
  endfunction

  logic issue, drop;
  assign issue = wr_fire && (s_axi_awaddr == A_CMD) && s_axi_wstrb[0] && !pending_q;
  assign drop  = wr_fire && (s_axi_awaddr == A_CMD) && s_axi_wstrb[0] &&  pending_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      var_q        <= '0;
      cidx_q       <= '0;
      lits_q       <= '0;
      op_q         <= OP_NOP;
      pending_q    <= 1'b0;
      s_axi_bvalid <= 1'b0;
      s_axi_bresp  <= RESP_OKAY;
    end else begin
      if (s_axi_bvalid && s_axi_bready) s_axi_bvalid <= 1'b0;
      if (cmd_valid && cmd_ready)       pending_q    <= 1'b0;
      if (wr_fire) begin
        s_axi_bvalid <= 1'b1;
        s_axi_bresp  <= drop ? RESP_SLVERR : RESP_OKAY;
        unique case (s_axi_awaddr)
          A_VAR:   var_q  <= merge(var_q,  s_axi_wdata, s_axi_wstrb);
          A_CIDX:  cidx_q <= merge(cidx_q, s_axi_wdata, s_axi_wstrb);
          A_LITS:  lits_q <= merge(lits_q, s_axi_wdata, s_axi_wstrb);
          default: ;
        endcase
        if (issue) begin
          op_q      <= opcode_t'(s_axi_wdata[1:0]);
          pending_q <= 1'b1;
        end
      end
    end
  end

  // Command presented to the control unit.
  always_comb begin
    cmd.op         = op_q;
    cmd.clause_idx = cidx_q[CIDX_W-1:0];
    for (int i = 0; i < LITS; i++) begin
      cmd.lits[i].neg = lits_q[8*i + VAR_W];
      cmd.lits[i].vid = lits_q[8*i +: VAR_W];
    end
    cmd.vid   = var_q[VAR_W-1:0];
    cmd.value = var_q[8];
  end
  assign cmd_valid = pending_q;

  // ---------------- read channel
  logic rd_fire;
  assign s_axi_arready = !s_axi_rvalid;
  assign rd_fire       = s_axi_arvalid && s_axi_arready;
  assign fifo_pop      = rd_fire && (s_axi_araddr == A_IMPL) && !fifo_empty;

  logic [31:0] rd_word;
  always_comb begin
    rd_word = '0;
    unique case (s_axi_araddr)
      A_CMD:    rd_word[1:0] = op_q;
      A_VAR:    rd_word      = var_q;
      A_CIDX:   rd_word      = cidx_q;
      A_LITS:   rd_word      = lits_q;
      A_STATUS: begin
        rd_word[2:0]  = status;
        rd_word[4]    = busy || pending_q;
        rd_word[5]    = fifo_empty;
        rd_word[6]    = fifo_full;
        rd_word[7]    = dropped_q;
        rd_word[8 +: FIFO_CW] = fifo_count;
      end
      A_IMPL: begin
        rd_word[VAR_W-1:0] = fifo_head.vid;
        rd_word[8]         = fifo_head.value;
        rd_word[31]        = !fifo_empty;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
      s_axi_rresp  <= RESP_OKAY;
      dropped_q    <= 1'b0;
    end else begin
      if (s_axi_rvalid && s_axi_rready) s_axi_rvalid <= 1'b0;
      if (rd_fire) begin
        s_axi_rvalid <= 1'b1;
        s_axi_rdata  <= rd_word;
        s_axi_rresp  <= RESP_OKAY;
      end
      if (drop)                                      dropped_q <= 1'b1;
      else if (rd_fire && s_axi_araddr == A_STATUS) dropped_q <= 1'b0;
    end
  end

  // AXI rule: a response is held until the master takes it.
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
      s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid && $stable(s_axi_bresp))
    else $error("axil_regs: write response dropped");
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
      s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid && $stable(s_axi_rdata))
    else $error("axil_regs: read data dropped");

endmodule
