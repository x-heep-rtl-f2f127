// ao_periph: the always-on peripheral subsystem.
//
// This domain stays powered while the rest of the platform sleeps. It holds
// the power manager, the fast interrupt controller and the DMA engine (its
// registers and its two bus masters), and forwards the rest of its address
// range to an external port for the SoC controller, boot ROM and timer.
//
// One OBI slave port is demultiplexed by address offset inside the
// always-on region (offsets in xheep_pkg: external 0x00000-0x2FFFF, power
// manager 0x30000, fast interrupt controller 0x40000, DMA 0x50000; anything
// else answers 0 after one cycle). Several requests may be in flight as long
// as they go to the same target, which keeps the responses in order; a
// request to another target waits until they have completed.
// The fast interrupt sources are the DMA channels' done interrupts in the
// low bits, then the fast_src_i inputs. The fast interrupt controller's
// wake-up drives the power manager's CPU wake-up.
// Grouping these blocks in an always-on domain follows the platform; the
// address offsets and the interrupt numbering are this design's choices.
module ao_periph
  import xheep_pkg::*;
#(
  parameter int unsigned NBANKS = 2,
  parameter int unsigned NEXT   = 2,
  parameter int unsigned NCH    = 2,
  parameter int unsigned NFAST  = 16,
  localparam int unsigned ND    = 2 + NBANKS + NEXT
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  obi_req_t                slv_req_i,
  output obi_rsp_t                slv_rsp_o,
  // SoC controller, boot ROM, timer
  output obi_req_t                ext_req_o,
  input  obi_rsp_t                ext_rsp_i,
  // DMA
  output obi_req_t                dma_rd_req_o,
  input  obi_rsp_t                dma_rd_rsp_i,
  output obi_req_t                dma_wr_req_o,
  input  obi_rsp_t                dma_wr_rsp_i,
  input  logic [NCH-1:0]          dma_trig_rx_i,
  input  logic [NCH-1:0]          dma_trig_tx_i,
  // interrupts
  input  logic [NFAST-NCH-1:0]    fast_src_i,
  output logic [NFAST-1:0]        irq_fast_o,
  // power control
  input  logic                    core_sleep_i,
  input  logic [ND-1:0]           pwr_ack_i,
  output pwr_ctrl_t [ND-1:0]      pwr_o,
  output logic [ND-1:0]           domain_on_o
);
  typedef enum logic [2:0] {T_EXT, T_PM, T_FIC, T_DMA, T_ERR} ao_tgt_e;

  obi_req_t [3:0] t_req;
  obi_rsp_t [3:0] t_rsp;
  ao_tgt_e        tgt, last_q;
  logic [1:0]     out_q;
  logic           can_issue, issue, err_rvalid_q;
  logic [AW-1:0]  offs;

  assign offs = slv_req_i.addr - AO_PERIPH_START;

  always_comb begin
    if (offs < AO_EXT_OFFSET + AO_EXT_SIZE)                             tgt = T_EXT;
    else if (offs >= PM_OFFSET  && offs < PM_OFFSET  + AO_BLOCK_SIZE)   tgt = T_PM;
    else if (offs >= FIC_OFFSET && offs < FIC_OFFSET + AO_BLOCK_SIZE)   tgt = T_FIC;
    else if (offs >= DMA_OFFSET && offs < DMA_OFFSET + AO_BLOCK_SIZE)   tgt = T_DMA;
    else                                                                tgt = T_ERR;
  end

  assign can_issue = slv_req_i.req && (out_q == '0 || (last_q == tgt && out_q != 2'd3));

  always_comb begin
    for (int t = 0; t < 4; t++) begin
      t_req[t]      = slv_req_i;
      t_req[t].addr = (t == int'(T_EXT)) ? offs : (offs & (AO_BLOCK_SIZE - 1));
      t_req[t].req  = can_issue && tgt == ao_tgt_e'(t);
    end
    slv_rsp_o = OBI_RSP_IDLE;
    if (can_issue) slv_rsp_o.gnt = (tgt == T_ERR) ? 1'b1 : t_rsp[tgt].gnt;
    if (out_q != '0) begin
      if (last_q == T_ERR) slv_rsp_o.rvalid = err_rvalid_q;
      else begin
        slv_rsp_o.rvalid = t_rsp[last_q].rvalid;
        slv_rsp_o.rdata  = t_rsp[last_q].rdata;
      end
    end
  end

  assign issue = can_issue && slv_rsp_o.gnt;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      out_q        <= '0;
      last_q       <= T_EXT;
      err_rvalid_q <= 1'b0;
    end else begin
      out_q        <= out_q + 2'(issue) - 2'(slv_rsp_o.rvalid);
      if (issue) last_q <= tgt;
      err_rvalid_q <= issue && tgt == T_ERR;
    end
  end

  assign ext_req_o    = t_req[T_EXT];
  assign t_rsp[T_EXT] = ext_rsp_i;

  logic [NCH-1:0] dma_irq;
  logic           wakeup;

  power_manager #(.NBANKS(NBANKS), .NEXT(NEXT)) u_pm (
    .clk_i, .rst_ni,
    .reg_req_i    (t_req[T_PM]),
    .reg_rsp_o    (t_rsp[T_PM]),
    .core_sleep_i (core_sleep_i),
    .wakeup_i     (wakeup),
    .pwr_ack_i    (pwr_ack_i),
    .pwr_o        (pwr_o),
    .domain_on_o  (domain_on_o)
  );

  fast_intr_ctrl #(.NSRC(NFAST)) u_fic (
    .clk_i, .rst_ni,
    .reg_req_i (t_req[T_FIC]),
    .reg_rsp_o (t_rsp[T_FIC]),
    .src_i     ({fast_src_i, dma_irq}),
    .irq_o     (irq_fast_o),
    .wakeup_o  (wakeup)
  );

  dma #(.NCH(NCH)) u_dma (
    .clk_i, .rst_ni,
    .reg_req_i  (t_req[T_DMA]),
    .reg_rsp_o  (t_rsp[T_DMA]),
    .rd_req_o   (dma_rd_req_o),
    .rd_rsp_i   (dma_rd_rsp_i),
    .wr_req_o   (dma_wr_req_o),
    .wr_rsp_i   (dma_wr_rsp_i),
    .trig_rx_i  (dma_trig_rx_i),
    .trig_tx_i  (dma_trig_tx_i),
    .done_irq_o (dma_irq)
  );
endmodule
