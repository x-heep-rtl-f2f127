// fast_intr_ctrl: always-on fast interrupt controller.
//
// Collects NSRC interrupt sources (DMA, accelerators, always-on and
// peripheral events) and presents them to the CPU on its dedicated fast
// interrupt lines, bypassing the platform-level interrupt controller.
// A rising edge on a source sets its pending bit; pending bits stay set until
// software writes 1 to them. irq_o = pending & enable, so an interrupt is
// seen by the CPU one cycle after the source edge. wakeup_o is the OR of
// irq_o and tells the power manager to bring a sleeping CPU back.
// Registers (OBI slave, granted at once, answered the next cycle):
//   0x0 PENDING  read; write 1 to clear a bit (a new edge in the same cycle wins)
//   0x4 ENABLE   read/write
// The platform names this block only; its edge capture, register layout and
// source count are this design's choices.
module fast_intr_ctrl
  import xheep_pkg::*;
#(
  parameter int unsigned NSRC = 16
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  obi_req_t        reg_req_i,
  output obi_rsp_t        reg_rsp_o,
  input  logic [NSRC-1:0] src_i,
  output logic [NSRC-1:0] irq_o,
  output logic            wakeup_o
);
  logic [NSRC-1:0] src_q, pending_q, enable_q, clr;
  logic            rvalid_q;
  logic [31:0]     rdata_q;
  logic            wr_pend, wr_en;

  assign wr_pend = reg_req_i.req & reg_req_i.we & (reg_req_i.addr[3:0] == FIC_REG_PENDING);
  assign wr_en   = reg_req_i.req & reg_req_i.we & (reg_req_i.addr[3:0] == FIC_REG_ENABLE);
  assign clr     = wr_pend ? reg_req_i.wdata[NSRC-1:0] : '0;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      src_q     <= '0;
      pending_q <= '0;
      enable_q  <= '0;
      rvalid_q  <= 1'b0;
      rdata_q   <= '0;
    end else begin
      src_q     <= src_i;
      pending_q <= (pending_q & ~clr) | (src_i & ~src_q);
      if (wr_en) enable_q <= reg_req_i.wdata[NSRC-1:0];
      rvalid_q  <= reg_req_i.req;
      if (reg_req_i.req && !reg_req_i.we) begin
        unique case (reg_req_i.addr[3:0])
          FIC_REG_PENDING: rdata_q <= 32'(pending_q);
          FIC_REG_ENABLE:  rdata_q <= 32'(enable_q);
          default:         rdata_q <= '0;
        endcase
      end
    end
  end

  assign reg_rsp_o.gnt    = reg_req_i.req;
  assign reg_rsp_o.rvalid = rvalid_q;
  assign reg_rsp_o.rdata  = rdata_q;
  assign irq_o            = pending_q & enable_q;
  assign wakeup_o         = |irq_o;
endmodule
