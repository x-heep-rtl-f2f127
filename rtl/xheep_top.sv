// xheep_top: the X-HEEP host platform, a configurable RISC-V microcontroller
// that hosts accelerators.
//
// Bus masters are the CPU (instruction and data ports), the debug unit, the
// DMA (read and write ports) and NEXT external accelerators; bus slaves are
// the NBANKS main-memory banks, the debug unit, the always-on peripheral
// subsystem, the peripheral domain and NEXT external accelerator slaves. An
// OBI interconnect (crossbar or shared bus) joins them. Master m:
//   0 CPU instr, 1 CPU data, 2 debug, 3 DMA read, 4 DMA write, 5+i accelerator i
// Slave s:
//   0..NBANKS-1 memory banks, NBANKS debug, NBANKS+1 always-on peripherals,
//   NBANKS+2 peripheral domain, NBANKS+3+i accelerator i
// Memory map (xheep_pkg): RAM from 0x0000_0000 (banks contiguous, or word-
// interleaved with MEM_SCHEME = MEM_INTERLEAVED), debug 0x1000_0000,
// always-on peripherals 0x2000_0000, peripheral domain 0x3000_0000,
// accelerator i at 0xF000_0000 + i * 0x0100_0000.
//
// The CPU core, the debug unit, the peripheral-domain peripherals (GPIO,
// SPI, I2C, I2S, UART, PLIC, timers), the SoC controller, boot ROM and
// always-on timer are existing IPs that are not part of this RTL: their bus
// and interrupt connections are ports of this module.
//
// The accelerator interface (XAIF) is the set of ports named xaif_*: per
// accelerator an OBI master and an OBI slave, an interrupt, a power-control
// bundle with its switch acknowledge, and per DMA channel a pair of pacing
// triggers. Power domains (power manager order): 0 CPU, 1 peripheral domain,
// 2..1+NBANKS memory banks, then the accelerators. Signals that leave a
// domain pass isolation clamps here: while a domain is isolated its bus
// requests, its responses and its interrupts read as 0.
//
// All ports are synchronous to clk_i; rst_ni is an asynchronous active-low
// reset. The configuration knobs (bus topology, number and size of banks,
// memory addressing scheme, accelerator count) follow the platform; the
// default sizes are this design's choices where the platform gives none.
module xheep_top
  import xheep_pkg::*;
#(
  parameter bus_topology_e TOPOLOGY   = BUS_FULLY_CONNECTED,
  parameter int unsigned   NBANKS     = 2,
  parameter int unsigned   BANK_WORDS = 8192,          // 32 KiB per bank
  parameter mem_scheme_e   MEM_SCHEME = MEM_CONTIGUOUS,
  parameter int unsigned   NEXT       = 2,             // accelerators on the XAIF
  parameter int unsigned   NCH        = 2,             // DMA channels
  parameter int unsigned   NFAST      = 16,            // CPU fast interrupt lines
  localparam int unsigned  ND         = 2 + NBANKS + NEXT,
  localparam int unsigned  NOTHER     = NFAST - NCH - NEXT
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  // CPU core
  input  obi_req_t                 cpu_instr_req_i,
  output obi_rsp_t                 cpu_instr_rsp_o,
  input  obi_req_t                 cpu_data_req_i,
  output obi_rsp_t                 cpu_data_rsp_o,
  output logic [NFAST-1:0]         cpu_irq_fast_o,
  input  logic                     cpu_core_sleep_i,
  output pwr_ctrl_t                cpu_pwr_o,
  input  logic                     cpu_pwr_ack_i,
  // debug unit
  input  obi_req_t                 dbg_mst_req_i,
  output obi_rsp_t                 dbg_mst_rsp_o,
  output obi_req_t                 dbg_slv_req_o,
  input  obi_rsp_t                 dbg_slv_rsp_i,
  // always-on: SoC controller, boot ROM, timer
  output obi_req_t                 ao_ext_req_o,
  input  obi_rsp_t                 ao_ext_rsp_i,
  // peripheral domain
  output obi_req_t                 periph_req_o,
  input  obi_rsp_t                 periph_rsp_i,
  output pwr_ctrl_t                periph_pwr_o,
  input  logic                     periph_pwr_ack_i,
  input  logic [NOTHER-1:0]        fast_irq_i,
  // XAIF
  input  obi_req_t  [NEXT-1:0]     xaif_mst_req_i,
  output obi_rsp_t  [NEXT-1:0]     xaif_mst_rsp_o,
  output obi_req_t  [NEXT-1:0]     xaif_slv_req_o,
  input  obi_rsp_t  [NEXT-1:0]     xaif_slv_rsp_i,
  input  logic      [NEXT-1:0]     xaif_irq_i,
  output pwr_ctrl_t [NEXT-1:0]     xaif_pwr_o,
  input  logic      [NEXT-1:0]     xaif_pwr_ack_i,
  input  logic      [NCH-1:0]      xaif_dma_trig_rx_i,
  input  logic      [NCH-1:0]      xaif_dma_trig_tx_i
);
  localparam int unsigned NM = 5 + NEXT;
  localparam int unsigned NS = NBANKS + 3 + NEXT;
  localparam logic [AW-1:0] BANK_BYTES = AW'(BANK_WORDS * 4);

  function automatic addr_rule_t [NS-1:0] make_rules();
    addr_rule_t [NS-1:0] r;
    for (int b = 0; b < int'(NBANKS); b++) begin
      if (MEM_SCHEME == MEM_INTERLEAVED) begin
        r[b] = '{start: RAM_START, stop: RAM_START + AW'(NBANKS) * BANK_BYTES,
                 mask: AW'((NBANKS - 1) << 2), match: AW'(b << 2)};
      end else begin
        r[b] = '{start: RAM_START + AW'(b) * BANK_BYTES, stop: RAM_START + AW'(b + 1) * BANK_BYTES,
                 mask: '0, match: '0};
      end
    end
    r[NBANKS]     = '{start: DEBUG_START, stop: DEBUG_START + DEBUG_SIZE, mask: '0, match: '0};
    r[NBANKS + 1] = '{start: AO_PERIPH_START, stop: AO_PERIPH_START + AO_PERIPH_SIZE, mask: '0, match: '0};
    r[NBANKS + 2] = '{start: PERIPH_START, stop: PERIPH_START + PERIPH_SIZE, mask: '0, match: '0};
    for (int i = 0; i < int'(NEXT); i++) begin
      r[NBANKS + 3 + i] = '{start: EXT_SLAVE_START + AW'(i) * EXT_SLAVE_SIZE,
                            stop: EXT_SLAVE_START + AW'(i + 1) * EXT_SLAVE_SIZE, mask: '0, match: '0};
    end
    return r;
  endfunction

  localparam addr_rule_t [NS-1:0] RULES = make_rules();

  obi_req_t  [NM-1:0] m_req;
  obi_rsp_t  [NM-1:0] m_rsp;
  obi_req_t  [NS-1:0] s_req;
  obi_rsp_t  [NS-1:0] s_rsp;
  pwr_ctrl_t [ND-1:0] pwr;
  logic      [ND-1:0] pwr_ack;

  // ---------------------------------------------------------------------------
  // Masters, with isolation of the CPU and accelerator domains
  // ---------------------------------------------------------------------------
  always_comb begin
    m_req[0] = pwr[0].iso ? OBI_REQ_IDLE : cpu_instr_req_i;
    m_req[1] = pwr[0].iso ? OBI_REQ_IDLE : cpu_data_req_i;
    m_req[2] = dbg_mst_req_i;
    for (int i = 0; i < int'(NEXT); i++) begin
      m_req[5 + i] = pwr[2 + NBANKS + i].iso ? OBI_REQ_IDLE : xaif_mst_req_i[i];
      xaif_mst_rsp_o[i] = m_rsp[5 + i];
    end
  end
  assign cpu_instr_rsp_o = m_rsp[0];
  assign cpu_data_rsp_o  = m_rsp[1];
  assign dbg_mst_rsp_o   = m_rsp[2];

  obi_xbar #(.NM(NM), .NS(NS), .TOPOLOGY(TOPOLOGY), .RULES(RULES)) u_bus (
    .clk_i, .rst_ni,
    .mst_req_i (m_req),
    .mst_rsp_o (m_rsp),
    .slv_req_o (s_req),
    .slv_rsp_i (s_rsp)
  );

  // ---------------------------------------------------------------------------
  // Main memory
  // ---------------------------------------------------------------------------
  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    sram_bank #(
      .WORDS      (BANK_WORDS),
      .INTERLEAVE ((MEM_SCHEME == MEM_INTERLEAVED) ? NBANKS : 1)
    ) u_bank (
      .clk_i, .rst_ni,
      .req_i     (s_req[b]),
      .rsp_o     (s_rsp[b]),
      .pwr_i     (pwr[2 + b]),
      .pwr_ack_o (pwr_ack[2 + b])
    );
  end

  // ---------------------------------------------------------------------------
  // Slaves outside this RTL, with isolation of the peripheral and
  // accelerator domains
  // ---------------------------------------------------------------------------
  assign dbg_slv_req_o         = s_req[NBANKS];
  assign s_rsp[NBANKS]         = dbg_slv_rsp_i;
  assign periph_req_o          = pwr[1].iso ? OBI_REQ_IDLE : s_req[NBANKS + 2];
  assign s_rsp[NBANKS + 2]     = pwr[1].iso ? OBI_RSP_IDLE : periph_rsp_i;
  for (genvar i = 0; i < NEXT; i++) begin : g_xaif_slv
    assign xaif_slv_req_o[i]     = pwr[2 + NBANKS + i].iso ? OBI_REQ_IDLE : s_req[NBANKS + 3 + i];
    assign s_rsp[NBANKS + 3 + i] = pwr[2 + NBANKS + i].iso ? OBI_RSP_IDLE : xaif_slv_rsp_i[i];
  end

  // ---------------------------------------------------------------------------
  // Always-on peripherals: power manager, fast interrupts, DMA
  // ---------------------------------------------------------------------------
  logic [NEXT-1:0] xaif_irq_iso;
  always_comb begin
    for (int i = 0; i < int'(NEXT); i++) xaif_irq_iso[i] = xaif_irq_i[i] & ~pwr[2 + NBANKS + i].iso;
  end

  assign pwr_ack[0] = cpu_pwr_ack_i;
  assign pwr_ack[1] = periph_pwr_ack_i;
  assign pwr_ack[2 + NBANKS +: NEXT] = xaif_pwr_ack_i;

  ao_periph #(.NBANKS(NBANKS), .NEXT(NEXT), .NCH(NCH), .NFAST(NFAST)) u_ao (
    .clk_i, .rst_ni,
    .slv_req_i     (s_req[NBANKS + 1]),
    .slv_rsp_o     (s_rsp[NBANKS + 1]),
    .ext_req_o     (ao_ext_req_o),
    .ext_rsp_i     (ao_ext_rsp_i),
    .dma_rd_req_o  (m_req[3]),
    .dma_rd_rsp_i  (m_rsp[3]),
    .dma_wr_req_o  (m_req[4]),
    .dma_wr_rsp_i  (m_rsp[4]),
    .dma_trig_rx_i (xaif_dma_trig_rx_i),
    .dma_trig_tx_i (xaif_dma_trig_tx_i),
    .fast_src_i    ({fast_irq_i, xaif_irq_iso}),
    .irq_fast_o    (cpu_irq_fast_o),
    .core_sleep_i  (cpu_core_sleep_i & ~pwr[0].iso),
    .pwr_ack_i     (pwr_ack),
    .pwr_o         (pwr),
    .domain_on_o   ()
  );

  assign cpu_pwr_o    = pwr[0];
  assign periph_pwr_o = pwr[1];
  assign xaif_pwr_o   = pwr[2 + NBANKS +: NEXT];
endmodule
