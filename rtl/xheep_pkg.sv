// xheep_pkg: types and constants shared by the X-HEEP host platform RTL.
//
// The bus of the platform follows the Open Bus Interface (OBI) in its basic
// form: a request phase (req/gnt handshake carrying address, write enable,
// byte enables and write data) and a response phase (rvalid with read data).
// A request is transferred in the cycle where req and gnt are both high; its
// response arrives in a later cycle, with rvalid high for exactly one cycle.
// Responses of one slave come back in the order the requests were granted.
//
// The structs below bundle one OBI port. The address map, the bus topology
// and the memory addressing scheme are the configuration knobs the platform
// exposes. The map offsets are this design's choice; the platform only
// states that the map, the number of banks and the topology are configurable.
package xheep_pkg;

  localparam int unsigned AW = 32;  // OBI address width
  localparam int unsigned DW = 32;  // OBI data width

  typedef struct packed {
    logic            req;
    logic            we;
    logic [DW/8-1:0] be;
    logic [AW-1:0]   addr;
    logic [DW-1:0]   wdata;
  } obi_req_t;

  typedef struct packed {
    logic          gnt;
    logic          rvalid;
    logic [DW-1:0] rdata;
  } obi_rsp_t;

  localparam obi_req_t OBI_REQ_IDLE = '{req: 1'b0, we: 1'b0, be: '0, addr: '0, wdata: '0};
  localparam obi_rsp_t OBI_RSP_IDLE = '{gnt: 1'b0, rvalid: 1'b0, rdata: '0};

  // Interconnect topology: one transaction at a time on a shared bus, or a
  // fully connected crossbar with one arbiter per slave.
  typedef enum logic {
    BUS_ONE_AT_A_TIME   = 1'b0,
    BUS_FULLY_CONNECTED = 1'b1
  } bus_topology_e;

  // Main-memory addressing scheme: each bank owns a contiguous slice of the
  // address space, or consecutive 32-bit words rotate over the banks.
  typedef enum logic {
    MEM_CONTIGUOUS  = 1'b0,
    MEM_INTERLEAVED = 1'b1
  } mem_scheme_e;

  // An address rule of the interconnect: a request goes to the slave whose
  // rule has start <= addr < stop and (addr & mask) == match.
  typedef struct packed {
    logic [AW-1:0] start;
    logic [AW-1:0] stop;
    logic [AW-1:0] mask;
    logic [AW-1:0] match;
  } addr_rule_t;

  // Power-control bundle of one power domain, driven by the power manager.
  typedef struct packed {
    logic clk_en;     // 1: domain clock runs (drives a clock gate)
    logic pwr_on;     // 1: power switch closed
    logic iso;        // 1: domain outputs clamped by isolation cells
    logic rst_n;      // 0: domain held in reset
    logic retention;  // 1: memory kept in retentive (data-preserving) mode
  } pwr_ctrl_t;

  // Power state of one domain, as seen in the power manager status register.
  typedef enum logic [2:0] {
    PD_ON       = 3'd0,
    PD_GATE_CLK = 3'd1,
    PD_ISOLATE  = 3'd2,
    PD_SW_OFF   = 3'd3,
    PD_OFF      = 3'd4,
    PD_RET      = 3'd5,
    PD_SW_ON    = 3'd6,
    PD_RELEASE  = 3'd7
  } pd_state_e;

  // Memory map (byte addresses).
  localparam logic [AW-1:0] RAM_START       = 32'h0000_0000;
  localparam logic [AW-1:0] DEBUG_START     = 32'h1000_0000;
  localparam logic [AW-1:0] DEBUG_SIZE      = 32'h0010_0000;
  localparam logic [AW-1:0] AO_PERIPH_START = 32'h2000_0000;
  localparam logic [AW-1:0] AO_PERIPH_SIZE  = 32'h0010_0000;
  localparam logic [AW-1:0] PERIPH_START    = 32'h3000_0000;
  localparam logic [AW-1:0] PERIPH_SIZE     = 32'h0010_0000;
  localparam logic [AW-1:0] EXT_SLAVE_START = 32'hF000_0000;
  localparam logic [AW-1:0] EXT_SLAVE_SIZE  = 32'h0100_0000;  // per accelerator

  // Offsets inside the always-on peripheral region.
  localparam logic [AW-1:0] AO_EXT_OFFSET   = 32'h0000_0000;  // SoC ctrl, boot ROM, timer
  localparam logic [AW-1:0] AO_EXT_SIZE     = 32'h0003_0000;
  localparam logic [AW-1:0] PM_OFFSET       = 32'h0003_0000;  // power manager
  localparam logic [AW-1:0] FIC_OFFSET      = 32'h0004_0000;  // fast interrupt controller
  localparam logic [AW-1:0] DMA_OFFSET      = 32'h0005_0000;  // DMA registers
  localparam logic [AW-1:0] AO_BLOCK_SIZE   = 32'h0001_0000;

  // DMA register map, per channel, at DMA_OFFSET + channel * DMA_CH_STRIDE.
  localparam int unsigned DMA_CH_STRIDE   = 32'h40;
  localparam logic [5:0] DMA_REG_SRC      = 6'h00;
  localparam logic [5:0] DMA_REG_DST      = 6'h04;
  localparam logic [5:0] DMA_REG_SIZE_D1  = 6'h08;
  localparam logic [5:0] DMA_REG_SIZE_D2  = 6'h0C;
  localparam logic [5:0] DMA_REG_SSTR_D1  = 6'h10;
  localparam logic [5:0] DMA_REG_SSTR_D2  = 6'h14;
  localparam logic [5:0] DMA_REG_DSTR_D1  = 6'h18;
  localparam logic [5:0] DMA_REG_DSTR_D2  = 6'h1C;
  localparam logic [5:0] DMA_REG_CTRL     = 6'h20;
  localparam logic [5:0] DMA_REG_STATUS   = 6'h24;

  // DMA CTRL register bits.
  localparam int unsigned DMA_CTRL_START  = 0;  // write 1 to start
  localparam int unsigned DMA_CTRL_2D     = 1;  // 1: 2D transfer
  localparam int unsigned DMA_CTRL_RX_TRIG = 2; // wait for trig_rx before each read
  localparam int unsigned DMA_CTRL_TX_TRIG = 3; // wait for trig_tx before each write
  localparam int unsigned DMA_CTRL_IRQ_EN = 4;  // raise done interrupt

  // Fast interrupt controller registers.
  localparam logic [3:0] FIC_REG_PENDING  = 4'h0;  // read; write 1 to clear
  localparam logic [3:0] FIC_REG_ENABLE   = 4'h4;

  // Power manager registers: control word of domain d at 4*d, status at
  // PM_STATUS_BASE + 4*d.
  localparam logic [8:0] PM_STATUS_BASE   = 9'h100;
  localparam int unsigned PM_CTRL_OFF     = 0;  // request power off (CPU: on next sleep)
  localparam int unsigned PM_CTRL_RET     = 1;  // use retention instead of off
  localparam int unsigned PM_CTRL_CG      = 2;  // gate the clock while on

endpackage
