// sram_bank: one bank of the main memory with an OBI slave port.
//
// The platform's main memory is split into banks that can each be switched
// on and off or put in retention on their own. This module is one such bank:
// a WORDS x 32-bit single-port array behind an OBI slave. A request is granted
// in the cycle it arrives as long as the bank is accessible (powered, not in
// retention, clock running); its response follows one cycle later (read data
// of the addressed word, or the completion of a write with byte enables).
// While the bank is not accessible requests are left waiting without grant,
// so a master that touches a sleeping bank stalls until the power manager
// wakes it.
//
// The array is clocked through a clock gate that is open only while the bank
// is accessible, so a gated or retentive bank has no switching activity.
// The power switch acknowledge (pwr_ack_o) follows pwr_on with one cycle of
// delay, standing in for the switch network of a real SRAM macro; the
// contents are kept across every power state here, while a real macro loses
// them when switched off without retention. The word address is taken from
// the bank-local word index addr_i[2 +: log2(WORDS)] when the bank is used
// contiguously, or from the bits above the bank-select bits when INTERLEAVE
// banks share the address range (addr bits [2 +: log2(INTERLEAVE)] select
// the bank outside this module).
module sram_bank
  import xheep_pkg::*;
#(
  parameter int unsigned WORDS      = 8192,  // 32 KiB
  parameter int unsigned INTERLEAVE = 1      // number of interleaved banks (1: contiguous)
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  obi_req_t  req_i,
  output obi_rsp_t  rsp_o,
  input  pwr_ctrl_t pwr_i,
  output logic      pwr_ack_o
);
  localparam int unsigned IW = $clog2(WORDS);
  localparam int unsigned SW = (INTERLEAVE > 1) ? $clog2(INTERLEAVE) : 0;

  logic [DW-1:0] mem [WORDS];
  logic          accessible;
  logic          gclk;
  logic          rvalid_q;
  logic [DW-1:0] rdata_q;
  logic [IW-1:0] widx;

  assign accessible = pwr_i.pwr_on & pwr_i.clk_en & ~pwr_i.retention & ~pwr_i.iso;
  assign widx       = req_i.addr[2 + SW +: IW];

  clock_gate u_cg (
    .clk_i     (clk_i),
    .en_i      (accessible),
    .test_en_i (1'b0),
    .clk_o     (gclk)
  );

  always_ff @(posedge gclk) begin
    if (req_i.req) begin
      if (req_i.we) begin
        for (int b = 0; b < DW / 8; b++) begin
          if (req_i.be[b]) mem[widx][8*b +: 8] <= req_i.wdata[8*b +: 8];
        end
      end else begin
        rdata_q <= mem[widx];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvalid_q  <= 1'b0;
      pwr_ack_o <= 1'b0;
    end else begin
      rvalid_q  <= req_i.req & accessible;
      pwr_ack_o <= pwr_i.pwr_on;
    end
  end

  assign rsp_o.gnt    = req_i.req & accessible;
  assign rsp_o.rvalid = rvalid_q;
  assign rsp_o.rdata  = rdata_q;

endmodule
