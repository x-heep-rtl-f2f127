// power_manager: the always-on power manager of the platform.
//
// It owns the power domains that can be turned off: the CPU, the peripheral
// domain, each main-memory bank and each external accelerator attached to
// the accelerator interface. Each domain has a sequencer (pm_domain_ctrl)
// that applies clock gating, power gating or, for memory banks, retention.
//
// Domain order: 0 = CPU, 1 = peripheral domain, 2 .. 1+NBANKS = memory
// banks, then the NEXT accelerators. Registers (OBI slave, granted at once,
// answered the next cycle): control word of domain d at 4*d with
//   bit 0 OFF  request the domain off (CPU: off at its next sleep),
//   bit 1 RET  keep it in retention instead of off (memory banks only),
//   bit 2 CG   gate its clock while it is on,
// and the domain's sequencer state (pd_state_e) at 0x100 + 4*d.
// Every domain except the CPU goes down when OFF is set and comes back up
// when it is cleared. The CPU cannot clear its own bit while it is off, so
// its domain goes down only when OFF is set and the core reports that it
// sleeps (wait-for-interrupt), and comes back when wakeup_i (an enabled
// interrupt) is raised or the bit is cleared, e.g. by the debug unit.
// Which domains exist comes from the platform; the register layout and the
// CPU sleep/wake protocol are this design's choices.
module power_manager
  import xheep_pkg::*;
#(
  parameter int unsigned NBANKS = 2,
  parameter int unsigned NEXT   = 2,
  localparam int unsigned ND    = 2 + NBANKS + NEXT
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  obi_req_t            reg_req_i,
  output obi_rsp_t            reg_rsp_o,
  input  logic                core_sleep_i,
  input  logic                wakeup_i,
  input  logic [ND-1:0]       pwr_ack_i,
  output pwr_ctrl_t [ND-1:0]  pwr_o,
  output logic [ND-1:0]       domain_on_o
);
  logic [ND-1:0][2:0] ctrl_q;
  pd_state_e [ND-1:0] st;
  logic               rvalid_q;
  logic [31:0]        rdata_q;
  logic [8:0]         off;
  int unsigned        d_sel;

  assign off   = reg_req_i.addr[8:0];
  assign d_sel = int'(off[7:2]);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ctrl_q   <= '0;
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else begin
      rvalid_q <= reg_req_i.req;
      if (reg_req_i.req) begin
        if (reg_req_i.we) begin
          if (!off[8] && d_sel < ND) ctrl_q[d_sel] <= reg_req_i.wdata[2:0];
        end else begin
          rdata_q <= '0;
          if (d_sel < ND) rdata_q <= off[8] ? 32'(st[d_sel]) : 32'(ctrl_q[d_sel]);
        end
      end
    end
  end

  assign reg_rsp_o.gnt    = reg_req_i.req;
  assign reg_rsp_o.rvalid = rvalid_q;
  assign reg_rsp_o.rdata  = rdata_q;

  for (genvar d = 0; d < ND; d++) begin : g_dom
    logic sleep, wake, use_ret;
    if (d == 0) begin : g_cpu
      assign sleep = ctrl_q[d][PM_CTRL_OFF] & core_sleep_i & ~wakeup_i;
      assign wake  = wakeup_i | ~ctrl_q[d][PM_CTRL_OFF];
    end else begin : g_other
      assign sleep = ctrl_q[d][PM_CTRL_OFF];
      assign wake  = ~ctrl_q[d][PM_CTRL_OFF];
    end
    assign use_ret = (d >= 2 && d < 2 + NBANKS) ? ctrl_q[d][PM_CTRL_RET] : 1'b0;

    pm_domain_ctrl u_dom (
      .clk_i, .rst_ni,
      .sleep_i   (sleep),
      .wake_i    (wake),
      .use_ret_i (use_ret),
      .cg_i      (ctrl_q[d][PM_CTRL_CG]),
      .pwr_ack_i (pwr_ack_i[d]),
      .pwr_o     (pwr_o[d]),
      .state_o   (st[d])
    );
    assign domain_on_o[d] = st[d] == PD_ON;
  end
endmodule
