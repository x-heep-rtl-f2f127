// pm_domain_ctrl: power sequencer of one power domain.
//
// Takes a domain from running to off (or to retention) and back in a fixed,
// glitch-free order, one step per clock cycle:
//   down:  gate clock -> isolate outputs -> (retention)             -> RET
//                                        -> assert reset, open switch -> wait ack low  -> OFF
//   up:    close switch, wait ack high (from OFF) -> drop isolation, release reset
//          -> ungate clock -> ON
// sleep_i starts the way down from ON, wake_i the way up from OFF or RET.
// With use_ret_i the domain keeps its supply in a data-retentive mode
// instead of being switched off (memory banks). cg_i gates the clock of a
// running domain without changing its power state. The step order and the
// use of a switch acknowledge are this design's choices; clock gating, power
// gating and retention as the three mechanisms come from the platform.
module pm_domain_ctrl
  import xheep_pkg::*;
(
  input  logic      clk_i,
  input  logic      rst_ni,
  input  logic      sleep_i,
  input  logic      wake_i,
  input  logic      use_ret_i,
  input  logic      cg_i,
  input  logic      pwr_ack_i,
  output pwr_ctrl_t pwr_o,
  output pd_state_e state_o
);
  pd_state_e st_q, st_d;

  always_comb begin
    st_d = st_q;
    unique case (st_q)
      PD_ON:       if (sleep_i) st_d = PD_GATE_CLK;
      PD_GATE_CLK: st_d = PD_ISOLATE;
      PD_ISOLATE:  st_d = use_ret_i ? PD_RET : PD_SW_OFF;
      PD_SW_OFF:   if (!pwr_ack_i) st_d = PD_OFF;
      PD_OFF:      if (wake_i) st_d = PD_SW_ON;
      PD_RET:      if (wake_i) st_d = PD_RELEASE;
      PD_SW_ON:    if (pwr_ack_i) st_d = PD_RELEASE;
      PD_RELEASE:  st_d = PD_ON;
      default:     st_d = PD_ON;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) st_q <= PD_ON;
    else         st_q <= st_d;
  end

  always_comb begin
    pwr_o = '{clk_en: 1'b0, pwr_on: 1'b1, iso: 1'b1, rst_n: 1'b1, retention: 1'b0};
    unique case (st_q)
      PD_ON:       begin pwr_o.clk_en = ~cg_i; pwr_o.iso = 1'b0; end
      PD_GATE_CLK: pwr_o.iso = 1'b0;
      PD_ISOLATE:  ;
      PD_SW_OFF,
      PD_OFF:      begin pwr_o.pwr_on = 1'b0; pwr_o.rst_n = 1'b0; end
      PD_RET:      pwr_o.retention = 1'b1;
      PD_SW_ON:    pwr_o.rst_n = 1'b0;
      PD_RELEASE:  pwr_o.iso = 1'b0;
      default:     ;
    endcase
  end

  assign state_o = st_q;
endmodule
