// tb_power_manager: self-checking test of the power manager.
//
// Power switches are modelled here with a random 1..4 cycle acknowledge
// delay. Every cycle, for every domain, the test checks the safety rules of
// the control outputs: a switched-off domain is isolated, clock-stopped and
// in reset; a running clock implies power, no isolation, no reset and no
// retention; isolation is raised only after the clock was stopped and
// dropped before the clock restarts; the switch opens only after isolation.
// It then walks each kind of domain through its states: peripheral domain
// off and on, a memory bank into and out of retention, clock gating only,
// an accelerator domain, and the CPU, which must wait for its sleep signal
// and come back on a wake-up.
module tb_power_manager;
  import xheep_pkg::*;

  localparam int unsigned NBANKS = 2;
  localparam int unsigned NEXT   = 2;
  localparam int unsigned ND     = 2 + NBANKS + NEXT;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int   checks = 0, failures = 0;
  always #5 clk = ~clk;

  obi_req_t           reg_req;
  obi_rsp_t           reg_rsp;
  logic               core_sleep, wakeup;
  logic [ND-1:0]      ack, on;
  pwr_ctrl_t [ND-1:0] pwr, pwr_prev;

  power_manager dut (
    .clk_i(clk), .rst_ni(rst_n), .reg_req_i(reg_req), .reg_rsp_o(reg_rsp),
    .core_sleep_i(core_sleep), .wakeup_i(wakeup), .pwr_ack_i(ack), .pwr_o(pwr), .domain_on_o(on)
  );

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // power switch models
  for (genvar d = 0; d < ND; d++) begin : g_sw
    int delay = 0;
    always @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        ack[d] <= 1'b1;
        delay  = 0;
      end else if (ack[d] != pwr[d].pwr_on) begin
        if (delay == 0) delay = 1 + $urandom_range(3);
        delay--;
        if (delay == 0) ack[d] <= pwr[d].pwr_on;
      end
    end
  end

  // safety rules, every cycle
  int rule_fail = 0, rule_checks = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      for (int d = 0; d < ND; d++) begin
        rule_checks++;
        if (!pwr[d].pwr_on && !(pwr[d].iso && !pwr[d].clk_en && !pwr[d].rst_n)) rule_fail++;
        if (pwr[d].clk_en && !(pwr[d].pwr_on && !pwr[d].iso && pwr[d].rst_n && !pwr[d].retention)) rule_fail++;
        if (pwr[d].retention && !(pwr[d].pwr_on && pwr[d].iso && !pwr[d].clk_en)) rule_fail++;
        if (pwr[d].iso && !pwr_prev[d].iso && pwr_prev[d].clk_en) rule_fail++;
        if (pwr[d].clk_en && !pwr_prev[d].clk_en && pwr_prev[d].iso) rule_fail++;
        if (!pwr[d].pwr_on && pwr_prev[d].pwr_on && !pwr_prev[d].iso) rule_fail++;
        if (rule_fail > 0 && rule_fail < 4) $display("FAIL: safety rule broken in domain %0d at %0t", d, $time);
      end
    end
    pwr_prev <= pwr;
  end

  task automatic reg_wr(input int d, input logic [31:0] v);
    @(negedge clk);
    reg_req = '{req: 1'b1, we: 1'b1, be: 4'hF, addr: 32'(4 * d), wdata: v};
    @(negedge clk);
    reg_req = OBI_REQ_IDLE;
  endtask

  task automatic state_rd(input int d, output pd_state_e s);
    @(negedge clk);
    reg_req = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: 32'h100 + 32'(4 * d), wdata: '0};
    @(negedge clk);
    reg_req = OBI_REQ_IDLE;
    s = pd_state_e'(reg_rsp.rdata[2:0]);
  endtask

  task automatic wait_state(input int d, input pd_state_e want, input string what);
    pd_state_e s;
    int n;
    n = 0;
    do begin
      state_rd(d, s);
      n++;
    end while (s != want && n < 50);
    check(s == want, $sformatf("%s: domain %0d in state %s, expected %s", what, d, s.name(), want.name()));
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pd_state_e s;
    logic [31:0] v;
    reg_req    = OBI_REQ_IDLE;
    core_sleep = 1'b0;
    wakeup     = 1'b0;
    pwr_prev   = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int d = 0; d < ND; d++) begin
      check(pwr[d] == '{clk_en: 1'b1, pwr_on: 1'b1, iso: 1'b0, rst_n: 1'b1, retention: 1'b0},
            $sformatf("domain %0d on after reset", d));
    end
    check(&on, "all domains report on");

    // control register read-back
    reg_wr(3, 32'h4);
    @(negedge clk);
    reg_req = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: 32'hC, wdata: '0};
    @(negedge clk);
    reg_req = OBI_REQ_IDLE;
    check(reg_rsp.rvalid && reg_rsp.rdata == 32'h4, "control register read-back");

    // clock gating only (bank 1): clock stops, power and isolation unchanged
    check(!pwr[3].clk_en && pwr[3].pwr_on && !pwr[3].iso, "clock gating leaves the domain powered");
    check(pwr[2].clk_en, "other bank unaffected");
    reg_wr(3, 32'h0);
    check(pwr[3].clk_en, "clock back after clearing CG");

    // peripheral domain off and on
    reg_wr(1, 32'h1);
    wait_state(1, PD_OFF, "peripheral off");
    check(!pwr[1].pwr_on && pwr[1].iso && !pwr[1].rst_n, "peripheral switched off, isolated, in reset");
    check(!ack[1], "peripheral switch acknowledged off");
    check(pwr[0].clk_en && pwr[2].clk_en, "other domains still running");
    reg_wr(1, 32'h0);
    wait_state(1, PD_ON, "peripheral back on");
    check(pwr[1].clk_en && pwr[1].pwr_on && !pwr[1].iso && pwr[1].rst_n, "peripheral fully restored");

    // memory bank 0 into retention and back
    reg_wr(2, 32'h3);
    wait_state(2, PD_RET, "bank 0 retention");
    check(pwr[2].retention && pwr[2].pwr_on && !pwr[2].clk_en, "bank 0 retentive, powered, clock stopped");
    reg_wr(2, 32'h0);
    wait_state(2, PD_ON, "bank 0 back from retention");
    // bank 1 fully off
    reg_wr(3, 32'h1);
    wait_state(3, PD_OFF, "bank 1 off");
    check(!pwr[3].pwr_on && !pwr[3].retention, "bank 1 switched off without retention");
    reg_wr(3, 32'h0);
    wait_state(3, PD_ON, "bank 1 on");

    // RET is ignored outside memory banks
    reg_wr(4, 32'h3);
    wait_state(4, PD_OFF, "accelerator 0 off (retention not available)");
    reg_wr(4, 32'h0);
    wait_state(4, PD_ON, "accelerator 0 on");

    // CPU: only at sleep, back on wake-up
    reg_wr(0, 32'h1);
    repeat (20) @(negedge clk);
    check(pwr[0].clk_en && on[0], "CPU stays on while it does not sleep");
    core_sleep = 1'b1;
    wait_state(0, PD_OFF, "CPU off at sleep");
    core_sleep = 1'b0;
    repeat (10) @(negedge clk);
    check(!pwr[0].pwr_on, "CPU stays off without wake-up");
    wakeup = 1'b1;
    @(negedge clk);
    wakeup = 1'b0;
    wait_state(0, PD_ON, "CPU back on after wake-up");
    check(pwr[0].rst_n && pwr[0].clk_en, "CPU out of reset and clocked");
    reg_wr(0, 32'h0);

    repeat (5) @(negedge clk);
    checks += rule_checks;
    failures += rule_fail;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
