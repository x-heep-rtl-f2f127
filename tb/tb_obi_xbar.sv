// tb_obi_xbar: self-checking test of the OBI interconnect in both topologies.
//
// Three random masters (tb/obi_rand_master) drive two interconnect
// instances, one fully connected and one one-at-a-time, each with three
// random-latency memory slaves (tb/obi_mem_model) and an unmapped region that
// must be answered by the internal error slave. Every read is checked against
// the master's own prediction, so lost, duplicated, misrouted or reordered
// responses are caught. The test also counts cycles in which the crossbar
// granted more than one slave (parallelism must happen) and fails if the
// shared bus ever did.
module tb_obi_xbar;
  import xheep_pkg::*;

  localparam int unsigned NM = 3;
  localparam int unsigned NS = 3;
  localparam int unsigned N_TXN = 300;

  function automatic addr_rule_t [NS-1:0] rules();
    addr_rule_t [NS-1:0] r;
    for (int s = 0; s < NS; s++) r[s] = '{start: 32'h1000 * s, stop: 32'h1000 * (s + 1), mask: '0, match: '0};
    return r;
  endfunction

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int   checks = 0, failures = 0;
  always #5 clk = ~clk;

  obi_req_t [1:0][NM-1:0] m_req;
  obi_rsp_t [1:0][NM-1:0] m_rsp;
  obi_req_t [1:0][NS-1:0] s_req;
  obi_rsp_t [1:0][NS-1:0] s_rsp;
  logic     [1:0][NM-1:0] done;
  int                     m_chk [2][NM];
  int                     m_fail [2][NM];
  int                     acc [2][NS];

  for (genvar t = 0; t < 2; t++) begin : g_top
    obi_xbar #(
      .NM(NM), .NS(NS), .RULES(rules()),
      .TOPOLOGY(t == 0 ? BUS_FULLY_CONNECTED : BUS_ONE_AT_A_TIME)
    ) dut (
      .clk_i(clk), .rst_ni(rst_n),
      .mst_req_i(m_req[t]), .mst_rsp_o(m_rsp[t]), .slv_req_o(s_req[t]), .slv_rsp_i(s_rsp[t])
    );
    for (genvar m = 0; m < NM; m++) begin : g_m
      obi_rand_master #(.ID(m), .N_TXN(N_TXN), .NT(NS + 1), .BASE(32'h0), .STEP(32'h1000)) u_m (
        .clk_i(clk), .rst_ni(rst_n), .req_o(m_req[t][m]), .rsp_i(m_rsp[t][m]),
        .done_o(done[t][m]), .checks_o(m_chk[t][m]), .failures_o(m_fail[t][m])
      );
    end
    for (genvar s = 0; s < NS; s++) begin : g_s
      obi_mem_model #(.GNT_PCT(60 + 15 * s), .MAX_LAT(1 + s)) u_s (
        .clk_i(clk), .rst_ni(rst_n), .req_i(s_req[t][s]), .rsp_o(s_rsp[t][s]), .accepted_o(acc[t][s])
      );
    end
  end

  int parallel_xbar = 0, parallel_shared = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      int n0, n1;
      n0 = 0;
      n1 = 0;
      for (int s = 0; s < NS; s++) begin
        n0 += int'(s_req[0][s].req && s_rsp[0][s].gnt);
        n1 += int'(s_req[1][s].req && s_rsp[1][s].gnt);
      end
      if (n0 > 1) parallel_xbar++;
      if (n1 > 1) parallel_shared++;
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (&done);
    repeat (5) @(posedge clk);
    for (int t = 0; t < 2; t++) begin
      int total;
      total = 0;
      for (int m = 0; m < NM; m++) begin
        checks   += m_chk[t][m];
        failures += m_fail[t][m];
        checks++;
        if (m_chk[t][m] != N_TXN) begin
          failures++;
          $display("FAIL: topology %0d master %0d got %0d responses", t, m, m_chk[t][m]);
        end
      end
      for (int s = 0; s < NS; s++) total += acc[t][s];
      checks++;
      if (total == 0 || total > NM * N_TXN) begin
        failures++;
        $display("FAIL: topology %0d slaves accepted %0d requests", t, total);
      end
    end
    checks++;
    if (parallel_xbar == 0) begin
      failures++;
      $display("FAIL: crossbar never granted two slaves in one cycle");
    end
    checks++;
    if (parallel_shared != 0) begin
      failures++;
      $display("FAIL: shared bus granted two slaves in one cycle %0d times", parallel_shared);
    end
    $display("parallel grants: crossbar %0d cycles, shared bus %0d cycles", parallel_xbar, parallel_shared);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
