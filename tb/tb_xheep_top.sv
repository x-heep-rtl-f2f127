// tb_xheep_top: end-to-end test of the platform at its default configuration.
//
// The CPU, debug unit and two accelerators are played by this testbench
// through their OBI master ports; the debug slave, the always-on external
// slaves, the peripheral domain and the accelerator slaves are random-latency
// memory models (tb/obi_mem_model); power switches acknowledge one cycle
// after they are driven. The test runs one complete use of the platform:
//   loads and stores to both memory banks from CPU, debug and accelerators;
//   parallel accesses through the crossbar and contention for one bank;
//   an unmapped access; a 1D and a 2D DMA transfer programmed over the bus,
//   ending with the DMA fast interrupt; a DMA transfer paced by an
//   accelerator trigger into an accelerator FIFO window; a memory bank in
//   retention stalling a load until it wakes with its data; the peripheral
//   domain switched off and isolated; an accelerator domain switched off
//   with its interrupt masked by isolation; and the CPU switched off at sleep
//   and woken by an accelerator interrupt.
// Every read is compared with the value written, every mechanism is
// counted, and a mechanism that never happened counts as a failure.
module tb_xheep_top;
  import xheep_pkg::*;

  localparam int unsigned NEXT = 2, NCH = 2, NFAST = 16, NBANKS = 2;
  localparam logic [31:0] BANK1 = 32'h0000_8000;       // 32 KiB banks
  localparam logic [31:0] AO    = AO_PERIPH_START;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int   checks = 0, failures = 0;
  always #5 clk = ~clk;

  // master ports driven here: 0 CPU instr, 1 CPU data, 2 debug, 3/4 accelerators
  obi_req_t  mreq [5];
  obi_rsp_t  mrsp [5];
  obi_rsp_t  instr_rsp, data_rsp, dbg_rsp;
  obi_rsp_t  [NEXT-1:0] xm_rsp;
  obi_req_t  [NEXT-1:0] xm_req;
  obi_req_t  dbg_slv_req, ao_ext_req, periph_req;
  obi_rsp_t  dbg_slv_rsp, ao_ext_rsp, periph_rsp;
  obi_req_t  [NEXT-1:0] xs_req;
  obi_rsp_t  [NEXT-1:0] xs_rsp;
  logic      [NFAST-1:0] irq_fast;
  logic      core_sleep;
  pwr_ctrl_t cpu_pwr, periph_pwr;
  pwr_ctrl_t [NEXT-1:0] x_pwr;
  logic      cpu_ack, periph_ack;
  logic      [NEXT-1:0] x_ack, x_irq;
  logic      [NCH-1:0] trig_rx, trig_tx;
  logic      [NFAST-NCH-NEXT-1:0] fast_irq;
  int        acc_dbg, acc_ao, acc_per;
  int        acc_x [NEXT];

  assign xm_req[0] = mreq[3];
  assign xm_req[1] = mreq[4];
  assign mrsp[0] = instr_rsp;
  assign mrsp[1] = data_rsp;
  assign mrsp[2] = dbg_rsp;
  assign mrsp[3] = xm_rsp[0];
  assign mrsp[4] = xm_rsp[1];

  xheep_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .cpu_instr_req_i(mreq[0]), .cpu_instr_rsp_o(instr_rsp),
    .cpu_data_req_i(mreq[1]), .cpu_data_rsp_o(data_rsp),
    .cpu_irq_fast_o(irq_fast), .cpu_core_sleep_i(core_sleep),
    .cpu_pwr_o(cpu_pwr), .cpu_pwr_ack_i(cpu_ack),
    .dbg_mst_req_i(mreq[2]), .dbg_mst_rsp_o(dbg_rsp),
    .dbg_slv_req_o(dbg_slv_req), .dbg_slv_rsp_i(dbg_slv_rsp),
    .ao_ext_req_o(ao_ext_req), .ao_ext_rsp_i(ao_ext_rsp),
    .periph_req_o(periph_req), .periph_rsp_i(periph_rsp),
    .periph_pwr_o(periph_pwr), .periph_pwr_ack_i(periph_ack), .fast_irq_i(fast_irq),
    .xaif_mst_req_i(xm_req), .xaif_mst_rsp_o(xm_rsp),
    .xaif_slv_req_o(xs_req), .xaif_slv_rsp_i(xs_rsp),
    .xaif_irq_i(x_irq), .xaif_pwr_o(x_pwr), .xaif_pwr_ack_i(x_ack),
    .xaif_dma_trig_rx_i(trig_rx), .xaif_dma_trig_tx_i(trig_tx)
  );

  obi_mem_model #(.GNT_PCT(60), .MAX_LAT(3)) u_dbg (.clk_i(clk), .rst_ni(rst_n),
    .req_i(dbg_slv_req), .rsp_o(dbg_slv_rsp), .accepted_o(acc_dbg));
  obi_mem_model #(.GNT_PCT(60), .MAX_LAT(3)) u_aoext (.clk_i(clk), .rst_ni(rst_n),
    .req_i(ao_ext_req), .rsp_o(ao_ext_rsp), .accepted_o(acc_ao));
  obi_mem_model #(.GNT_PCT(60), .MAX_LAT(3)) u_per (.clk_i(clk), .rst_ni(rst_n),
    .req_i(periph_req), .rsp_o(periph_rsp), .accepted_o(acc_per));
  for (genvar i = 0; i < NEXT; i++) begin : g_xs
    obi_mem_model #(.GNT_PCT(60), .MAX_LAT(2)) u_xs (.clk_i(clk), .rst_ni(rst_n),
      .req_i(xs_req[i]), .rsp_o(xs_rsp[i]), .accepted_o(acc_x[i]));
  end

  always @(posedge clk) begin
    cpu_ack    <= cpu_pwr.pwr_on;
    periph_ack <= periph_pwr.pwr_on;
    for (int i = 0; i < NEXT; i++) x_ack[i] <= x_pwr[i].pwr_on;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------------------------------------------------------------------
  // Mechanism counters
  // ---------------------------------------------------------------------------
  int n_parallel = 0, n_contention = 0, n_bank_stall = 0, n_iso_block = 0;
  int n_err = 0, n_dma1d = 0, n_dma2d = 0, n_trig_wait = 0, n_dma_irq = 0;
  int n_ret = 0, n_periph_off = 0, n_acc_off = 0, n_cpu_off = 0, n_cpu_wake = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      int g;
      g = 0;
      for (int s = 0; s < NBANKS + 3 + NEXT; s++) g += int'(dut.s_req[s].req && dut.s_rsp[s].gnt);
      if (g > 1) n_parallel++;
      for (int m = 0; m < 5 + NEXT; m++) begin
        for (int k = 0; k < 5 + NEXT; k++) begin
          if (m != k && dut.m_req[m].req && !dut.m_rsp[m].gnt && dut.m_rsp[k].gnt &&
              dut.u_bus.tgt[m] == dut.u_bus.tgt[k]) n_contention++;
        end
      end
      if (dut.s_req[1].req && !dut.s_rsp[1].gnt && dut.pwr[3].retention) n_bank_stall++;
      if (dut.s_req[NBANKS + 2].req && periph_pwr.iso) n_iso_block++;
      if (dut.u_bus.t_req[NBANKS + 3 + NEXT].req) n_err++;
      if (dut.u_ao.u_dma.st_q[1] == 3'd3 && dut.u_ao.u_dma.cfg_q[1].tx_trig && !trig_tx[1]) n_trig_wait++;
    end
  end

  // ---------------------------------------------------------------------------
  // Bus access by one of the master ports
  // ---------------------------------------------------------------------------
  task automatic access(input int p, input bit we, input logic [31:0] addr, input logic [31:0] wdata,
                        output logic [31:0] rdata);
    bit g;
    @(negedge clk);
    mreq[p] = '{req: 1'b1, we: we, be: 4'hF, addr: addr, wdata: wdata};
    do begin
      #1 g = mrsp[p].gnt;
      @(negedge clk);
    end while (!g);
    mreq[p] = OBI_REQ_IDLE;
    while (!mrsp[p].rvalid) @(negedge clk);
    rdata = mrsp[p].rdata;
  endtask

  task automatic wr(input int p, input logic [31:0] a, input logic [31:0] d);
    logic [31:0] r;
    access(p, 1'b1, a, d, r);
  endtask

  task automatic rd_check(input int p, input logic [31:0] a, input logic [31:0] e, input string what);
    logic [31:0] r;
    access(p, 1'b0, a, 32'h0, r);
    check(r == e, $sformatf("%s: read %h at %h, expected %h", what, r, a, e));
  endtask

  function automatic logic [31:0] pat(input logic [31:0] a);
    return (a * 32'h0101_0101) ^ 32'h5A5A_0000;
  endfunction

  task automatic pm_set(input int d, input logic [31:0] v);
    wr(1, AO + PM_OFFSET + 32'(4 * d), v);
  endtask

  task automatic pm_wait(input int d, input pd_state_e s);
    logic [31:0] r;
    int n;
    n = 0;
    do begin
      access(2, 1'b0, AO + PM_OFFSET + 32'h100 + 32'(4 * d), 32'h0, r);
      n++;
    end while (pd_state_e'(r[2:0]) != s && n < 100);
    check(pd_state_e'(r[2:0]) == s, $sformatf("domain %0d reaches %s", d, s.name()));
  endtask

  task automatic dma_cfg(input int ch, input logic [31:0] src, dst, n1, n2, s1, s2, d1, d2, ctrl);
    logic [31:0] b;
    b = AO + DMA_OFFSET + 32'(ch * DMA_CH_STRIDE);
    wr(1, b + 32'(DMA_REG_SRC), src);
    wr(1, b + 32'(DMA_REG_DST), dst);
    wr(1, b + 32'(DMA_REG_SIZE_D1), n1);
    wr(1, b + 32'(DMA_REG_SIZE_D2), n2);
    wr(1, b + 32'(DMA_REG_SSTR_D1), s1);
    wr(1, b + 32'(DMA_REG_SSTR_D2), s2);
    wr(1, b + 32'(DMA_REG_DSTR_D1), d1);
    wr(1, b + 32'(DMA_REG_DSTR_D2), d2);
    wr(1, b + 32'(DMA_REG_CTRL), ctrl | 32'h1);
  endtask

  task automatic dma_wait(input int ch);
    logic [31:0] r;
    int n;
    n = 0;
    do begin
      access(1, 1'b0, AO + DMA_OFFSET + 32'(ch * DMA_CH_STRIDE) + 32'(DMA_REG_STATUS), 32'h0, r);
      n++;
    end while (r[0] && n < 2000);
    check(r == 32'h2, $sformatf("DMA channel %0d done", ch));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r, r2;
    int lat;
    for (int p = 0; p < 5; p++) mreq[p] = OBI_REQ_IDLE;
    core_sleep = 1'b0;
    trig_rx = '0;
    trig_tx = '0;
    x_irq = '0;
    fast_irq = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // ---- loads and stores to both banks -----------------------------------
    for (int i = 0; i < 32; i++) begin
      wr(1, 32'h0000_0100 + 4 * i, pat(32'h0000_0100 + 4 * i));
      wr(1, BANK1 + 32'h100 + 4 * i, pat(BANK1 + 32'h100 + 4 * i));
    end
    wr(1, BANK1 - 4, 32'hB0B0_0001);      // last word of bank 0
    wr(1, BANK1, 32'hB1B1_0000);          // first word of bank 1
    wr(1, 2 * BANK1 - 4, 32'hB1B1_FFFF);  // last word of bank 1
    for (int i = 0; i < 32; i++) begin
      rd_check(0, 32'h0000_0100 + 4 * i, pat(32'h0000_0100 + 4 * i), "instruction fetch bank 0");
      rd_check(1, BANK1 + 32'h100 + 4 * i, pat(BANK1 + 32'h100 + 4 * i), "load bank 1");
    end
    rd_check(1, BANK1 - 4, 32'hB0B0_0001, "bank 0 last word");
    rd_check(1, BANK1, 32'hB1B1_0000, "bank 1 first word");
    rd_check(1, 2 * BANK1 - 4, 32'hB1B1_FFFF, "bank 1 last word");
    check(dut.g_bank[1].u_bank.mem[0] == 32'hB1B1_0000, "contiguous scheme: 0x8000 is word 0 of bank 1");

    // single load latency: grant in the request cycle, data one cycle later
    @(negedge clk);
    mreq[1] = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: 32'h100, wdata: '0};
    #1 check(data_rsp.gnt, "load granted in its request cycle");
    @(negedge clk);
    mreq[1] = OBI_REQ_IDLE;
    check(data_rsp.rvalid && data_rsp.rdata == pat(32'h100), "load data one cycle after the grant");

    // ---- crossbar parallelism and contention -------------------------------
    for (int i = 0; i < 8; i++) begin
      fork
        rd_check(0, 32'h100 + 4 * i, pat(32'h100 + 4 * i), "parallel fetch");
        rd_check(1, BANK1 + 32'h100 + 4 * i, pat(BANK1 + 32'h100 + 4 * i), "parallel load");
      join
    end
    for (int i = 0; i < 4; i++) begin
      fork
        rd_check(0, 32'h100 + 4 * i, pat(32'h100 + 4 * i), "contending fetch");
        rd_check(1, 32'h140 + 4 * i, pat(32'h140 + 4 * i), "contending load");
        rd_check(3, 32'h17C - 4 * i, pat(32'h17C - 4 * i), "contending accelerator load");
      join
    end

    // ---- other slaves and masters ------------------------------------------
    access(1, 1'b0, 32'h5000_0000, 32'h0, r);
    check(r == 32'h0, "unmapped address answered with 0");
    wr(2, 32'h0000_0200, 32'hDB6_0001);
    rd_check(1, 32'h0000_0200, 32'hDB6_0001, "debug master store seen by CPU");
    wr(1, DEBUG_START + 32'h40, 32'h1234_0001);
    rd_check(1, DEBUG_START + 32'h40, 32'h1234_0001, "debug slave");
    check(u_dbg.mem.exists(DEBUG_START + 32'h40), "debug slave port reached");
    wr(1, AO + 32'h10, 32'h1234_0002);
    rd_check(1, AO + 32'h10, 32'h1234_0002, "SoC controller port");
    wr(1, PERIPH_START + 32'h20, 32'h1234_0003);
    rd_check(1, PERIPH_START + 32'h20, 32'h1234_0003, "peripheral domain");
    for (int i = 0; i < NEXT; i++) begin
      wr(1, EXT_SLAVE_START + 32'(i) * EXT_SLAVE_SIZE + 32'h8, 32'hACC0_0000 + i);
      rd_check(1, EXT_SLAVE_START + 32'(i) * EXT_SLAVE_SIZE + 32'h8, 32'hACC0_0000 + i, "accelerator slave");
      check(acc_x[i] == 2, $sformatf("accelerator %0d slave reached twice", i));
    end
    wr(3, BANK1 + 32'h300, 32'hACC0_1000);
    rd_check(4, BANK1 + 32'h300, 32'hACC0_1000, "accelerator masters share memory");

    // ---- DMA: 1D copy with interrupt, 2D transposed gather ------------------
    wr(1, AO + FIC_OFFSET + 32'(FIC_REG_ENABLE), 32'hFFFF);
    dma_cfg(0, 32'h100, BANK1 + 32'h400, 32, 0, 4, 0, 4, 0, 32'h10);
    lat = 0;
    while (!irq_fast[0] && lat < 2000) begin
      @(negedge clk);
      lat++;
    end
    check(irq_fast[0], "DMA done interrupt on fast line 0");
    if (irq_fast[0]) n_dma_irq++;
    dma_wait(0);
    n_dma1d++;
    for (int i = 0; i < 32; i++) rd_check(1, BANK1 + 32'h400 + 4 * i, pat(32'h100 + 4 * i), "DMA 1D copy");
    wr(1, AO + FIC_OFFSET + 32'(FIC_REG_PENDING), 32'hFFFF);
    wr(1, AO + DMA_OFFSET + 32'(DMA_REG_STATUS), 32'h0);

    // 4 x 8 matrix in bank 1 (row stride 32 B), 3 x 4 block transposed into bank 0
    dma_cfg(1, BANK1 + 32'h100 + 8, 32'h0000_0800, 4, 3, 4, 32, 12, 4, 32'h2);
    dma_wait(1);
    n_dma2d++;
    for (int i2 = 0; i2 < 3; i2++)
      for (int i1 = 0; i1 < 4; i1++)
        rd_check(1, 32'h800 + 12 * i1 + 4 * i2, pat(BANK1 + 32'h108 + 4 * i1 + 32 * i2), "DMA 2D gather");

    // trigger-paced stream into accelerator 0's FIFO window (destination stride 0)
    dma_cfg(1, 32'h100, EXT_SLAVE_START + 32'h10, 8, 0, 4, 0, 0, 0, 32'h8);
    for (int i = 0; i < 400 && dut.u_ao.u_dma.st_q[1] != 3'd0; i++) begin
      @(negedge clk);
      trig_tx[1] = ($urandom_range(4) == 0);
    end
    trig_tx[1] = 1'b0;
    dma_wait(1);
    check(acc_x[0] == 2 + 8, "accelerator FIFO window received 8 writes");
    check(u_xs_mem0(EXT_SLAVE_START + 32'h10) == pat(32'h100 + 28), "last streamed word in the window");

    // ---- memory bank retention ---------------------------------------------
    pm_set(3, 32'h3);
    pm_wait(3, PD_RET);
    n_ret++;
    fork
      rd_check(1, BANK1 + 32'h104, pat(BANK1 + 32'h104), "load from a bank woken from retention");
      begin
        repeat (30) @(negedge clk);
        check(dut.pwr[3].retention && mreq[1].req, "load waits while the bank is retentive");
        wr(2, AO + PM_OFFSET + 32'hC, 32'h0);
      end
    join

    // ---- peripheral domain off ---------------------------------------------
    pm_set(1, 32'h1);
    pm_wait(1, PD_OFF);
    n_periph_off++;
    check(!periph_pwr.pwr_on && periph_pwr.iso, "peripheral domain off and isolated");
    fork
      rd_check(1, PERIPH_START + 32'h20, 32'h1234_0003, "peripheral access after power-up");
      begin
        repeat (20) @(negedge clk);
        check(periph_req == OBI_REQ_IDLE, "no request crosses the isolation");
        wr(2, AO + PM_OFFSET + 32'h4, 32'h0);
      end
    join

    // ---- accelerator domain off: its interrupt is isolated -----------------
    pm_set(4, 32'h1);
    pm_wait(4, PD_OFF);
    n_acc_off++;
    check(!x_pwr[0].pwr_on, "accelerator 0 switched off");
    x_irq[0] = 1'b1;
    repeat (3) @(negedge clk);
    check(!irq_fast[2], "interrupt of a switched-off accelerator is masked");
    x_irq[0] = 1'b0;
    pm_set(4, 32'h0);
    pm_wait(4, PD_ON);

    // ---- CPU sleeps, switched off, woken by an accelerator interrupt -------
    pm_set(0, 32'h1);
    core_sleep = 1'b1;
    pm_wait(0, PD_OFF);
    n_cpu_off++;
    check(!cpu_pwr.pwr_on && cpu_pwr.iso, "CPU switched off while asleep");
    core_sleep = 1'b0;
    x_irq[1] = 1'b1;
    lat = 0;
    while (!(cpu_pwr.clk_en && cpu_pwr.rst_n) && lat < 100) begin
      @(negedge clk);
      lat++;
    end
    check(cpu_pwr.clk_en && cpu_pwr.pwr_on, "CPU woken by the accelerator interrupt");
    check(irq_fast[3], "accelerator 1 interrupt on fast line 3");
    if (cpu_pwr.clk_en) n_cpu_wake++;
    x_irq[1] = 1'b0;
    rd_check(1, 32'h100, pat(32'h100), "CPU reaches memory after wake-up");

    // ---- every mechanism happened ------------------------------------------
    $display("parallel=%0d contention=%0d bank_stall=%0d iso_block=%0d err=%0d dma1d=%0d dma2d=%0d",
             n_parallel, n_contention, n_bank_stall, n_iso_block, n_err, n_dma1d, n_dma2d);
    $display("trig_wait=%0d dma_irq=%0d ret=%0d periph_off=%0d acc_off=%0d cpu_off=%0d cpu_wake=%0d",
             n_trig_wait, n_dma_irq, n_ret, n_periph_off, n_acc_off, n_cpu_off, n_cpu_wake);
    check(n_parallel > 0, "crossbar parallel grants happened");
    check(n_contention > 0, "bank contention happened");
    check(n_bank_stall > 0, "stall on a retentive bank happened");
    check(n_iso_block > 0, "isolation blocked a request");
    check(n_err > 0, "error slave answered");
    check(n_dma1d > 0 && n_dma2d > 0, "1D and 2D DMA transfers happened");
    check(n_trig_wait > 0, "DMA waited for an accelerator trigger");
    check(n_dma_irq > 0, "DMA interrupt happened");
    check(n_ret > 0 && n_periph_off > 0 && n_acc_off > 0, "domains entered retention and off");
    check(n_cpu_off > 0 && n_cpu_wake > 0, "CPU power-off and wake-up happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] u_xs_mem0(input logic [31:0] a);
    return g_xs[0].u_xs.mem.exists(a) ? g_xs[0].u_xs.mem[a] : 32'hFFFF_FFFF;
  endfunction
endmodule
