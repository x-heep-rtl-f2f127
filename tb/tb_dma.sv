// tb_dma: self-checking test of the multi-channel 1D/2D DMA engine.
//
// The DMA's read and write masters reach one random-latency memory model
// through a two-master interconnect. The test fills the memory with
// known words, programs the channels through the register port and compares
// the destination with copies computed here from the addressing formula:
//   1D copy, 2D gather with transposition, both channels at once, a
//   trigger-paced transfer (no read may start while the trigger is low),
//   an empty transfer, and the done interrupt and status bits.
module tb_dma;
  import xheep_pkg::*;

  localparam int unsigned NCH = 2;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int   checks = 0, failures = 0;
  always #5 clk = ~clk;

  obi_req_t       reg_req;
  obi_rsp_t       reg_rsp;
  obi_req_t [1:0] m_req;
  obi_rsp_t [1:0] m_rsp;
  obi_req_t [0:0] s_req;
  obi_rsp_t [0:0] s_rsp;
  logic [NCH-1:0] trig_rx, trig_tx, irq;
  int             acc;

  dma dut (
    .clk_i(clk), .rst_ni(rst_n), .reg_req_i(reg_req), .reg_rsp_o(reg_rsp),
    .rd_req_o(m_req[0]), .rd_rsp_i(m_rsp[0]), .wr_req_o(m_req[1]), .wr_rsp_i(m_rsp[1]),
    .trig_rx_i(trig_rx), .trig_tx_i(trig_tx), .done_irq_o(irq)
  );

  localparam addr_rule_t [0:0] RULES = {addr_rule_t'{start: 32'h0, stop: 32'h1_0000, mask: '0, match: '0}};

  obi_xbar #(.NM(2), .NS(1), .RULES(RULES)) u_bus (
    .clk_i(clk), .rst_ni(rst_n), .mst_req_i(m_req), .mst_rsp_o(m_rsp), .slv_req_o(s_req), .slv_rsp_i(s_rsp)
  );

  obi_mem_model #(.GNT_PCT(70), .MAX_LAT(3)) u_mem (
    .clk_i(clk), .rst_ni(rst_n), .req_i(s_req[0]), .rsp_o(s_rsp[0]), .accepted_o(acc)
  );

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic reg_wr(input int ch, input logic [5:0] off, input logic [31:0] d);
    @(negedge clk);
    reg_req = '{req: 1'b1, we: 1'b1, be: 4'hF, addr: 32'(ch * DMA_CH_STRIDE) + 32'(off), wdata: d};
    @(negedge clk);
    reg_req = OBI_REQ_IDLE;
  endtask

  task automatic reg_rd(input int ch, input logic [5:0] off, output logic [31:0] d);
    @(negedge clk);
    reg_req = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: 32'(ch * DMA_CH_STRIDE) + 32'(off), wdata: '0};
    @(negedge clk);
    reg_req = OBI_REQ_IDLE;
    d = reg_rsp.rdata;
    check(reg_rsp.rvalid, "register response one cycle after request");
  endtask

  task automatic setup_ch(input int ch, input logic [31:0] src, dst, n1, n2, s1, s2, d1, d2,
                         input logic [31:0] ctrl);
    reg_wr(ch, DMA_REG_SRC, src);
    reg_wr(ch, DMA_REG_DST, dst);
    reg_wr(ch, DMA_REG_SIZE_D1, n1);
    reg_wr(ch, DMA_REG_SIZE_D2, n2);
    reg_wr(ch, DMA_REG_SSTR_D1, s1);
    reg_wr(ch, DMA_REG_SSTR_D2, s2);
    reg_wr(ch, DMA_REG_DSTR_D1, d1);
    reg_wr(ch, DMA_REG_DSTR_D2, d2);
    reg_wr(ch, DMA_REG_CTRL, ctrl | 32'(1 << DMA_CTRL_START));
  endtask

  task automatic wait_done(input int ch);
    logic [31:0] st;
    int n;
    n = 0;
    do begin
      reg_rd(ch, DMA_REG_STATUS, st);
      n++;
    end while (st[0] && n < 5000);
    check(st == 32'h2, $sformatf("channel %0d: done and not busy (status %h)", ch, st));
  endtask

  function automatic logic [31:0] pattern(input logic [31:0] a);
    return a * 32'h9E37_79B9 ^ 32'h1234_5678;
  endfunction

  task automatic fill(input logic [31:0] base, input int words);
    for (int i = 0; i < words; i++) u_mem.mem[base + 4 * i] = pattern(base + 4 * i);
  endtask

  function automatic logic [31:0] peek(input logic [31:0] a);
    return u_mem.mem.exists(a) ? u_mem.mem[a] : 32'hFFFF_FFFF;
  endfunction

  // Reference: element (i1, i2) of a transfer.
  task automatic expect_copy(input logic [31:0] src, dst, n1, n2, s1, s2, d1, d2, input string name);
    int bad;
    bad = 0;
    for (int i2 = 0; i2 < int'(n2); i2++) begin
      for (int i1 = 0; i1 < int'(n1); i1++) begin
        logic [31:0] sa, da;
        sa = src + i1 * s1 + i2 * s2;
        da = dst + i1 * d1 + i2 * d2;
        if (peek(da) !== pattern(sa)) bad++;
      end
    end
    check(bad == 0, $sformatf("%s: %0d wrong elements", name, bad));
  endtask

  int rd_while_low = 0;
  bit watch_rx = 0;
  always @(posedge clk) begin
    if (watch_rx && m_req[0].req && !trig_rx[0]) rd_while_low++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    reg_req = OBI_REQ_IDLE;
    trig_rx = '0;
    trig_tx = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    fill(32'h1000, 256);

    // register read-back
    reg_wr(1, DMA_REG_SSTR_D2, 32'hCAFE_0004);
    reg_rd(1, DMA_REG_SSTR_D2, d);
    check(d == 32'hCAFE_0004, "register read-back");

    // 1D copy with done interrupt
    setup_ch(0, 32'h1000, 32'h4000, 16, 0, 4, 0, 4, 0, 32'(1 << DMA_CTRL_IRQ_EN));
    wait_done(0);
    expect_copy(32'h1000, 32'h4000, 16, 1, 4, 0, 4, 0, "1D copy");
    check(irq[0] && !irq[1], "done interrupt of channel 0 only");
    reg_wr(0, DMA_REG_STATUS, 32'h0);
    @(negedge clk);
    check(!irq[0], "interrupt cleared by a status write");

    // 2D gather of a 3 x 4 block out of a 6-word-wide matrix, written transposed
    setup_ch(1, 32'h1000 + 8, 32'h5000, 4, 3, 4, 24, 12, 4, 32'(1 << DMA_CTRL_2D));
    wait_done(1);
    expect_copy(32'h1000 + 8, 32'h5000, 4, 3, 4, 24, 12, 4, "2D transposed gather");
    check(!irq[1], "no interrupt when not enabled");

    // both channels at once
    setup_ch(0, 32'h1100, 32'h6000, 5, 4, 8, 40, 4, 20, 32'(1 << DMA_CTRL_2D));
    setup_ch(1, 32'h1200, 32'h7000, 32, 0, 4, 0, 4, 0, 32'h0);
    reg_rd(0, DMA_REG_STATUS, d);
    check(d[0], "channel 0 still busy while channel 1 starts");
    wait_done(0);
    wait_done(1);
    expect_copy(32'h1100, 32'h6000, 5, 4, 8, 40, 4, 20, "concurrent 2D");
    expect_copy(32'h1200, 32'h7000, 32, 1, 4, 0, 4, 0, "concurrent 1D");

    // trigger-paced read from a fixed address (stride 0) into a buffer
    watch_rx = 1;
    setup_ch(0, 32'h1300, 32'h8000, 8, 0, 0, 0, 4, 0, 32'(1 << DMA_CTRL_RX_TRIG));
    repeat (40) @(negedge clk);
    reg_rd(0, DMA_REG_STATUS, d);
    check(d[0], "transfer waits for the trigger");
    check(peek(32'h8000) === 32'hFFFF_FFFF, "nothing written before the trigger");
    for (int i = 0; i < 200 && d[0]; i++) begin
      @(negedge clk);
      trig_rx[0] = ($urandom_range(3) == 0);
      if (i % 10 == 0) reg_rd(0, DMA_REG_STATUS, d);
    end
    trig_rx[0] = 1'b1;
    wait_done(0);
    watch_rx = 0;
    trig_rx[0] = 1'b0;
    expect_copy(32'h1300, 32'h8000, 8, 1, 0, 0, 4, 0, "trigger-paced stride-0 read");
    check(rd_while_low == 0, $sformatf("%0d reads issued while the trigger was low", rd_while_low));

    // empty transfer
    setup_ch(1, 32'h1000, 32'h9000, 0, 0, 4, 0, 4, 0, 32'h0);
    reg_rd(1, DMA_REG_STATUS, d);
    check(d == 32'h2, "empty transfer completes at once");
    check(peek(32'h9000) === 32'hFFFF_FFFF, "empty transfer writes nothing");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
