// tb_ao_periph: self-checking test of the always-on peripheral subsystem.
//
// Checks the address demultiplexing (external port with random latency,
// power manager, fast interrupt controller, DMA, unmapped offsets), that a
// burst of pipelined requests switching targets keeps responses in order,
// and the interplay of the blocks: a DMA transfer ends with its done
// interrupt on fast interrupt line 0, which wakes the CPU domain that the
// power manager switched off when the CPU went to sleep. A final random
// phase sends pipelined bursts that hop between targets and checks every
// read against a shadow copy of the registers and the external memory.
module tb_ao_periph;
  import xheep_pkg::*;

  localparam int unsigned NBANKS = 2, NEXT = 2, NCH = 2, NFAST = 16;
  localparam int unsigned ND = 2 + NBANKS + NEXT;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int   checks = 0, failures = 0;
  always #5 clk = ~clk;

  obi_req_t           req, ext_req;
  obi_rsp_t           rsp, ext_rsp;
  obi_req_t [1:0]     m_req;
  obi_rsp_t [1:0]     m_rsp;
  obi_req_t [0:0]     s_req;
  obi_rsp_t [0:0]     s_rsp;
  logic [NFAST-NCH-1:0] fast_src;
  logic [NFAST-1:0]   irq;
  logic               core_sleep;
  logic [ND-1:0]      ack, on;
  pwr_ctrl_t [ND-1:0] pwr;
  int                 acc_ext, acc_mem;

  ao_periph dut (
    .clk_i(clk), .rst_ni(rst_n), .slv_req_i(req), .slv_rsp_o(rsp),
    .ext_req_o(ext_req), .ext_rsp_i(ext_rsp),
    .dma_rd_req_o(m_req[0]), .dma_rd_rsp_i(m_rsp[0]), .dma_wr_req_o(m_req[1]), .dma_wr_rsp_i(m_rsp[1]),
    .dma_trig_rx_i('0), .dma_trig_tx_i('0), .fast_src_i(fast_src), .irq_fast_o(irq),
    .core_sleep_i(core_sleep), .pwr_ack_i(ack), .pwr_o(pwr), .domain_on_o(on)
  );

  obi_mem_model #(.GNT_PCT(50), .MAX_LAT(4)) u_ext (
    .clk_i(clk), .rst_ni(rst_n), .req_i(ext_req), .rsp_o(ext_rsp), .accepted_o(acc_ext)
  );

  localparam addr_rule_t [0:0] RULES = {addr_rule_t'{start: 32'h0, stop: 32'h1_0000, mask: '0, match: '0}};
  obi_xbar #(.NM(2), .NS(1), .RULES(RULES)) u_bus (
    .clk_i(clk), .rst_ni(rst_n), .mst_req_i(m_req), .mst_rsp_o(m_rsp), .slv_req_o(s_req), .slv_rsp_i(s_rsp)
  );
  obi_mem_model #(.GNT_PCT(80), .MAX_LAT(2)) u_mem (
    .clk_i(clk), .rst_ni(rst_n), .req_i(s_req[0]), .rsp_o(s_rsp[0]), .accepted_o(acc_mem)
  );

  always @(posedge clk) for (int d = 0; d < ND; d++) ack[d] <= pwr[d].pwr_on;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // pipelined master: issues a list of requests back to back, collects responses in order
  obi_req_t    q_req [$];
  logic [31:0] q_rsp [$];
  task automatic run_list();
    int sent, got;
    sent = 0;
    got  = 0;
    q_rsp.delete();
    @(negedge clk);
    while (got < q_req.size()) begin
      req = (sent < q_req.size()) ? q_req[sent] : OBI_REQ_IDLE;
      @(posedge clk);
      if (rsp.rvalid) begin
        q_rsp.push_back(rsp.rdata);
        got++;
      end
      if (req.req && rsp.gnt) sent++;
      @(negedge clk);
    end
    req = OBI_REQ_IDLE;
    q_req.delete();
  endtask

  function automatic obi_req_t wr(input logic [31:0] off, input logic [31:0] d);
    return '{req: 1'b1, we: 1'b1, be: 4'hF, addr: AO_PERIPH_START + off, wdata: d};
  endfunction
  function automatic obi_req_t rd(input logic [31:0] off);
    return '{req: 1'b1, we: 1'b0, be: 4'hF, addr: AO_PERIPH_START + off, wdata: '0};
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = OBI_REQ_IDLE;
    fast_src = '0;
    core_sleep = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // mixed pipelined burst over all targets
    q_req.push_back(wr(32'h0000_0100, 32'h1111_2222));                 // external
    q_req.push_back(wr(32'h0001_0040, 32'h3333_4444));                 // external (boot ROM range)
    q_req.push_back(rd(32'h0000_0100));
    q_req.push_back(wr(PM_OFFSET + 32'h8, 32'h4));                     // bank 0 clock gate
    q_req.push_back(rd(PM_OFFSET + 32'h8));
    q_req.push_back(wr(FIC_OFFSET + 32'h4, 32'h0001));                 // enable line 0
    q_req.push_back(rd(32'h0001_0040));
    q_req.push_back(rd(FIC_OFFSET + 32'h4));
    q_req.push_back(wr(DMA_OFFSET + 32'h40 + 32'(DMA_REG_SRC), 32'hABCD_0000));
    q_req.push_back(rd(DMA_OFFSET + 32'h40 + 32'(DMA_REG_SRC)));
    q_req.push_back(rd(32'h0009_0000));                                // unmapped
    q_req.push_back(rd(PM_OFFSET + 32'h8));
    run_list();
    check(q_rsp.size() == 12, "one response per request");
    check(q_rsp[2] == 32'h1111_2222, "external read-back");
    check(q_rsp[4] == 32'h4, "power manager register");
    check(q_rsp[6] == 32'h3333_4444, "external second word");
    check(q_rsp[7] == 32'h1, "fast interrupt controller register");
    check(q_rsp[9] == 32'hABCD_0000, "DMA register of channel 1");
    check(q_rsp[10] == 32'h0, "unmapped offset reads 0");
    check(u_ext.mem.exists(32'h0001_0040) && u_ext.mem[32'h0001_0040] == 32'h3333_4444,
          "external port sees the offset inside the always-on region");
    check(!pwr[2].clk_en, "power manager acts on a bus write");

    // DMA done interrupt wakes the sleeping CPU
    for (int i = 0; i < 8; i++) u_mem.mem[32'h100 + 4 * i] = 32'hC0DE_0000 + i;
    q_req.push_back(wr(PM_OFFSET + 32'h0, 32'h1));                     // CPU off at next sleep
    run_list();
    core_sleep = 1'b1;
    repeat (10) @(negedge clk);
    check(!pwr[0].pwr_on && !on[0], "CPU domain off while the CPU sleeps");
    core_sleep = 1'b0;
    q_req.push_back(wr(DMA_OFFSET + 32'(DMA_REG_SRC), 32'h100));
    q_req.push_back(wr(DMA_OFFSET + 32'(DMA_REG_DST), 32'h400));
    q_req.push_back(wr(DMA_OFFSET + 32'(DMA_REG_SIZE_D1), 32'd8));
    q_req.push_back(wr(DMA_OFFSET + 32'(DMA_REG_SSTR_D1), 32'd4));
    q_req.push_back(wr(DMA_OFFSET + 32'(DMA_REG_DSTR_D1), 32'd4));
    q_req.push_back(wr(DMA_OFFSET + 32'(DMA_REG_CTRL), 32'h11));      // start, irq enable
    run_list();
    begin
      int n;
      n = 0;
      while (!irq[0] && n < 500) begin
        @(negedge clk);
        n++;
      end
    end
    check(irq[0], "DMA done raises fast interrupt 0");
    repeat (10) @(negedge clk);
    check(on[0] && pwr[0].clk_en, "interrupt woke the CPU domain");
    begin
      int bad;
      bad = 0;
      for (int i = 0; i < 8; i++) if (u_mem.mem[32'h400 + 4 * i] != 32'hC0DE_0000 + i) bad++;
      check(bad == 0, "DMA copy through the always-on masters");
    end

    // other fast sources map above the DMA lines
    q_req.push_back(wr(FIC_OFFSET + 32'h4, 32'hFFFF));
    q_req.push_back(wr(FIC_OFFSET + 32'h0, 32'hFFFF));
    run_list();
    fast_src[4] = 1'b1;
    repeat (2) @(negedge clk);
    check(irq == 16'h0040, $sformatf("fast source 4 on line 6 (irq %h)", irq));

    // random pipelined traffic over the external port, DMA channel 1 address
    // registers, the fast interrupt enable register and unmapped offsets,
    // checked against a shadow of every target
    begin
      logic [31:0] shadow_ext [logic [31:0]];
      logic [31:0] shadow_dma [2];
      logic [31:0] shadow_en, expect_q [$], off, d;
      bit          is_rd [$];
      int          bad;
      shadow_dma[0] = 32'hABCD_0000;
      shadow_dma[1] = '0;
      shadow_en     = 32'hFFFF;
      shadow_ext[32'h100] = 32'h1111_2222;
      for (int round = 0; round < 8; round++) begin
        for (int i = 0; i < 40; i++) begin
          bit we;
          int t;
          we = 1'($urandom_range(0, 1));
          t  = $urandom_range(0, 9);
          d  = $urandom;
          if (t < 5)      off = 32'($urandom_range(0, 12'hFFF)) << 2;
          else if (t < 7) off = DMA_OFFSET + 32'h40 + ((t == 5) ? 32'(DMA_REG_SRC) : 32'(DMA_REG_DST));
          else if (t < 9) off = FIC_OFFSET + 32'(FIC_REG_ENABLE);
          else            off = 32'h0008_0000 + 32'($urandom_range(0, 255) * 4);
          if (we) begin
            q_req.push_back(wr(off, d));
            if (t < 5)      shadow_ext[off] = d;
            else if (t < 7) shadow_dma[t - 5] = d;
            else if (t < 9) shadow_en = {16'b0, d[15:0]};
            expect_q.push_back('0);
            is_rd.push_back(1'b0);
          end else begin
            q_req.push_back(rd(off));
            is_rd.push_back(1'b1);
            // the external model returns 0 for words it never stored
            if (t < 5)      expect_q.push_back(shadow_ext.exists(off) ? shadow_ext[off] : '0);
            else if (t < 7) expect_q.push_back(shadow_dma[t - 5]);
            else if (t < 9) expect_q.push_back(shadow_en);
            else            expect_q.push_back('0);
          end
        end
        run_list();
        bad = 0;
        checks++;
        if (q_rsp.size() != expect_q.size()) begin
          failures++;
          $display("FAIL: round %0d: %0d responses for %0d requests", round, q_rsp.size(), expect_q.size());
        end else begin
          for (int i = 0; i < expect_q.size(); i++) begin
            if (is_rd[i]) begin
              checks++;
              if (q_rsp[i] != expect_q[i]) begin
                failures++;
                bad++;
                if (bad < 4) $display("FAIL: round %0d request %0d read %h expected %h",
                                      round, i, q_rsp[i], expect_q[i]);
              end
            end
          end
        end
        expect_q.delete();
        is_rd.delete();
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
