// tb_xheep_config: the platform in its other configuration.
//
// Builds the platform with the one-at-a-time bus and four word-interleaved
// memory banks of 4 KiB, and checks that: consecutive words rotate over the
// banks (word i of memory is word i/4 of bank i%4); CPU data, CPU fetch and
// an accelerator master running at once all get correct data while the bus
// never grants two slaves in one cycle; a DMA copy across the interleaved
// banks is correct; and one interleaved bank in retention stalls only the
// accesses that fall into it.
module tb_xheep_config;
  import xheep_pkg::*;

  localparam int unsigned NEXT = 2, NCH = 2, NFAST = 16, NBANKS = 4, WORDS = 1024;
  localparam logic [31:0] AO = AO_PERIPH_START;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int   checks = 0, failures = 0;
  always #5 clk = ~clk;

  obi_req_t  mreq [3];
  obi_rsp_t  mrsp [3];
  obi_rsp_t  [NEXT-1:0] xm_rsp;
  obi_req_t  [NEXT-1:0] xm_req;
  obi_rsp_t  idle_rsp;
  obi_req_t  [NEXT-1:0] xs_req;
  obi_req_t  dbg_slv_req, ao_ext_req, periph_req;
  logic      [NFAST-1:0] irq_fast;
  pwr_ctrl_t cpu_pwr, periph_pwr;
  pwr_ctrl_t [NEXT-1:0] x_pwr;

  assign idle_rsp  = OBI_RSP_IDLE;
  assign xm_req[0] = mreq[2];
  assign xm_req[1] = OBI_REQ_IDLE;
  assign mrsp[2]   = xm_rsp[0];

  xheep_top #(
    .TOPOLOGY(BUS_ONE_AT_A_TIME), .NBANKS(NBANKS), .BANK_WORDS(WORDS), .MEM_SCHEME(MEM_INTERLEAVED)
  ) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .cpu_instr_req_i(mreq[0]), .cpu_instr_rsp_o(mrsp[0]),
    .cpu_data_req_i(mreq[1]), .cpu_data_rsp_o(mrsp[1]),
    .cpu_irq_fast_o(irq_fast), .cpu_core_sleep_i(1'b0),
    .cpu_pwr_o(cpu_pwr), .cpu_pwr_ack_i(1'b1),
    .dbg_mst_req_i(OBI_REQ_IDLE), .dbg_mst_rsp_o(),
    .dbg_slv_req_o(dbg_slv_req), .dbg_slv_rsp_i(idle_rsp),
    .ao_ext_req_o(ao_ext_req), .ao_ext_rsp_i(idle_rsp),
    .periph_req_o(periph_req), .periph_rsp_i(idle_rsp),
    .periph_pwr_o(periph_pwr), .periph_pwr_ack_i(1'b1), .fast_irq_i('0),
    .xaif_mst_req_i(xm_req), .xaif_mst_rsp_o(xm_rsp),
    .xaif_slv_req_o(xs_req), .xaif_slv_rsp_i('{default: OBI_RSP_IDLE}),
    .xaif_irq_i('0), .xaif_pwr_o(x_pwr), .xaif_pwr_ack_i('1),
    .xaif_dma_trig_rx_i('0), .xaif_dma_trig_tx_i('0)
  );

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  int n_multi = 0, n_wait = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      int g, w;
      g = 0;
      w = 0;
      for (int s = 0; s < NBANKS + 3 + NEXT; s++) g += int'(dut.s_req[s].req && dut.s_rsp[s].gnt);
      for (int m = 0; m < 3; m++) w += int'(mreq[m].req && !mrsp[m].gnt);
      if (g > 1) n_multi++;
      if (w > 0 && g == 1) n_wait++;
    end
  end

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
    return (a * 32'h0101_0101) ^ 32'hA5A5_0000;
  endfunction

  function automatic logic [31:0] bank_word(input int b, input int i);
    case (b)
      0: return dut.g_bank[0].u_bank.mem[i];
      1: return dut.g_bank[1].u_bank.mem[i];
      2: return dut.g_bank[2].u_bank.mem[i];
      default: return dut.g_bank[3].u_bank.mem[i];
    endcase
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    int bad;
    for (int p = 0; p < 3; p++) mreq[p] = OBI_REQ_IDLE;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    for (int i = 0; i < 64; i++) wr(1, 32'h200 + 4 * i, pat(32'h200 + 4 * i));
    bad = 0;
    for (int i = 0; i < 64; i++) begin
      int w;
      w = (32'h200 >> 2) + i;
      if (bank_word(w % NBANKS, w / NBANKS) != pat(32'h200 + 4 * i)) bad++;
    end
    check(bad == 0, $sformatf("interleaving: %0d words in the wrong bank", bad));

    // three masters at once on the shared bus
    fork
      for (int i = 0; i < 64; i++) rd_check(0, 32'h200 + 4 * i, pat(32'h200 + 4 * i), "fetch");
      for (int i = 0; i < 64; i++) rd_check(1, 32'h2FC - 4 * i, pat(32'h2FC - 4 * i), "load");
      for (int i = 0; i < 64; i++) rd_check(2, 32'h200 + 4 * ((i * 7) % 64), pat(32'h200 + 4 * ((i * 7) % 64)), "accelerator load");
    join
    check(n_multi == 0, $sformatf("shared bus granted two slaves in one cycle %0d times", n_multi));
    check(n_wait > 0, "masters waited for the shared bus");

    // DMA copy across the interleaved banks, with odd strides
    wr(1, AO + DMA_OFFSET + 32'(DMA_REG_SRC), 32'h200);
    wr(1, AO + DMA_OFFSET + 32'(DMA_REG_DST), 32'h1000);
    wr(1, AO + DMA_OFFSET + 32'(DMA_REG_SIZE_D1), 32'd21);
    wr(1, AO + DMA_OFFSET + 32'(DMA_REG_SSTR_D1), 32'd12);
    wr(1, AO + DMA_OFFSET + 32'(DMA_REG_DSTR_D1), 32'd4);
    wr(1, AO + DMA_OFFSET + 32'(DMA_REG_CTRL), 32'h1);
    do access(1, 1'b0, AO + DMA_OFFSET + 32'(DMA_REG_STATUS), 32'h0, r); while (r[0]);
    for (int i = 0; i < 21; i++) rd_check(1, 32'h1000 + 4 * i, pat(32'h200 + 12 * i), "DMA across banks");

    // bank 2 in retention: words of banks 0, 1, 3 still accessible
    wr(1, AO + PM_OFFSET + 32'(4 * (2 + 2)), 32'h3);
    repeat (10) @(negedge clk);
    check(dut.pwr[4].retention, "bank 2 in retention");
    rd_check(1, 32'h200, pat(32'h200), "bank 0 word while bank 2 sleeps");
    rd_check(1, 32'h204, pat(32'h204), "bank 1 word while bank 2 sleeps");
    rd_check(1, 32'h20C, pat(32'h20C), "bank 3 word while bank 2 sleeps");
    fork
      rd_check(1, 32'h208, pat(32'h208), "bank 2 word after wake-up");
      begin
        repeat (20) @(negedge clk);
        check(mreq[1].req, "access to the retentive bank waits");
        wr(2, AO + PM_OFFSET + 32'(4 * (2 + 2)), 32'h0);
      end
    join

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
