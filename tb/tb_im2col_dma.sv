// tb_im2col_dma: im2col data-layout transformation with the platform's DMA.
//
// Runs the platform at its default configuration. The CPU data port (played
// here) stores an 8 x 8 single-channel image of 32-bit pixels in bank 0, then
// builds the im2col matrix for a 3 x 3 kernel with stride 1 in bank 1: one
// row per output position (6 x 6 = 36 rows), one column per kernel tap (9).
// Each kernel tap (kh, kw) is one 2D DMA transfer that walks the 6 x 6
// output positions:
//   source      IMG + (kh * 8 + kw) * 4,  stride D1 4 B,  stride D2 32 B
//   destination OUT + (kh * 3 + kw) * 4,  stride D1 36 B, stride D2 216 B
// The nine transfers are spread over the two DMA channels, which run
// concurrently; completion is signalled by the channels' fast interrupts.
// The result is compared with im2col computed here in software.
module tb_im2col_dma;
  import xheep_pkg::*;

  localparam int H = 8, W = 8, K = 3, OH = H - K + 1, OW = W - K + 1;
  localparam logic [31:0] IMG = 32'h0000_1000;
  localparam logic [31:0] OUT = 32'h0000_8000;
  localparam logic [31:0] AO  = AO_PERIPH_START;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int   checks = 0, failures = 0;
  always #5 clk = ~clk;

  obi_req_t  cpu_req;
  obi_rsp_t  cpu_rsp, idle_rsp;
  logic [15:0] irq;
  pwr_ctrl_t cpu_pwr, periph_pwr;
  pwr_ctrl_t [1:0] x_pwr;
  obi_req_t  [1:0] xs_req;
  obi_rsp_t  [1:0] xm_rsp;
  obi_req_t  dbg_slv_req, ao_ext_req, periph_req;

  assign idle_rsp = OBI_RSP_IDLE;

  xheep_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .cpu_instr_req_i(OBI_REQ_IDLE), .cpu_instr_rsp_o(),
    .cpu_data_req_i(cpu_req), .cpu_data_rsp_o(cpu_rsp),
    .cpu_irq_fast_o(irq), .cpu_core_sleep_i(1'b0),
    .cpu_pwr_o(cpu_pwr), .cpu_pwr_ack_i(1'b1),
    .dbg_mst_req_i(OBI_REQ_IDLE), .dbg_mst_rsp_o(),
    .dbg_slv_req_o(dbg_slv_req), .dbg_slv_rsp_i(idle_rsp),
    .ao_ext_req_o(ao_ext_req), .ao_ext_rsp_i(idle_rsp),
    .periph_req_o(periph_req), .periph_rsp_i(idle_rsp),
    .periph_pwr_o(periph_pwr), .periph_pwr_ack_i(1'b1), .fast_irq_i('0),
    .xaif_mst_req_i('{default: OBI_REQ_IDLE}), .xaif_mst_rsp_o(xm_rsp),
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

  task automatic access(input bit we, input logic [31:0] addr, input logic [31:0] wdata,
                        output logic [31:0] rdata);
    bit g;
    @(negedge clk);
    cpu_req = '{req: 1'b1, we: we, be: 4'hF, addr: addr, wdata: wdata};
    do begin
      #1 g = cpu_rsp.gnt;
      @(negedge clk);
    end while (!g);
    cpu_req = OBI_REQ_IDLE;
    while (!cpu_rsp.rvalid) @(negedge clk);
    rdata = cpu_rsp.rdata;
  endtask

  task automatic wr(input logic [31:0] a, input logic [31:0] d);
    logic [31:0] r;
    access(1'b1, a, d, r);
  endtask

  function automatic logic [31:0] pixel(input int y, input int x);
    return 32'((y + 1) * 1000 + (x + 1) * 7);
  endfunction

  task automatic start_tap(input int ch, input int kh, input int kw);
    logic [31:0] b;
    b = AO + DMA_OFFSET + 32'(ch * DMA_CH_STRIDE);
    wr(b + 32'(DMA_REG_STATUS), 32'h0);
    wr(b + 32'(DMA_REG_SRC), IMG + 32'((kh * W + kw) * 4));
    wr(b + 32'(DMA_REG_DST), OUT + 32'((kh * K + kw) * 4));
    wr(b + 32'(DMA_REG_SIZE_D1), 32'(OW));
    wr(b + 32'(DMA_REG_SIZE_D2), 32'(OH));
    wr(b + 32'(DMA_REG_SSTR_D1), 32'd4);
    wr(b + 32'(DMA_REG_SSTR_D2), 32'(W * 4));
    wr(b + 32'(DMA_REG_DSTR_D1), 32'(K * K * 4));
    wr(b + 32'(DMA_REG_DSTR_D2), 32'(OW * K * K * 4));
    wr(b + 32'(DMA_REG_CTRL), 32'h13);   // start, 2D, interrupt
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    int tap, bad, t0;
    cpu_req = OBI_REQ_IDLE;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) wr(IMG + 32'((y * W + x) * 4), pixel(y, x));
    wr(AO + FIC_OFFSET + 32'(FIC_REG_ENABLE), 32'h3);

    // taps 0..8, two at a time on the two channels
    t0 = $time;
    tap = 0;
    while (tap < K * K) begin
      int n;
      n = (tap + 1 < K * K) ? 2 : 1;
      for (int c = 0; c < n; c++) start_tap(c, (tap + c) / K, (tap + c) % K);
      for (int c = 0; c < n; c++) begin
        int guard;
        guard = 0;
        while (!irq[c] && guard < 5000) begin
          @(negedge clk);
          guard++;
        end
        check(irq[c], $sformatf("channel %0d done interrupt for tap %0d", c, tap + c));
      end
      wr(AO + FIC_OFFSET + 32'(FIC_REG_PENDING), 32'h3);
      tap += n;
    end
    $display("im2col of %0d elements took %0d cycles including programming",
             OH * OW * K * K, ($time - t0) / 10);

    bad = 0;
    for (int oy = 0; oy < OH; oy++)
      for (int ox = 0; ox < OW; ox++)
        for (int kh = 0; kh < K; kh++)
          for (int kw = 0; kw < K; kw++) begin
            access(1'b0, OUT + 32'((((oy * OW + ox) * K * K) + kh * K + kw) * 4), 32'h0, r);
            checks++;
            if (r != pixel(oy + kh, ox + kw)) begin
              bad++;
              failures++;
              if (bad < 5) $display("FAIL: im2col row %0d col %0d: %0d expected %0d",
                                    oy * OW + ox, kh * K + kw, r, pixel(oy + kh, ox + kw));
            end
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
