// tb_sram_bank: self-checking test of one main-memory bank.
//
// Writes random words with random byte enables, reads them back and
// compares against a reference array kept in the testbench. Checks that a
// request is granted in its own cycle and answered exactly one cycle later,
// that a bank in retention, with its clock gated or isolated grants nothing
// and keeps its data, and that the switch acknowledge follows the switch.
module tb_sram_bank;
  import xheep_pkg::*;

  localparam int unsigned WORDS = 8192;

  logic      clk = 1'b0;
  logic      rst_n = 1'b0;
  obi_req_t  req;
  obi_rsp_t  rsp;
  pwr_ctrl_t pwr;
  logic      ack;
  int        checks = 0, failures = 0;
  logic [31:0] model [WORDS];
  bit          known [WORDS];

  sram_bank dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp), .pwr_i(pwr), .pwr_ack_o(ack)
  );

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // One access; checks same-cycle grant and one-cycle response latency.
  task automatic access(input bit we, input int unsigned idx, input logic [3:0] be,
                        input logic [31:0] wdata, output logic [31:0] rdata);
    @(negedge clk);
    req = '{req: 1'b1, we: we, be: be, addr: 32'(idx) << 2, wdata: wdata};
    #1 check(rsp.gnt, "grant in the request cycle");
    @(negedge clk);
    req = OBI_REQ_IDLE;
    check(rsp.rvalid, "response one cycle after grant");
    rdata = rsp.rdata;
    #1;
    @(negedge clk);
    check(!rsp.rvalid, "single-cycle rvalid");
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rd, wd;
    int unsigned idx;
    logic [3:0]  be;
    req = OBI_REQ_IDLE;
    pwr = '{clk_en: 1'b1, pwr_on: 1'b1, iso: 1'b0, rst_n: 1'b1, retention: 1'b0};
    for (int i = 0; i < WORDS; i++) known[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(ack, "switch acknowledge after power-on");

    // full-word writes then reads, including the first and last word
    for (int n = 0; n < 40; n++) begin
      idx = (n == 0) ? 0 : (n == 1) ? WORDS - 1 : $urandom_range(WORDS - 1);
      wd  = $urandom;
      access(1'b1, idx, 4'hF, wd, rd);
      model[idx] = wd;
      known[idx] = 1;
    end
    // byte-enable writes
    for (int n = 0; n < 40; n++) begin
      idx = $urandom_range(WORDS - 1);
      if (!known[idx]) begin
        access(1'b1, idx, 4'hF, 32'h0, rd);
        model[idx] = 0;
        known[idx] = 1;
      end
      be = 4'($urandom);
      wd = $urandom;
      access(1'b1, idx, be, wd, rd);
      for (int b = 0; b < 4; b++) if (be[b]) model[idx][8*b +: 8] = wd[8*b +: 8];
    end
    for (int i = 0; i < WORDS; i++) begin
      if (known[i]) begin
        access(1'b0, i, 4'hF, 32'h0, rd);
        check(rd == model[i], $sformatf("read word %0d: got %h expected %h", i, rd, model[i]));
      end
    end

    // retention, clock gating and isolation: no grant, data kept
    for (int mode = 0; mode < 3; mode++) begin
      @(negedge clk);
      if (mode == 0) pwr.retention = 1'b1;
      if (mode == 1) pwr.clk_en    = 1'b0;
      if (mode == 2) pwr.iso       = 1'b1;
      req = '{req: 1'b1, we: 1'b1, be: 4'hF, addr: 32'h0, wdata: 32'hDEAD_BEEF};
      repeat (5) begin
        #1 check(!rsp.gnt, $sformatf("no grant in low-power mode %0d", mode));
        @(negedge clk);
        check(!rsp.rvalid, "no response while not accessible");
      end
      req = OBI_REQ_IDLE;
      pwr = '{clk_en: 1'b1, pwr_on: 1'b1, iso: 1'b0, rst_n: 1'b1, retention: 1'b0};
      access(1'b0, 0, 4'hF, 32'h0, rd);
      check(rd == model[0], "data kept across low-power mode");
    end

    // switch acknowledge
    @(negedge clk);
    pwr.pwr_on = 1'b0;
    #1 check(ack, "acknowledge still high in the switch-off cycle");
    @(negedge clk);
    check(!ack, "acknowledge low one cycle after switch-off");
    pwr.pwr_on = 1'b1;
    @(negedge clk);
    check(ack, "acknowledge high one cycle after switch-on");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
