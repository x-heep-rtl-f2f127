// tb_fast_intr_ctrl: self-checking test of the fast interrupt controller.
//
// Drives random pulses and levels on the 16 sources and keeps a reference
// pending vector built from rising edges; each cycle it checks irq_o against
// reference & enable (one cycle after the edge) and wakeup_o against its
// OR. Software clears (write 1 to clear), enable changes and a clear that
// coincides with a new edge are exercised through the register port.
module tb_fast_intr_ctrl;
  import xheep_pkg::*;

  localparam int unsigned NSRC = 16;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int   checks = 0, failures = 0;
  always #5 clk = ~clk;

  obi_req_t        reg_req;
  obi_rsp_t        reg_rsp;
  logic [NSRC-1:0] src, src_prev, irq, ref_pend, ref_en, clr;
  logic            wakeup;

  fast_intr_ctrl dut (
    .clk_i(clk), .rst_ni(rst_n), .reg_req_i(reg_req), .reg_rsp_o(reg_rsp),
    .src_i(src), .irq_o(irq), .wakeup_o(wakeup)
  );

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // reference model, updated at each clock edge
  always @(posedge clk) begin
    if (rst_n) begin
      clr = (reg_req.req && reg_req.we && reg_req.addr[3:0] == 4'h0) ? reg_req.wdata[NSRC-1:0] : '0;
      ref_pend = (ref_pend & ~clr) | (src & ~src_prev);
      if (reg_req.req && reg_req.we && reg_req.addr[3:0] == 4'h4) ref_en = reg_req.wdata[NSRC-1:0];
      src_prev = src;
    end
  end

  // compare in the middle of each cycle
  always @(negedge clk) begin
    if (rst_n) begin
      check(irq == (ref_pend & ref_en), $sformatf("irq %h expected %h", irq, ref_pend & ref_en));
      check(wakeup == |(ref_pend & ref_en), "wake-up is the OR of the interrupts");
    end
  end

  task automatic reg_wr(input logic [3:0] off, input logic [31:0] d);
    @(negedge clk);
    reg_req = '{req: 1'b1, we: 1'b1, be: 4'hF, addr: 32'(off), wdata: d};
    @(negedge clk);
    reg_req = OBI_REQ_IDLE;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    reg_req  = OBI_REQ_IDLE;
    src      = '0;
    src_prev = '0;
    ref_pend = '0;
    ref_en   = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // single edge, latency one cycle
    reg_wr(4'h4, 32'hFFFF);
    @(negedge clk);
    src[3] = 1'b1;
    #1 check(irq == '0, "no interrupt in the cycle of the edge");
    @(negedge clk);
    check(irq == 16'h0008, "interrupt one cycle after the edge");
    src[3] = 1'b0;
    repeat (3) @(negedge clk);
    check(irq == 16'h0008, "pending bit stays after the source falls");
    // level held high does not re-trigger after a clear
    src[5] = 1'b1;
    reg_wr(4'h0, 32'h0028);
    repeat (3) @(negedge clk);
    check(irq == '0, "a held level does not set pending again");
    src[5] = 1'b0;

    // random traffic
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      src = NSRC'($urandom) & NSRC'($urandom);
      case ($urandom_range(7))
        0: reg_wr(4'h0, $urandom);
        1: reg_wr(4'h4, $urandom);
        default: ;
      endcase
    end

    // register read-back
    @(negedge clk);
    reg_req = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: 32'h4, wdata: '0};
    @(negedge clk);
    reg_req = OBI_REQ_IDLE;
    check(reg_rsp.rvalid && reg_rsp.rdata[NSRC-1:0] == ref_en, "enable read-back");
    @(negedge clk);
    reg_req = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: 32'h0, wdata: '0};
    @(negedge clk);
    reg_req = OBI_REQ_IDLE;
    check(reg_rsp.rvalid && reg_rsp.rdata[NSRC-1:0] == ref_pend, "pending read-back");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
