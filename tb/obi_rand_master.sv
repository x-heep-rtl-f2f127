// obi_rand_master: testbench OBI master issuing random reads and writes.
//
// Issues N_TXN word accesses to NT regions (region r starts at BASE + r *
// STEP; region NT-1 may be unmapped and then reads as 0 and ignores writes,
// see UNMAPPED_LAST). Each master only touches its own 16-word window in
// each region (offset ID * 0x100), so it can predict every read from its own
// shadow copy. It keeps requests stable until granted, may pipeline several
// requests, and checks every response in order against the prediction.
module obi_rand_master
  import xheep_pkg::*;
#(
  parameter int unsigned   ID = 0,
  parameter int unsigned   N_TXN = 200,
  parameter int unsigned   NT = 3,
  parameter logic [31:0]   BASE = 32'h0,
  parameter logic [31:0]   STEP = 32'h1000,
  parameter bit            UNMAPPED_LAST = 1'b1,
  parameter int unsigned   REQ_PCT = 80
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  output obi_req_t req_o,
  input  obi_rsp_t rsp_i,
  output logic     done_o,
  output int       checks_o,
  output int       failures_o
);
  logic [31:0] shadow [NT][16];
  logic [31:0] exp_q [$];
  int          issued, answered;

  function automatic obi_req_t new_req();
    obi_req_t q;
    int unsigned r, w;
    r = $urandom_range(NT - 1);
    w = $urandom_range(15);
    q.req   = 1'b1;
    q.we    = 1'($urandom_range(1));
    q.be    = 4'hF;
    q.addr  = BASE + r * STEP + ID * 32'h100 + w * 4;
    q.wdata = $urandom;
    return q;
  endfunction

  initial begin
    for (int r = 0; r < NT; r++) for (int w = 0; w < 16; w++) shadow[r][w] = '0;
    req_o = OBI_REQ_IDLE;
    done_o = 1'b0;
    checks_o = 0;
    failures_o = 0;
    issued = 0;
    answered = 0;
  end

  always @(posedge clk_i) begin
    if (rst_ni) begin
      // response phase
      if (rsp_i.rvalid) begin
        logic [31:0] e;
        e = exp_q.pop_front();
        answered++;
        checks_o++;
        if (rsp_i.rdata !== e) begin
          failures_o++;
          $display("FAIL: master %0d response %0d: got %h expected %h", ID, answered, rsp_i.rdata, e);
        end
      end
      // request phase
      if (req_o.req && rsp_i.gnt) begin
        int unsigned r, w;
        r = (req_o.addr - BASE) / STEP;
        w = (req_o.addr[7:0]) / 4;
        if (req_o.we) begin
          if (!(UNMAPPED_LAST && r == NT - 1)) shadow[r][w] = req_o.wdata;
          exp_q.push_back(32'h0);
        end else begin
          exp_q.push_back(shadow[r][w]);
        end
        issued++;
        if (issued < N_TXN && $urandom_range(99) < REQ_PCT) req_o <= new_req();
        else                                                req_o <= OBI_REQ_IDLE;
      end else if (!req_o.req && issued < N_TXN && $urandom_range(99) < REQ_PCT) begin
        req_o <= new_req();
      end
      if (issued == N_TXN && answered == N_TXN) done_o <= 1'b1;
    end
  end
endmodule
