// obi_xbar: the OBI interconnect of the platform, NM masters to NS slaves.
//
// Every master request is decoded against the slaves' address rules
// (start <= addr < stop and (addr & mask) == match; the mask/match pair lets
// interleaved memory banks share one range). An address that matches no rule
// goes to an internal error slave that grants at once and answers one cycle
// later with read data 0, so a stray access cannot hang the bus.
//
// Two topologies, chosen by TOPOLOGY:
//  - BUS_FULLY_CONNECTED: one round-robin arbiter per slave; masters that
//    target different slaves proceed in the same cycle.
//  - BUS_ONE_AT_A_TIME: a single round-robin arbiter for the whole bus; at
//    most one request is forwarded per cycle. Smaller, lower throughput.
// The grant is combinational (request to grant in the same cycle).
//
// Responses are routed back with a per-slave FIFO of master indices (depth
// MAX_OUT), pushed on each accepted request and popped on each rvalid, so
// slaves may answer after any latency as long as they keep request order.
// To keep each master's responses in order, a master with requests still
// outstanding may only issue further requests to the same slave.
// The two topologies and the OBI protocol come from the platform; the
// arbitration policy, the ordering rule and the error slave are this
// design's choices.
module obi_xbar
  import xheep_pkg::*;
#(
  parameter int unsigned   NM = 2,
  parameter int unsigned   NS = 2,
  parameter bus_topology_e TOPOLOGY = BUS_FULLY_CONNECTED,
  parameter int unsigned   MAX_OUT = 2,
  parameter addr_rule_t [NS-1:0] RULES = '{default: '0}
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  obi_req_t [NM-1:0]  mst_req_i,
  output obi_rsp_t [NM-1:0]  mst_rsp_o,
  output obi_req_t [NS-1:0]  slv_req_o,
  input  obi_rsp_t [NS-1:0]  slv_rsp_i
);
  localparam int unsigned NT  = NS + 1;           // slaves plus error slave
  localparam int unsigned TW  = $clog2(NT + 1);
  localparam int unsigned MW  = $clog2(NM + 1);
  localparam int unsigned OCW = $clog2(MAX_OUT + 2);

  // ---------------------------------------------------------------------------
  // Decode and ordering rule
  // ---------------------------------------------------------------------------
  logic [NM-1:0][TW-1:0]  tgt;
  logic [NM-1:0]          allowed;
  logic [NM-1:0][OCW-1:0] out_cnt_q;
  logic [NM-1:0][TW-1:0]  last_tgt_q;

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      tgt[m] = TW'(NS);
      for (int s = NS - 1; s >= 0; s--) begin
        if (mst_req_i[m].addr >= RULES[s].start && mst_req_i[m].addr < RULES[s].stop &&
            (mst_req_i[m].addr & RULES[s].mask) == RULES[s].match) begin
          tgt[m] = TW'(s);
        end
      end
      allowed[m] = mst_req_i[m].req && (out_cnt_q[m] == '0 || last_tgt_q[m] == tgt[m]);
    end
  end

  // ---------------------------------------------------------------------------
  // Target side: slave requests, including the internal error slave
  // ---------------------------------------------------------------------------
  obi_req_t [NT-1:0] t_req;
  obi_rsp_t [NT-1:0] t_rsp;
  logic     [NT-1:0] fifo_full;
  logic     [NT-1:0][MW-1:0] t_src;   // master driving each target this cycle
  logic     [NM-1:0] m_gnt;

  for (genvar s = 0; s < NS; s++) begin : g_slv
    assign slv_req_o[s] = t_req[s];
    assign t_rsp[s]     = slv_rsp_i[s];
  end

  logic err_rvalid_q;
  assign t_rsp[NS].gnt    = t_req[NS].req;
  assign t_rsp[NS].rvalid = err_rvalid_q;
  assign t_rsp[NS].rdata  = '0;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) err_rvalid_q <= 1'b0;
    else         err_rvalid_q <= t_req[NS].req;
  end

  if (TOPOLOGY == BUS_FULLY_CONNECTED) begin : g_xbar
    for (genvar s = 0; s < NT; s++) begin : g_arb
      logic [NM-1:0] r, g;
      logic [MW-1:0] w;
      logic          v;
      always_comb begin
        for (int m = 0; m < NM; m++) r[m] = allowed[m] && tgt[m] == TW'(s) && !fifo_full[s];
      end
      rr_arbiter #(.N(NM)) u_arb (
        .clk_i, .rst_ni, .req_i(r), .accept_i(t_rsp[s].gnt), .gnt_o(g), .idx_o(w), .valid_o(v)
      );
      always_comb begin
        t_req[s]     = mst_req_i[w];
        t_req[s].req = v;
        t_src[s]     = w;
      end
    end
    always_comb begin
      m_gnt = '0;
      for (int m = 0; m < NM; m++) begin
        m_gnt[m] = t_req[tgt[m]].req && t_src[tgt[m]] == MW'(m) && t_rsp[tgt[m]].gnt;
      end
    end
  end else begin : g_shared
    logic [NM-1:0] r, g;
    logic [MW-1:0] w;
    logic          v;
    always_comb begin
      for (int m = 0; m < NM; m++) r[m] = allowed[m] && !fifo_full[tgt[m]];
    end
    rr_arbiter #(.N(NM)) u_arb (
      .clk_i, .rst_ni, .req_i(r), .accept_i(t_rsp[tgt[w]].gnt), .gnt_o(g), .idx_o(w), .valid_o(v)
    );
    always_comb begin
      for (int s = 0; s < NT; s++) begin
        t_req[s]     = mst_req_i[w];
        t_req[s].req = v && tgt[w] == TW'(s);
        t_src[s]     = w;
      end
      m_gnt = '0;
      m_gnt[w] = v && t_rsp[tgt[w]].gnt;
    end
  end

  // ---------------------------------------------------------------------------
  // Response routing
  // ---------------------------------------------------------------------------
  localparam int unsigned PW = (MAX_OUT > 1) ? $clog2(MAX_OUT) : 1;
  logic [NT-1:0][MAX_OUT-1:0][MW-1:0] fifo_q;
  logic [NT-1:0][PW-1:0]              rd_ptr_q, wr_ptr_q;
  logic [NT-1:0][OCW-1:0]             cnt_q;

  for (genvar s = 0; s < NT; s++) begin : g_fifo
    logic push, pop;
    assign push         = t_req[s].req && t_rsp[s].gnt;
    assign pop          = t_rsp[s].rvalid && cnt_q[s] != '0;
    assign fifo_full[s] = cnt_q[s] == OCW'(MAX_OUT);
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        fifo_q[s]   <= '0;
        rd_ptr_q[s] <= '0;
        wr_ptr_q[s] <= '0;
        cnt_q[s]    <= '0;
      end else begin
        if (push) begin
          fifo_q[s][wr_ptr_q[s]] <= t_src[s];
          wr_ptr_q[s] <= (int'(wr_ptr_q[s]) == MAX_OUT - 1) ? '0 : wr_ptr_q[s] + 1'b1;
        end
        if (pop) rd_ptr_q[s] <= (int'(rd_ptr_q[s]) == MAX_OUT - 1) ? '0 : rd_ptr_q[s] + 1'b1;
        cnt_q[s] <= cnt_q[s] + OCW'(push) - OCW'(pop);
      end
    end
  end

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      mst_rsp_o[m]     = OBI_RSP_IDLE;
      mst_rsp_o[m].gnt = m_gnt[m];
      for (int s = 0; s < NT; s++) begin
        if (t_rsp[s].rvalid && cnt_q[s] != '0 && fifo_q[s][rd_ptr_q[s]] == MW'(m)) begin
          mst_rsp_o[m].rvalid = 1'b1;
          mst_rsp_o[m].rdata  = t_rsp[s].rdata;
        end
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      out_cnt_q  <= '0;
      last_tgt_q <= '0;
    end else begin
      for (int m = 0; m < NM; m++) begin
        out_cnt_q[m] <= out_cnt_q[m] + OCW'(m_gnt[m]) - OCW'(mst_rsp_o[m].rvalid);
        if (m_gnt[m]) last_tgt_q[m] <= tgt[m];
      end
    end
  end

  // A grant is only given to a requesting master, and a response only comes
  // for a request that is outstanding.
  for (genvar m = 0; m < NM; m++) begin : g_chk
    a_gnt_has_req : assert property (@(posedge clk_i) disable iff (!rst_ni)
      mst_rsp_o[m].gnt |-> mst_req_i[m].req);
    a_rvalid_outstanding : assert property (@(posedge clk_i) disable iff (!rst_ni)
      mst_rsp_o[m].rvalid |-> out_cnt_q[m] != '0);
  end
endmodule
