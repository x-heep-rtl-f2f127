// obi_mem_model: testbench model of an OBI memory slave with random timing.
//
// Grants a waiting request in a random cycle (probability GNT_PCT percent),
// performs the access at grant time on a sparse word memory (unwritten words
// read 0) and answers each request after a random latency of 1..MAX_LAT
// cycles, in request order, with rvalid high for one cycle.
module obi_mem_model
  import xheep_pkg::*;
#(
  parameter int unsigned GNT_PCT = 70,
  parameter int unsigned MAX_LAT = 3
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  obi_req_t req_i,
  output obi_rsp_t rsp_o,
  output int       accepted_o
);
  logic [31:0] mem [logic [31:0]];
  logic [31:0] q_data [$];
  longint      q_time [$];
  longint      cyc = 0;
  logic        gnt_ok;

  assign rsp_o.gnt = req_i.req & gnt_ok;

  initial accepted_o = 0;

  always @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      gnt_ok       <= 1'b0;
      rsp_o.rvalid <= 1'b0;
      rsp_o.rdata  <= '0;
    end else begin
      longint t;
      cyc    <= cyc + 1;
      gnt_ok <= ($urandom_range(99) < GNT_PCT);
      rsp_o.rvalid <= 1'b0;
      if (q_time.size() > 0 && q_time[0] <= cyc + 1) begin
        rsp_o.rvalid <= 1'b1;
        rsp_o.rdata  <= q_data.pop_front();
        void'(q_time.pop_front());
      end
      if (req_i.req && gnt_ok) begin
        logic [31:0] w;
        accepted_o <= accepted_o + 1;
        w = mem.exists(req_i.addr) ? mem[req_i.addr] : 32'h0;
        if (req_i.we) begin
          for (int b = 0; b < 4; b++) if (req_i.be[b]) w[8*b +: 8] = req_i.wdata[8*b +: 8];
          mem[req_i.addr] = w;
          q_data.push_back(32'h0);
        end else begin
          q_data.push_back(w);
        end
        t = cyc + 1 + longint'($urandom_range(MAX_LAT - 1));
        if (q_time.size() > 0 && t < q_time[$]) t = q_time[$];
        q_time.push_back(t);
      end
    end
  end
endmodule
