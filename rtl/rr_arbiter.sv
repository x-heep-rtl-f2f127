// rr_arbiter: round-robin arbiter over N requesters.
//
// The grant is combinational in req: the first requester at or after the
// priority pointer wins. When the winner is accepted (accept_i high in a
// cycle where a grant is given) the pointer moves to the requester after the
// winner, so every requester is served within N accepted grants.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic [N-1:0]         req_i,
  input  logic                 accept_i,
  output logic [N-1:0]         gnt_o,
  output logic [$clog2(N+1)-1:0] idx_o,
  output logic                 valid_o
);
  localparam int unsigned IW = $clog2(N+1);

  logic [IW-1:0] ptr_q;

  always_comb begin
    gnt_o   = '0;
    idx_o   = '0;
    valid_o = 1'b0;
    for (int unsigned k = 0; k < N; k++) begin
      int unsigned i;
      i = (int'(ptr_q) + k) % N;
      if (!valid_o && req_i[i]) begin
        valid_o  = 1'b1;
        idx_o    = IW'(i);
        gnt_o[i] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ptr_q <= '0;
    end else if (valid_o && accept_i) begin
      ptr_q <= (int'(idx_o) == N - 1) ? '0 : idx_o + 1'b1;
    end
  end
endmodule
