// rr_arb: round-robin arbiter.
//
// Grants one of N requesters combinationally. The search starts one position
// after the requester granted last, so every requester that keeps its request
// up is served within N grants. The pointer only moves when the grant is
// accepted (advance_i), so a granted request that waits for its ready keeps
// its grant and the arbiter never withdraws a valid.
module rr_arb #(
  parameter int unsigned N = 2
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic [N-1:0]         req_i,
  input  logic                 advance_i,
  output logic                 gnt_valid_o,
  output logic [((N > 1) ? $clog2(N) : 1)-1:0] gnt_idx_o
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] last_q;

  always_comb begin
    gnt_valid_o = 1'b0;
    gnt_idx_o   = '0;
    for (int unsigned k = 1; k <= N; k++) begin
      int unsigned c;
      c = (32'(last_q) + k) % N;
      if (!gnt_valid_o && req_i[c]) begin
        gnt_valid_o = 1'b1;
        gnt_idx_o   = IW'(c);
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                       last_q <= IW'(N-1);
    else if (advance_i && gnt_valid_o) last_q <= gnt_idx_o;
  end
endmodule
