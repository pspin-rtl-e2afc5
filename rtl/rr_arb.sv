// rr_arb: round-robin arbiter.
//
// Grants one of N requesters per cycle. The search starts one past the
// requester granted last, so every requester is served within N grants.
// The pointer only moves when the grant is consumed (`advance`), which lets
// the arbiter sit in front of a valid/ready handshake without losing
// fairness: the grant is combinational from `req` and the registered
// pointer. The paper uses round-robin arbiters for completion notifications
// and commands inside a cluster; the search order is this design's choice.
module rr_arb #(
  parameter int unsigned N = 4,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic [N-1:0]  req_i,
  input  logic          advance_i,   // grant taken this cycle
  output logic [N-1:0]  gnt_o,       // one-hot
  output logic [IW-1:0] idx_o,
  output logic          valid_o
);
  logic [IW-1:0] last_q;

  always_comb begin
    gnt_o   = '0;
    idx_o   = '0;
    valid_o = 1'b0;
    for (int unsigned k = 1; k <= N; k++) begin
      int unsigned i;
      i = (int'(last_q) + k) % N;
      if (!valid_o && req_i[i]) begin
        valid_o  = 1'b1;
        idx_o    = IW'(i);
        gnt_o[i] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                    last_q <= IW'(N - 1);
    else if (advance_i && valid_o)  last_q <= idx_o;
  end
endmodule
