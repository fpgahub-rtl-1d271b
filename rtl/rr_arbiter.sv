// rr_arbiter -- round-robin arbiter among N requesters.
//
// grant is one-hot (or zero when nobody requests). The search starts just
// after the last requester that was granted and accepted (adv high), so
// every requester that keeps requesting is served within N grants.
// Combinational grant; the pointer moves on the clock edge where adv is
// high.
module rr_arbiter #(
  parameter int N = 4,
  localparam int W = (N > 1) ? $clog2(N) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 adv,
  output logic [N-1:0]         grant,
  output logic [W-1:0]         grant_idx
);
  logic [W-1:0] last;

  always_comb begin
    grant     = '0;
    grant_idx = '0;
    for (int k = N; k >= 1; k--) begin
      logic [W-1:0] j;
      j = W'((int'(last) + k) % N);
      if (req[j]) begin
        grant     = '0;
        grant[j]  = 1'b1;
        grant_idx = W'(j);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 last <= W'(N - 1);
    else if (adv && |grant)     last <= grant_idx;
  end

endmodule
