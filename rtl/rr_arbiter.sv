// rr_arbiter: round-robin arbiter over N requesters.
//
// Grants at most one requester per cycle (one-hot grant). The search starts
// one position after the requester granted last, so every requester that
// keeps requesting is served within N grants. The priority pointer moves
// only when advance is high together with a grant (the grant was used).
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] grant,
  output logic [$clog2(N)-1:0] grant_idx
);
  localparam int unsigned W = $clog2(N);
  logic [W-1:0] last;

  always_comb begin
    grant     = '0;
    grant_idx = '0;
    for (int o = 1; o <= N; o++) begin
      int unsigned c;
      c = (int'(last) + o) % N;
      if (req[c] && grant == '0) begin
        grant[c]  = 1'b1;
        grant_idx = W'(c);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    last <= W'(N - 1);
    else if (advance && |grant)    last <= grant_idx;
  end
endmodule
