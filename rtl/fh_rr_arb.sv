// fh_rr_arb: round-robin arbiter.
//
// Grants one of N requesters, starting the search just after the last
// requester that was granted and accepted (advance high). grant is one-hot
// and combinational from req; the priority pointer moves only on advance, so
// a grant that is not taken stays stable. gnt_idx is the index of the grant.
module fh_rr_arb #(
  parameter int unsigned N = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 advance,
  output logic [N-1:0]         grant,
  output logic [$clog2(N > 1 ? N : 2)-1:0] gnt_idx
);
  localparam int unsigned IW = $clog2(N > 1 ? N : 2);
  logic [IW-1:0] last;

  always_comb begin
    grant   = '0;
    gnt_idx = '0;
    for (int k = N; k >= 1; k--) begin
      // candidate last+k (mod N); the loop runs down so the nearest wins
      logic [IW-1:0] c;
      c = IW'((int'(last) + k) % N);
      if (req[c]) begin
        grant    = '0;
        grant[c] = 1'b1;
        gnt_idx  = c;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 last <= IW'(N-1);
    else if (advance && |req)   last <= gnt_idx;
  end
endmodule
