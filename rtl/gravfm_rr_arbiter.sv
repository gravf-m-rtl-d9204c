// gravfm_rr_arbiter: round-robin arbiter.
//
// Grants one of the requesting inputs each cycle (one-hot grant, combinational
// from req). The search starts after the input granted last, so every
// persistent requester is served within N grants. The pointer moves only on
// a cycle where advance = 1, i.e. when the granted transfer really happened.
module gravfm_rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] grant,
  output logic [$clog2(N > 1 ? N : 2)-1:0] grant_idx,
  output logic         any
);

  localparam int unsigned IW = $clog2(N > 1 ? N : 2);
  logic [IW-1:0] last;

  always_comb begin
    grant     = '0;
    grant_idx = '0;
    any       = 1'b0;
    for (int unsigned k = 1; k <= N; k++) begin
      int unsigned idx;
      idx = (int'(last) + k) % N;
      if (!any && req[idx]) begin
        any            = 1'b1;
        grant[idx]     = 1'b1;
        grant_idx      = IW'(idx);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) last <= IW'(N - 1);
    else if (advance && any) last <= grant_idx;
  end

endmodule
