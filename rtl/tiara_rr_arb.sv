// tiara_rr_arb: round-robin arbiter.
//
// Grants one of N requesters per cycle. The search starts just after the
// last requester that was granted and accepted ('advance'), so every
// requester is served within N grants. Combinational grant, one-hot.
module tiara_rr_arb #(
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] gnt,
  output logic [$clog2(N)-1:0] gnt_idx
);
  localparam int unsigned IW_ = $clog2(N);
  logic [IW_-1:0] last;

  // requests rotated so that bit 0 is the one just after 'last'
  logic [2*N-1:0] req2;
  logic [N-1:0]   rot;
  assign req2 = {req, req} >> (int'(last) + 1);
  assign rot  = req2[N-1:0];

  always_comb begin
    logic [IW_-1:0] off;
    off = '0;
    for (int k = int'(N) - 1; k >= 0; k--) if (rot[k]) off = IW_'(k);
    gnt_idx = (int'(last) + 1 + int'(off) >= int'(N)) ? IW_'(int'(last) + 1 + int'(off) - int'(N))
                                                      : IW_'(int'(last) + 1 + int'(off));
    gnt     = |req ? (N'(1) << gnt_idx) : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 last <= IW_'(N - 1);
    else if (advance && |req)   last <= gnt_idx;
  end
endmodule
