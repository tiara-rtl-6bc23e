// tiara_resp_arb: merges caller responses onto the RDMA engine's send port.
//
// N sources (the memory processors' Ret responses and the dispatcher's
// rejections) compete round-robin for one valid/ready output; the caller tag
// inside each response tells the RDMA engine which requester it belongs to.
// Combinational; one response per cycle.
module tiara_resp_arb
  import tiara_pkg::*;
#(
  parameter int unsigned N = NUM_MP + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic    [N-1:0]      in_valid,
  output logic    [N-1:0]      in_ready,
  input  resp_t   [N-1:0]      in,
  output logic                 out_valid,
  input  logic                 out_ready,
  output resp_t                out
);
  logic [N-1:0]         gnt;
  logic [$clog2(N)-1:0] gnt_idx;

  tiara_rr_arb #(.N(N)) u_arb (
    .clk     (clk),
    .rst_n   (rst_n),
    .req     (in_valid),
    .advance (out_valid && out_ready),
    .gnt     (gnt),
    .gnt_idx (gnt_idx)
  );

  assign out_valid = |in_valid;
  assign out       = in[gnt_idx];
  assign in_ready  = out_ready ? gnt : '0;
endmodule
