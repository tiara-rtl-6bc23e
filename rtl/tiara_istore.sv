// tiara_istore: a memory processor's instruction store.
//
// A simple dual-port RAM of 1024 64-bit instructions (the published BRAM
// size; the 64-bit word is this design's instruction format). Port A is the
// registration write port fed from the host; port B is the fetch port with
// one cycle of read latency, as a block RAM has. The array is not reset; the
// fetch side only reads locations an operator was registered into.
module tiara_istore
  import tiara_pkg::*;
#(
  parameter int unsigned DEPTH = IMEM_DEPTH,
  parameter int unsigned W     = IW
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end
endmodule
