// tiara_regfile: the per-task register file of a memory processor.
//
// 16 registers of 64 bits, as published. Three combinational read ports
// (CAS/CAA and Memcpy need three operands: this port count is this design's
// choice) and one synchronous write port. A task start ('load_params')
// copies the invocation's 8 parameters into r0..r7 and clears r8..r15 in a
// single cycle; it takes precedence over a write in the same cycle.
module tiara_regfile
  import tiara_pkg::*;
#(
  parameter int unsigned N  = NREGS,
  parameter int unsigned W  = XLEN,
  parameter int unsigned NP = NPARAMS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  load_params,
  input  logic [NP-1:0][W-1:0]  params,
  input  logic                  we,
  input  logic [$clog2(N)-1:0]  waddr,
  input  logic [W-1:0]          wdata,
  input  logic [$clog2(N)-1:0]  ra1,
  input  logic [$clog2(N)-1:0]  ra2,
  input  logic [$clog2(N)-1:0]  ra3,
  output logic [W-1:0]          rd1,
  output logic [W-1:0]          rd2,
  output logic [W-1:0]          rd3
);
  logic [W-1:0] regs [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(N); i++) regs[i] <= '0;
    end else if (load_params) begin
      for (int i = 0; i < int'(N); i++) regs[i] <= (i < int'(NP)) ? params[i] : '0;
    end else if (we) begin
      regs[waddr] <= wdata;
    end
  end

  assign rd1 = regs[ra1];
  assign rd2 = regs[ra2];
  assign rd3 = regs[ra3];
endmodule
