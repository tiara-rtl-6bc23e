// tiara_op_table: the op_id -> start_pc table in front of the dispatcher.
//
// 256 entries (published), each a valid bit and the 10-bit start PC of a
// registered operator in the instruction stores. Written by the host at
// registration (cfg_we), cleared at reset, unregistered with cfg_valid=0.
// The lookup port returns {hit, start_pc} one cycle after 'lookup', so an
// incoming request reaches any registered operator in constant time.
module tiara_op_table
  import tiara_pkg::*;
#(
  parameter int unsigned ENTRIES = NUM_OPS,
  parameter int unsigned PCW     = PC_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       cfg_we,
  input  logic [$clog2(ENTRIES)-1:0] cfg_op,
  input  logic                       cfg_valid,
  input  logic [PCW-1:0]             cfg_pc,
  input  logic                       lookup,
  input  logic [$clog2(ENTRIES)-1:0] op,
  output logic                       hit,
  output logic [PCW-1:0]             start_pc
);
  logic [PCW-1:0]     pcs [ENTRIES];
  logic [ENTRIES-1:0] valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      valid <= '0;
    else if (cfg_we) valid[cfg_op] <= cfg_valid;
  end

  always_ff @(posedge clk) begin
    if (cfg_we) pcs[cfg_op] <= cfg_pc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hit      <= 1'b0;
      start_pc <= '0;
    end else if (lookup) begin
      hit      <= valid[op];
      start_pc <= pcs[op];
    end
  end
endmodule
