// tiara_async_tracker: the 32-entry in-flight async counter of an MP.
//
// Every asynchronous Memcpy takes one of 32 slots (published size) when it
// is issued; its completion frees the slot. 'count' is the number of busy
// slots, which Wait(threshold) compares against. Each busy slot runs its own
// timeout counter: an op that gets no completion within TIMEOUT cycles (a
// failed node) is dropped and raises the sticky error flag that a
// conditional Jump can test; a completion with err=1 raises it too.
// Tags are {generation bit, slot index}: a completion that arrives after its
// slot timed out and was reused carries the old generation and is ignored.
// The timeout value and the generation bit are this design's choices.
// Interface: alloc/alloc_tag (tag valid while !full), cpl/cpl_tag/cpl_err,
// clear at task start. Allocation and completion may share a cycle.
module tiara_async_tracker
  import tiara_pkg::*;
#(
  parameter int unsigned SLOTS   = ASYNC_SLOTS,
  parameter int unsigned TIMEOUT = ASYNC_TIMEOUT
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     alloc,
  output logic [$clog2(SLOTS):0]   alloc_tag,
  output logic                     full,
  input  logic                     cpl,
  input  logic [$clog2(SLOTS):0]   cpl_tag,
  input  logic                     cpl_err,
  output logic [$clog2(SLOTS):0]   count,
  output logic                     err,
  output logic                     timeout_evt
);
  localparam int unsigned SW = $clog2(SLOTS);
  localparam int unsigned TW = $clog2(TIMEOUT + 1);

  logic [SLOTS-1:0] busy, gen;
  logic [TW-1:0]    timer [SLOTS];

  // lowest free slot
  logic [SW-1:0] free_idx;
  always_comb begin
    free_idx = '0;
    for (int i = int'(SLOTS) - 1; i >= 0; i--) if (!busy[i]) free_idx = SW'(i);
  end
  assign full      = &busy;
  assign alloc_tag = {~gen[free_idx], free_idx};

  logic [SW-1:0] cidx;
  logic          cgen;
  logic          cpl_hit;
  assign cidx    = cpl_tag[SW-1:0];
  assign cgen    = cpl_tag[SW];
  assign cpl_hit = cpl && busy[cidx] && gen[cidx] == cgen;

  logic [SLOTS-1:0] expire;
  always_comb begin
    for (int i = 0; i < int'(SLOTS); i++)
      expire[i] = busy[i] && timer[i] == TW'(TIMEOUT);
  end
  assign timeout_evt = |expire;

  always_comb begin
    count = '0;
    for (int i = 0; i < int'(SLOTS); i++) count += {{SW{1'b0}}, busy[i]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= '0;
      gen  <= '0;
      err  <= 1'b0;
      for (int i = 0; i < int'(SLOTS); i++) timer[i] <= '0;
    end else begin
      for (int i = 0; i < int'(SLOTS); i++) begin
        if (busy[i]) timer[i] <= timer[i] + TW'(1);
        if (expire[i]) busy[i] <= 1'b0;
      end
      if (cpl_hit) busy[cidx] <= 1'b0;
      if (alloc && !full) begin
        busy[free_idx]  <= 1'b1;
        gen[free_idx]   <= ~gen[free_idx];
        timer[free_idx] <= '0;
      end
      if (clear)                                   err <= 1'b0;
      else if (|expire || (cpl_hit && cpl_err))    err <= 1'b1;
    end
  end
endmodule
