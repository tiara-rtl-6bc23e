// tiara_loop_stack: the depth-8 loop stack of a memory processor.
//
// Loop(M,N) executes the next N instructions M times. Each active loop holds
// {first pc of the body, last pc of the body, iterations left}. After the MP
// has executed the instruction at 'pc' it asks the stack where to go next
// ('step'): if the innermost loop ends at pc and has iterations left, the PC
// returns to the body start; loops that end at pc and are exhausted are
// popped (several nested loops may end on the same instruction, all are
// resolved in the same cycle), otherwise the PC advances by one.
// A taken forward Jump ('jump') pops every loop whose body ends before the
// jump target; this is how an operator leaves a retry loop early. That rule
// and the overflow flag (pushing onto a full stack) are this design's
// choices: the published text gives only the depth and Loop(M,N).
// Interface: push/step/jump are strobes applied at the clock edge;
// next_pc/redirect are combinational from pc. Depth 8 is published.
module tiara_loop_stack
  import tiara_pkg::*;
#(
  parameter int unsigned DEPTH = LOOP_DEPTH,
  parameter int unsigned PCW   = PC_W,
  parameter int unsigned CW    = 32
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear,
  input  logic           push,
  input  logic [PCW-1:0] push_start,
  input  logic [PCW-1:0] push_end,
  input  logic [CW-1:0]  push_count,   // >= 1
  input  logic [PCW-1:0] pc,
  input  logic           step,
  output logic [PCW-1:0] next_pc,
  output logic           redirect,     // next_pc is a loop-back
  input  logic           jump,
  input  logic [PCW:0]   jump_target,  // may lie one past the store
  output logic           overflow,
  output logic [$clog2(DEPTH+1)-1:0] depth
);
  localparam int unsigned DW = $clog2(DEPTH+1);
  localparam int unsigned XW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [PCW-1:0] st_start [DEPTH];
  logic [PCW-1:0] st_end   [DEPTH];
  logic [CW-1:0]  st_rem   [DEPTH];

  // ---- step: resolve loops ending at pc ----
  logic [DW-1:0] step_depth;
  logic          back;
  logic [DW-1:0] back_idx;

  always_comb begin
    logic done;
    done       = 1'b0;
    back       = 1'b0;
    back_idx   = '0;
    step_depth = depth;
    for (int i = int'(DEPTH) - 1; i >= 0; i--) begin
      if (!done && i < int'(depth)) begin
        if (st_end[i] == pc) begin
          if (st_rem[i] > CW'(1)) begin
            back     = 1'b1;
            back_idx = DW'(i);
            done     = 1'b1;
          end else begin
            step_depth = DW'(i);
          end
        end else begin
          done = 1'b1;
        end
      end
    end
  end

  assign redirect = back;
  assign next_pc  = back ? st_start[back_idx[XW-1:0]] : pc + PCW'(1);

  // ---- jump: pop loops whose body ends before the target ----
  logic [DW-1:0] jump_depth;
  always_comb begin
    jump_depth = '0;
    for (int i = 0; i < int'(DEPTH); i++) begin
      if (i < int'(depth) && {1'b0, st_end[i]} >= jump_target) jump_depth = DW'(i + 1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      depth    <= '0;
      overflow <= 1'b0;
    end else if (clear) begin
      depth    <= '0;
      overflow <= 1'b0;
    end else if (push) begin
      if (depth == DW'(DEPTH)) overflow <= 1'b1;
      else                     depth    <= depth + DW'(1);
    end else if (step) begin
      depth <= back ? back_idx + DW'(1) : step_depth;
    end else if (jump) begin
      depth <= jump_depth;
    end
  end

  always_ff @(posedge clk) begin
    if (!clear && push && depth != DW'(DEPTH)) begin
      st_start[depth[XW-1:0]] <= push_start;
      st_end[depth[XW-1:0]]   <= push_end;
      st_rem[depth[XW-1:0]]   <= push_count;
    end else if (!clear && !push && step && back) begin
      st_rem[back_idx[XW-1:0]] <= st_rem[back_idx[XW-1:0]] - CW'(1);
    end
  end
endmodule
