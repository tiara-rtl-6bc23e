// tb_tiara_loop_stack: runs random straight-line programs containing nested
// Loop(M,N) instructions (M = 0..3) and forward jumps through the loop
// stack, and compares every next-pc with a software interpreter that keeps
// its own loop stack. Finishes with an overflow test (9 pushes).
module tb_tiara_loop_stack;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic clear, push, step, jump, redirect, overflow;
  logic [9:0] push_start, push_end, pc, next_pc;
  logic [31:0] push_count;
  logic [10:0] jump_target;
  logic [3:0] depth;

  tiara_loop_stack dut (.*);
  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int L = 48;
  int kind [L];    // 0 plain, 1 loop, 2 jump
  int argn [L];    // loop body length / jump offset
  int argm [L];    // loop count
  int rs_start[$], rs_end[$], rs_rem[$];
  int steps_total = 0, loopbacks = 0, jumps_out = 0;

  task automatic gen();
    int ends[$];
    for (int p = 0; p < L; p++) begin
      int lim;
      while (ends.size() > 0 && ends[$] < p) void'(ends.pop_back());
      lim = (ends.size() > 0) ? ends[$] : L - 1;
      kind[p] = 0; argn[p] = 0; argm[p] = 0;
      if ($urandom_range(0, 4) == 0 && lim > p && ends.size() < 8) begin
        kind[p] = 1;
        argn[p] = $urandom_range(1, (lim - p > 6) ? 6 : lim - p);
        argm[p] = $urandom_range(0, 3);
        ends.push_back(p + argn[p]);
      end else if ($urandom_range(0, 7) == 0) begin
        kind[p] = 2;
        argn[p] = $urandom_range(0, 4);
      end
    end
  endtask

  task automatic run_prog();
    int rpc;
    rs_start.delete(); rs_end.delete(); rs_rem.delete();
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    rpc = 0;
    for (int n = 0; n < 4000 && rpc < L; n++) begin
      int exp_pc;
      bit taken;
      pc = 10'(rpc);
      push = 0; step = 0; jump = 0;
      taken = (kind[rpc] == 2) && ($urandom_range(0, 1) == 1);
      if (kind[rpc] == 1 && argm[rpc] > 0) begin
        push = 1; push_start = 10'(rpc + 1); push_end = 10'(rpc + argn[rpc]);
        push_count = 32'(argm[rpc]);
        rs_start.push_back(rpc + 1); rs_end.push_back(rpc + argn[rpc]); rs_rem.push_back(argm[rpc]);
        exp_pc = rpc + 1;
      end else if ((kind[rpc] == 1 && argm[rpc] == 0) || taken) begin
        jump = 1;
        exp_pc = rpc + 1 + argn[rpc];
        jump_target = 11'(exp_pc);
        while (rs_end.size() > 0 && rs_end[$] < exp_pc) begin
          void'(rs_end.pop_back()); void'(rs_start.pop_back()); void'(rs_rem.pop_back());
          jumps_out++;
        end
      end else begin
        bit back;
        back = 0;
        step = 1;
        while (rs_end.size() > 0 && rs_end[$] == rpc) begin
          if (rs_rem[$] > 1) begin
            rs_rem[$] = rs_rem[$] - 1; back = 1; exp_pc = rs_start[$]; loopbacks++;
            break;
          end
          void'(rs_end.pop_back()); void'(rs_start.pop_back()); void'(rs_rem.pop_back());
        end
        if (!back) exp_pc = rpc + 1;
        #1;
        checks++;
        if (int'(next_pc) != exp_pc) begin
          failures++;
          if (failures < 10) $display("pc %0d: next %0d expected %0d", rpc, next_pc, exp_pc);
        end
      end
      @(negedge clk);
      push = 0; step = 0; jump = 0;
      checks++;
      if (int'(depth) != rs_end.size()) begin
        failures++;
        if (failures < 10) $display("pc %0d: depth %0d expected %0d", rpc, depth, rs_end.size());
      end
      rpc = exp_pc;
      steps_total++;
    end
  endtask

  initial begin
    clear = 0; push = 0; step = 0; jump = 0; pc = 0;
    push_start = 0; push_end = 0; push_count = 0; jump_target = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 150; t++) begin
      gen();
      run_prog();
    end
    // overflow
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int i = 0; i < 9; i++) begin
      push = 1; push_start = 10'(i + 1); push_end = 10'(100 - i); push_count = 2;
      @(negedge clk);
      push = 0;
      checks++;
      if (overflow !== (i == 8)) failures++;
    end
    checks++;
    if (loopbacks == 0 || jumps_out == 0) failures++;
    $display("steps=%0d loopbacks=%0d jumps_out=%0d", steps_total, loopbacks, jumps_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
