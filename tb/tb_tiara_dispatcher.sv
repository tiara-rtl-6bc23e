// tb_tiara_dispatcher: registers operators, then
//  1. with every MP busy, fills the dispatcher and checks it holds exactly
//     96 queued tasks plus the one being looked up before pushing back;
//  2. drains through MPs that stay busy for random times, checking every
//     task comes out in order, to a ready MP, with the registered start pc,
//     its caller tag and parameters, and unregistered ids are rejected;
//  3. checks the latency from an empty queue to an idle MP (2 cycles) and
//     that back-to-back tasks rotate over the eight MPs.
module tb_tiara_dispatcher;
  import tiara_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic task_valid, task_ready;
  task_t task_in;
  logic cfg_op_we, cfg_op_valid;
  logic [7:0] cfg_op_id;
  logic [9:0] cfg_op_pc;
  logic [7:0] mp_valid, mp_ready;
  mp_task_t mp_task;
  logic rej_valid, rej_ready;
  resp_t rej;
  logic [6:0] queued;
  int busy_left [8];
  task_t expq[$];
  int ndisp = 0, nrej = 0, last_mp = -1, rotations_ok = 0;
  bit freeze = 1;

  tiara_dispatcher dut (.*);
  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit registered(logic [7:0] id);
    return id < 40 && id != 13;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (task_valid && task_ready) expq.push_back(task_in);
    if (|mp_valid || (rej_valid && rej_ready)) begin
      task_t e;
      e = expq.pop_front();
      checks++;
      if (|mp_valid) begin
        int i;
        i = $clog2(mp_valid);
        if (!registered(e.op_id) || (mp_valid & ~mp_ready) != 0 || $countones(mp_valid) != 1 ||
            mp_task.start_pc != 10'(e.op_id * 7 + 3) || mp_task.ctag != e.ctag ||
            mp_task.params != e.params) begin
          failures++;
          $display("bad dispatch of op %0d", e.op_id);
        end
        busy_left[i] = freeze ? 1000000 : $urandom_range(1, 30);
        if (last_mp >= 0 && i == (last_mp + 1) % 8) rotations_ok++;
        last_mp = i;
        ndisp++;
      end else begin
        if (registered(e.op_id) || rej.status != ST_NO_OP || rej.ctag != e.ctag) begin
          failures++;
          $display("bad reject of op %0d", e.op_id);
        end
        nrej++;
      end
    end
  end

  always @(negedge clk) begin
    for (int i = 0; i < 8; i++) begin
      if (busy_left[i] > 0 && !freeze) busy_left[i]--;
      mp_ready[i] = (busy_left[i] == 0) && !freeze;
    end
    rej_ready = $urandom_range(0, 1);
  end

  task automatic send(logic [7:0] id, int n);
    task_in.op_id = id;
    task_in.ctag  = 16'(n);
    for (int p = 0; p < 8; p++) task_in.params[p] = {32'(n), 32'(p)};
    task_valid = 1;
    @(posedge clk);
    while (!task_ready) @(posedge clk);
    @(negedge clk);
    task_valid = 0;
  endtask

  initial begin
    int acc, t0;
    task_valid = 0; task_in = '0; cfg_op_we = 0; cfg_op_valid = 0; cfg_op_id = 0; cfg_op_pc = 0;
    rej_ready = 0; mp_ready = '0;
    for (int i = 0; i < 8; i++) busy_left[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 40; i++) begin
      cfg_op_we = 1; cfg_op_id = 8'(i); cfg_op_pc = 10'(i * 7 + 3); cfg_op_valid = (i != 13);
      @(negedge clk);
    end
    cfg_op_we = 0;
    // 1. capacity with every MP busy: all tasks registered
    acc = 0;
    task_valid = 1;
    for (int n = 0; n < 120; n++) begin
      task_in.op_id = 8'(n % 40 == 13 ? 14 : n % 40); task_in.ctag = 16'(n);
      for (int p = 0; p < 8; p++) task_in.params[p] = {32'(n), 32'(p)};
      @(posedge clk);
      if (task_ready) acc++;
      @(negedge clk);
    end
    task_valid = 0;
    checks++;
    if (acc != 97 || queued != 7'(96)) begin
      failures++;
      $display("capacity: accepted %0d queued %0d", acc, queued);
    end
    // 2. drain with random service, then random traffic incl. unregistered ids
    freeze = 0;
    fork
      for (int n = 200; n < 800; n++) send(8'($urandom_range(0, 45)), n);
    join
    wait (expq.size() == 0);
    repeat (40) @(negedge clk);
    // 3. latency from empty queue and rotation
    for (int i = 0; i < 8; i++) busy_left[i] = 1000000;
    freeze = 1;
    @(negedge clk);
    freeze = 0;
    for (int i = 0; i < 8; i++) busy_left[i] = 0;
    @(negedge clk);
    task_in.op_id = 8'd5; task_in.ctag = 16'hBEEF; task_valid = 1;
    @(posedge clk); t0 = 0;
    @(negedge clk); task_valid = 0;
    while (mp_valid == 0 && t0 < 20) begin t0++; @(negedge clk); end
    checks++;
    if (t0 != 1) begin failures++; $display("dispatch latency %0d cycles after accept", t0 + 1); end
    repeat (3) @(negedge clk);
    checks++;
    if (ndisp < 500 || nrej < 20 || rotations_ok < 100) begin
      failures++;
      $display("ndisp=%0d nrej=%0d rotations=%0d", ndisp, nrej, rotations_ok);
    end
    $display("dispatched=%0d rejected=%0d", ndisp, nrej);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
