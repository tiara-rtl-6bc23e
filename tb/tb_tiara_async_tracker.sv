// tb_tiara_async_tracker: allocates and completes async slots in random
// order against a shadow model of busy slots, checks the count and 'full'
// at 32, a stale completion (old generation) being ignored, a completion
// error and a timeout both raising the sticky error flag, and the timeout
// firing exactly TIMEOUT cycles after allocation.
module tb_tiara_async_tracker;
  localparam int TMO = 64;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic clear, alloc, full, cpl, cpl_err, err, timeout_evt;
  logic [5:0] alloc_tag, cpl_tag, count;
  logic [5:0] live[$];

  tiara_async_tracker #(.TIMEOUT(TMO)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s (count=%0d)", m, count); end
  endtask

  initial begin
    int t0;
    logic [5:0] stale;
    clear = 0; alloc = 0; cpl = 0; cpl_err = 0; cpl_tag = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(count == 0 && !full && !err, "reset state");
    // fill to 32 quickly (within timeout)
    for (int i = 0; i < 32; i++) begin
      alloc = 1; live.push_back(alloc_tag);
      @(negedge clk);
      alloc = 0;
      chk(int'(count) == i + 1, "count after alloc");
    end
    chk(full, "full at 32");
    // complete in random order
    live.shuffle();
    while (live.size() > 0) begin
      cpl = 1; cpl_tag = live.pop_front();
      @(negedge clk);
      cpl = 0;
      chk(int'(count) == live.size(), "count after completion");
    end
    chk(!err, "no error after clean completions");
    // stale completion: allocate, complete, reallocate same slot, send old tag
    alloc = 1; stale = alloc_tag; @(negedge clk); alloc = 0;
    cpl = 1; cpl_tag = stale; @(negedge clk); cpl = 0;
    alloc = 1; @(negedge clk); alloc = 0;
    chk(count == 1, "reallocated");
    cpl = 1; cpl_tag = stale; @(negedge clk); cpl = 0;
    chk(count == 1, "stale completion ignored");
    // completion error
    cpl = 1; cpl_tag = {~stale[5], stale[4:0]}; cpl_err = 1; @(negedge clk); cpl = 0; cpl_err = 0;
    chk(count == 0 && err, "error completion sets flag");
    clear = 1; @(negedge clk); clear = 0;
    chk(!err, "clear");
    // timeout
    alloc = 1; @(negedge clk); alloc = 0;
    t0 = 0;   // cycles since the allocating edge
    while (!timeout_evt && t0 < 1000) begin @(negedge clk); t0++; end
    chk(t0 == TMO, $sformatf("timeout after %0d cycles", t0));
    @(negedge clk);
    chk(count == 0 && err, "timeout frees slot and sets error");
    // alloc and completion in the same cycle
    clear = 1; @(negedge clk); clear = 0;
    alloc = 1; stale = alloc_tag; @(negedge clk);
    cpl = 1; cpl_tag = stale; @(negedge clk); alloc = 0; cpl = 0;
    chk(count == 1, "simultaneous alloc and completion");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
