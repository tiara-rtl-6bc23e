// tb_tiara_mp: one memory processor against the behavioural memory model
// (150-cycle local DMA, 500-cycle remote round trip). Programs are written
// into its instruction store, then tasks are started directly:
//   - pointer chase of depth 1 and 10: result and per-hop cost (memory
//     latency + 5 cycles: fetch, decode, execute, request, write-back);
//   - distributed lock (bounded CAS retry loop, Load, Store, two async
//     Memcpy to remote replicas, Wait(0), release) when free, when held,
//     and with a dead replica whose copy times out and takes the error path;
//   - compare-and-add, Wait with a non-zero threshold, loop-stack overflow
//     and running off the end of the instruction store.
module tb_tiara_mp;
  import tiara_pkg::*;
  import tiara_tb_pkg::*;
  localparam int TMO = 2000;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic imem_we;
  logic [9:0] imem_waddr;
  logic [63:0] imem_wdata;
  logic task_valid, task_ready, req_valid, req_ready, rsp_valid, resp_valid, resp_ready, busy;
  mp_task_t task_in;
  mem_req_t req;
  mem_rsp_t rsp;
  resp_t resp;
  logic dma_v, rdma_v, dma_rv, rdma_rv, rdma_rr;
  mem_rsp_t dma_r, rdma_r;
  logic dummy_rdy1, dummy_rdy2;

  tiara_mp #(.MP_ID(3), .TIMEOUT(TMO)) dut (.*);
  // local accesses to the DMA side, others to the RDMA side
  assign dma_v   = req_valid && req.addr[63:56] == 0 && (req.op != MEM_COPY || req.src[63:56] == 0);
  assign rdma_v  = req_valid && !dma_v;
  assign req_ready = 1'b1;
  assign rdma_rr = !dma_rv;
  assign rsp_valid = dma_rv || rdma_rv;
  assign rsp = dma_rv ? dma_r : rdma_r;
  tiara_mem_model #(.DEAD_HOST(3)) mem (
    .clk(clk), .rst_n(rst_n), .dma_req_valid(dma_v), .dma_req_ready(dummy_rdy1), .dma_req(req),
    .dma_rsp_valid(dma_rv), .dma_rsp_ready(1'b1), .dma_rsp(dma_r),
    .rdma_req_valid(rdma_v), .rdma_req_ready(dummy_rdy2), .rdma_req(req),
    .rdma_rsp_valid(rdma_rv), .rdma_rsp_ready(rdma_rr), .rdma_rsp(rdma_r));
  always #5 clk = ~clk;

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  task automatic put(int pc, logic [63:0] w);
    @(negedge clk);
    imem_we = 1; imem_waddr = 10'(pc); imem_wdata = w;
    @(negedge clk);
    imem_we = 0;
  endtask

  // start a task and wait for its response; returns cycles to response
  task automatic run(int pc, logic [7:0][63:0] p, output resp_t r, output int cyc);
    @(negedge clk);
    task_in.start_pc = 10'(pc); task_in.ctag = 16'(pc); task_in.params = p;
    task_valid = 1;
    @(posedge clk);
    while (!task_ready) @(posedge clk);
    @(negedge clk);
    task_valid = 0;
    cyc = 0;
    while (!resp_valid) begin @(negedge clk); cyc++; end
    r = resp;
    resp_ready = 1;
    @(negedge clk);
    resp_ready = 0;
    while (busy) @(negedge clk);
  endtask

  initial begin
    resp_t r;
    int c1, c10, c;
    logic [7:0][63:0] p;
    imem_we = 0; imem_waddr = 0; imem_wdata = 0; task_valid = 0; task_in = '0; resp_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // ---- pointer chase at pc 0: r0 = node, r1 = depth ----
    put(0, i_loopr(1, 1));
    put(1, i_load(0, 0, 0));
    put(2, i_ret(0));
    for (int i = 0; i < 12; i++) mem.wr64(uaddr(0, 1, 64 * i), uaddr(0, 1, 64 * (i + 1)));
    p = '0; p[0] = uaddr(0, 1, 0); p[1] = 1;
    run(0, p, r, c1);
    chk(r.value == uaddr(0, 1, 64) && r.status == ST_OK && r.ctag == 16'd0, "chase depth 1");
    p[1] = 10;
    run(0, p, r, c10);
    chk(r.value == uaddr(0, 1, 640), "chase depth 10");
    chk((c10 - c1) == 9 * 155, $sformatf("per-hop cost %0d cycles (expected 155)", (c10 - c1) / 9));
    $display("chase: depth1 %0d cycles, depth10 %0d cycles", c1, c10);

    // ---- distributed lock at pc 10 ----
    put(10, i_alui(ALU_MOV, 8, 0, 1));
    put(11, i_alui(ALU_MOV, 9, 0, 0));
    put(12, i_loopi(3, 2));
    put(13, i_cas(10, 0, 9, 8));
    put(14, i_jumpi(JC_EQ, 10, 0, 1));
    put(15, i_reti(0, 1));
    put(16, i_load(11, 1));
    put(17, i_store(1, 2));
    put(18, i_memcpy(3, 1, 8));
    put(19, i_memcpy(4, 1, 8));
    put(20, i_wait(0));
    put(21, i_jumpi(JC_ERR, 0, 0, 2));
    put(22, i_store(0, 9));
    put(23, i_ret(11));
    put(24, i_store(0, 9));
    put(25, i_ret(11, 2));
    mem.wr64(uaddr(0, 2, 0), 0);       // latch
    mem.wr64(uaddr(0, 2, 8), 64'd77);  // state
    p = '0; p[0] = uaddr(0, 2, 0); p[1] = uaddr(0, 2, 8); p[2] = 64'd88;
    p[3] = uaddr(1, 2, 8); p[4] = uaddr(2, 2, 8);
    run(10, p, r, c);
    chk(r.status == 0 && r.value == 77, "lock: old state returned");
    chk(mem.rd64(uaddr(0, 2, 8)) == 88 && mem.rd64(uaddr(1, 2, 8)) == 88 &&
        mem.rd64(uaddr(2, 2, 8)) == 88, "lock: state replicated");
    chk(mem.rd64(uaddr(0, 2, 0)) == 0, "lock: latch released");
    chk(c > 500 && c < 500 + 6 * 160, $sformatf("lock: %0d cycles, one remote round trip", c));
    // held latch: three CAS attempts then FAIL
    mem.wr64(uaddr(0, 2, 0), 1);
    run(10, p, r, c);
    chk(r.status == 1, "lock: held latch fails after bounded retries");
    chk(c >= 3 * 155 && c < 4 * 160 + 20, $sformatf("lock: retries took %0d cycles", c));
    // dead replica: Memcpy to host 3 never completes
    mem.wr64(uaddr(0, 2, 0), 0);
    p[4] = uaddr(3, 2, 8); p[2] = 64'd99;
    run(10, p, r, c);
    chk(r.status == 2 && r.value == 88, "lock: replica timeout takes error path");
    chk(c > TMO, "lock: waited for the timeout");

    // ---- compare-and-add at pc 40: r0 = addr, r1 = cmp, r2 = add ----
    put(40, i_caa(5, 0, 1, 2));
    put(41, i_load(6, 0));
    put(42, i_alu(ALU_SUB, 7, 6, 5));
    put(43, i_ret(7));
    mem.wr64(uaddr(0, 4, 0), 1000);
    p = '0; p[0] = uaddr(0, 4, 0); p[1] = 1000; p[2] = 25;
    run(40, p, r, c);
    chk(r.value == 25 && mem.rd64(uaddr(0, 4, 0)) == 1025, "CAA adds when equal");
    run(40, p, r, c);
    chk(r.value == 0 && mem.rd64(uaddr(0, 4, 0)) == 1025, "CAA leaves memory when different");

    // ---- Wait threshold at pc 50 ----
    put(50, i_memcpy(0, 1, 8));
    put(51, i_memcpy(0, 1, 8));
    put(52, i_memcpy(0, 1, 8));
    put(53, i_mk_wait_r());
    put(54, i_reti(5));
    p = '0; p[0] = uaddr(1, 0, 0); p[1] = uaddr(0, 0, 0); p[2] = 3;
    run(50, p, r, c);
    chk(c < 40, $sformatf("Wait(3) with 3 in flight does not stall (%0d)", c));
    p[2] = 0;
    run(50, p, r, c);
    chk(c >= 500, $sformatf("Wait(0) stalls for the remote copies (%0d)", c));

    // ---- loop overflow at pc 60: nine nested loops ----
    for (int i = 0; i < 9; i++) put(60 + i, i_loopi(2, 20 - i));
    put(69, i_reti(1));
    run(60, p, r, c);
    chk(r.status == ST_LOOP_OVF, "loop stack overflow reported");

    // ---- running off the store ----
    put(1022, i_alui(ALU_ADD, 0, 0, 1));
    put(1023, i_alui(ALU_ADD, 0, 0, 1));
    run(1022, p, r, c);
    chk(r.status == ST_RUNAWAY, "pc past the store reported");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] i_mk_wait_r();
    return mk(OP_WAIT, 0, 2, 0, 0, 0, 0, 0, 0);   // Wait(r2)
  endfunction
endmodule
