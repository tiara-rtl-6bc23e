// tb_tiara_top: end-to-end test of the execution engine at its default size
// (8 MPs, 96 dispatcher slots, 1024-entry stores), behind the behavioural
// memory model (150-cycle local DMA, 500-cycle remote round trip).
// Five operators are registered through the configuration port and invoked
// with single messages, as a remote client would:
//   op 1  graph traversal: follow the first neighbour pointer d times
//   op 2  3-level page-table walk, then Memcpy of the data to the client
//   op 3  distributed lock: CAS retry loop, update, replicate to 2 hosts,
//         Wait, release (and an error path if a replica times out)
//   op 4  PagedAttention: per block, Load the block-table entry and issue
//         an async Memcpy of the KV block to the client, then Wait(0)
//   op 5  MoE expert gather: expert id -> translation table -> Memcpy
// plus invocations of an unregistered op id. Every response is checked
// against values computed here, data copied to the client is compared word
// by word, single-task latencies are checked in cycles, and each mechanism
// (queueing behind busy MPs, rejection, loop-back, jump out of a loop, CAS
// failure, local and remote routing, async-slot exhaustion, Wait stall,
// timeout error path, response back-pressure) is counted and must occur.
module tb_tiara_top;
  import tiara_pkg::*;
  import tiara_tb_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic cfg_imem_we, cfg_op_we, cfg_op_valid;
  logic [9:0] cfg_imem_addr, cfg_op_pc;
  logic [63:0] cfg_imem_data;
  logic [7:0] cfg_op_id;
  logic task_valid, task_ready, rsp_out_valid, rsp_out_ready;
  task_t task_in;
  resp_t rsp_out;
  logic dma_req_valid, dma_req_ready, dma_rsp_valid, dma_rsp_ready;
  logic rdma_req_valid, rdma_req_ready, rdma_rsp_valid, rdma_rsp_ready;
  mem_req_t dma_req, rdma_req;
  mem_rsp_t dma_rsp, rdma_rsp;
  logic [7:0] mp_busy;

  tiara_top dut (.*);
  tiara_mem_model #(.DEAD_HOST(9)) mem (.*);
  always #2.5 clk = ~clk;   // 200 MHz

  initial begin
    #40ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  // ---------------- mechanism counters ----------------
  int ev_queue = 0, ev_reject = 0, ev_loopback = 0, ev_jumpout = 0, ev_casfail = 0;
  int ev_local = 0, ev_remote = 0, ev_asyncfull = 0, ev_waitstall = 0, ev_timeout = 0;
  int ev_backpressure = 0, ev_collide = 0;
  always @(posedge clk) if (rst_n) begin
    if (&mp_busy && dut.queued != 0) ev_queue++;
    if (dut.rej_valid && dut.rej_ready) ev_reject++;
    if (dma_req_valid && dma_req_ready) ev_local++;
    if (rdma_req_valid && rdma_req_ready) ev_remote++;
    if (rsp_out_valid && !rsp_out_ready) ev_backpressure++;
    if (dma_rsp_valid && rdma_rsp_valid) ev_collide++;
  end
  for (genvar i = 0; i < 8; i++) begin : g_ev
    always @(posedge clk) if (rst_n) begin
      if (dut.g_mp[i].u_mp.ls_step && dut.g_mp[i].u_mp.ls_redirect) ev_loopback++;
      if (dut.g_mp[i].u_mp.ls_jump &&
          dut.g_mp[i].u_mp.u_loops.jump_depth != dut.g_mp[i].u_mp.ls_depth) ev_jumpout++;
      if (dut.g_mp[i].u_mp.state == 4'd7 && dut.g_mp[i].u_mp.at_full) ev_asyncfull++;
      if (dut.g_mp[i].u_mp.state == 4'd8 && !dut.g_mp[i].u_mp.ls_step) ev_waitstall++;
      if (dut.g_mp[i].u_mp.at_tmo) ev_timeout++;
    end
  end

  // ---------------- response collection ----------------
  resp_t   got [int];
  longint  t_issue [int], t_done [int];
  longint  now = 0;
  bit      stall_rsp = 0;
  always @(posedge clk) begin
    now++;
    if (rsp_out_valid && rsp_out_ready) begin
      if (got.exists(int'(rsp_out.ctag))) chk(0, "duplicate response");
      got[int'(rsp_out.ctag)] = rsp_out;
      t_done[int'(rsp_out.ctag)] = now;
    end
  end
  always @(negedge clk) rsp_out_ready = stall_rsp ? ($urandom_range(0, 3) == 0) : 1'b1;

  // ---------------- helpers ----------------
  task automatic put(int pc, logic [63:0] w);
    @(negedge clk);
    cfg_imem_we = 1; cfg_imem_addr = 10'(pc); cfg_imem_data = w;
    @(negedge clk);
    cfg_imem_we = 0;
  endtask
  task automatic reg_op(int id, int pc);
    @(negedge clk);
    cfg_op_we = 1; cfg_op_id = 8'(id); cfg_op_pc = 10'(pc); cfg_op_valid = 1;
    @(negedge clk);
    cfg_op_we = 0;
  endtask
  task automatic invoke(int id, int tag, logic [7:0][63:0] p);
    @(negedge clk);
    task_in.op_id = 8'(id); task_in.ctag = 16'(tag); task_in.params = p;
    task_valid = 1;
    @(posedge clk);
    while (!task_ready) @(posedge clk);
    t_issue[tag] = now;
    @(negedge clk);
    task_valid = 0;
  endtask
  task automatic wait_tag(int tag);
    int n;
    n = 0;
    while (!got.exists(tag) && n < 2000000) begin @(negedge clk); n++; end
    if (!got.exists(tag)) chk(0, $sformatf("no response for tag %0d", tag));
  endtask
  function automatic longint lat(int tag);
    return t_done[tag] - t_issue[tag];
  endfunction

  // ---------------- data set ----------------
  localparam longint GRAPH = 64'h0;        // region 1 on host 0
  localparam int     NNODES = 64;
  function automatic logic [63:0] node(int i);
    return uaddr(0, 1, 64 * i);
  endfunction
  function automatic int succ(int i);
    return (i * 7 + 3) % NNODES;
  endfunction

  // page table: 3 levels of 512 x 8-byte entries (regions 2..4), pages in region 5
  function automatic logic [63:0] pt_l1(); return uaddr(0, 2, 0); endfunction

  initial begin
    logic [7:0][63:0] p;
    int tag;
    cfg_imem_we = 0; cfg_op_we = 0; cfg_op_valid = 0; cfg_imem_addr = 0; cfg_op_pc = 0;
    cfg_imem_data = 0; cfg_op_id = 0; task_valid = 0; task_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- op 1: graph traversal at pc 0. r0 = start node, r1 = depth ----
    put(0, i_loopr(1, 1));
    put(1, i_load(0, 0, 0));          // node = node->neighbour[0]
    put(2, i_load(2, 0, 8));          // id of the final node
    put(3, i_ret(2));
    reg_op(1, 0);
    // ---- op 2: page-table walk at pc 10. r0 = VA, r1 = L1 base, r2 = client buffer ----
    begin
      int pc;
      pc = 10;
      for (int lv = 0; lv < 3; lv++) begin
        put(pc++, i_alui(ALU_SHR, 3, 0, 30 - 9 * lv));
        put(pc++, i_alui(ALU_AND, 3, 3, 511));
        put(pc++, i_alui(ALU_SHL, 3, 3, 3));
        put(pc++, i_alu(ALU_ADD, 3, 1, 3));
        put(pc++, i_load(1, 3, 0));      // next level base / page frame
      end
      put(pc++, i_alui(ALU_AND, 4, 0, 4095));
      put(pc++, i_alu(ALU_ADD, 4, 1, 4)); // physical address
      put(pc++, i_memcpy(2, 4, 64));      // data to the client
      put(pc++, i_wait(0));
      put(pc++, i_ret(4));
      reg_op(2, 10);
    end
    // ---- op 3: distributed lock at pc 40 (as in the MP test) ----
    put(40, i_alui(ALU_MOV, 8, 0, 1));
    put(41, i_alui(ALU_MOV, 9, 0, 0));
    put(42, i_loopi(200, 2));
    put(43, i_cas(10, 0, 9, 8));
    put(44, i_jumpi(JC_EQ, 10, 0, 1));
    put(45, i_reti(0, 1));
    put(46, i_load(11, 1));
    put(47, i_alu(ALU_ADD, 12, 11, 2));   // state += newVal (counts acquisitions)
    put(48, i_store(1, 12));
    put(49, i_memcpy(3, 1, 8));
    put(50, i_memcpy(4, 1, 8));
    put(51, i_wait(0));
    put(52, i_jumpi(JC_ERR, 0, 0, 2));
    put(53, i_store(0, 9));
    put(54, i_ret(11));
    put(55, i_store(0, 9));
    put(56, i_ret(11, 2));
    reg_op(3, 40);
    // ---- op 4: PagedAttention at pc 60. r0 = block table, r1 = nblocks, r2 = dst, r3 = block bytes ----
    put(60, i_loopr(1, 4));
    put(61, i_load(5, 0, 0));
    put(62, i_memcpy_r(2, 5, 3));
    put(63, i_alui(ALU_ADD, 0, 0, 8));
    put(64, i_alu(ALU_ADD, 2, 2, 3));
    put(65, i_wait(0));
    put(66, i_ret(1));
    reg_op(4, 60);
    // ---- op 5: MoE expert gather at pc 70. r0 = expert ids, r1 = table, r2 = k, r3 = dst, r4 = slab ----
    put(70, i_loopr(2, 7));
    put(71, i_load(5, 0, 0));
    put(72, i_alui(ALU_SHL, 5, 5, 3));
    put(73, i_alu(ALU_ADD, 6, 1, 5));
    put(74, i_load(6, 6, 0));
    put(75, i_memcpy_r(3, 6, 4));
    put(76, i_alui(ALU_ADD, 0, 0, 8));
    put(77, i_alu(ALU_ADD, 3, 3, 4));
    put(78, i_wait(0));
    put(79, i_ret(2));
    reg_op(5, 70);
    // ---- op 6: strided bulk copy at pc 90 (KV blocks at a fixed stride).
    //      r0 = src, r1 = count, r2 = dst, r3 = bytes: Memcpy issue is not
    //      paced by loads here, so more than 32 copies can be in flight ----
    put(90, i_loopr(1, 3));
    put(91, i_memcpy_r(2, 0, 3));
    put(92, i_alu(ALU_ADD, 0, 0, 3));
    put(93, i_alu(ALU_ADD, 2, 2, 3));
    put(94, i_wait(0));
    put(95, i_ret(1));
    reg_op(6, 90);

    // ---- memory contents ----
    for (int i = 0; i < NNODES; i++) begin
      mem.wr64(node(i), node(succ(i)));
      mem.wr64(node(i) + 8, 64'(1000 + i));
    end

    // ===== graph traversal: latency vs depth, alone =====
    begin
      longint l1, l10;
      for (int d = 1; d <= 10; d++) begin
        int n;
        n = 0;
        for (int k = 0; k < d; k++) n = succ(n);
        p = '0; p[0] = node(0); p[1] = 64'(d);
        tag = 100 + d;
        invoke(1, tag, p);
        wait_tag(tag);
        chk(got[tag].value == 64'(1000 + n) && got[tag].status == 0, $sformatf("graph depth %0d", d));
        $display("graph depth %2d: %0d cycles (%0d ns)", d, lat(tag), lat(tag) * 5);
      end
      l1 = lat(101); l10 = lat(110);
      chk(l10 - l1 == 9 * 155, $sformatf("graph per-hop cost %0d cycles", (l10 - l1) / 9));
      chk(l1 <= 2 * 155 + 20, "graph depth-1 latency");
    end

    // ===== graph traversal: 200 concurrent queries at depth 3 (throughput) =====
    begin
      longint t0, t1;
      t0 = now;
      fork
        for (int q = 0; q < 200; q++) begin
          p = '0; p[0] = node(q % NNODES); p[1] = 3;
          invoke(1, 1000 + q, p);
        end
      join
      for (int q = 0; q < 200; q++) begin
        int n;
        n = q % NNODES;
        for (int k = 0; k < 3; k++) n = succ(n);
        wait_tag(1000 + q);
        chk(got[1000 + q].value == 64'(1000 + n), $sformatf("graph query %0d", q));
      end
      t1 = now;
      $display("graph d=3: 200 queries in %0d cycles = %0.2f Mops at 200 MHz",
               t1 - t0, 200.0 * 200.0 / real'(t1 - t0));
      chk((t1 - t0) < 200 * (4 * 160) / 8 + 1000, "graph d=3 throughput uses all 8 MPs");
    end

    // ===== page-table walk =====
    begin
      logic [63:0] va, l2, l3, pg;
      for (int w = 0; w < 8; w++) begin
        int i1, i2, i3, off;
        i1 = $urandom_range(0, 511); i2 = $urandom_range(0, 511); i3 = $urandom_range(0, 511);
        off = 8 * $urandom_range(0, 500);
        va = {25'd0, 9'(i1), 9'(i2), 9'(i3), 12'(off)};
        l2 = uaddr(0, 3, 4096 * w); l3 = uaddr(0, 4, 4096 * w); pg = uaddr(0, 5, 4096 * (w + 10));
        mem.wr64(pt_l1() + 8 * i1, l2);
        mem.wr64(l2 + 8 * i2, l3);
        mem.wr64(l3 + 8 * i3, pg);
        for (int k = 0; k < 8; k++) mem.wr64(pg + off + 8 * k, 64'(w * 100 + k));
        p = '0; p[0] = va; p[1] = pt_l1(); p[2] = uaddr(1, 1, 256 * w);
        tag = 2000 + w;
        invoke(2, tag, p);
        wait_tag(tag);
        chk(got[tag].value == pg + off, "page walk physical address");
        for (int k = 0; k < 8; k++)
          chk(mem.rd64(uaddr(1, 1, 256 * w) + 8 * k) == 64'(w * 100 + k), "page walk data at client");
        if (w == 0) $display("page walk: %0d cycles", lat(tag));
        // 3 dependent loads + 14 compute ops (3 cycles each) + one remote copy
        chk(lat(tag) >= 3 * 155 + 14 * 3 + 500 && lat(tag) <= 3 * 155 + 14 * 3 + 500 + 30,
            $sformatf("page walk latency %0d", lat(tag)));
      end
    end

    // ===== distributed lock: 16 contending clients =====
    begin
      int ok, fail;
      mem.wr64(uaddr(0, 6, 0), 0);
      mem.wr64(uaddr(0, 6, 8), 0);
      stall_rsp = 1;
      fork
        for (int c = 0; c < 16; c++) begin
          p = '0; p[0] = uaddr(0, 6, 0); p[1] = uaddr(0, 6, 8); p[2] = 1;
          p[3] = uaddr(1, 6, 8); p[4] = uaddr(2, 6, 8);
          invoke(3, 3000 + c, p);
        end
      join
      ok = 0; fail = 0;
      for (int c = 0; c < 16; c++) begin
        wait_tag(3000 + c);
        if (got[3000 + c].status == 0) ok++; else fail++;
      end
      stall_rsp = 0;
      chk(ok == 16, $sformatf("all 16 lock clients acquire (ok=%0d fail=%0d)", ok, fail));
      chk(mem.rd64(uaddr(0, 6, 8)) == 64'(ok), "lock state counts acquisitions");
      chk(mem.rd64(uaddr(1, 6, 8)) == 64'(ok) && mem.rd64(uaddr(2, 6, 8)) == 64'(ok),
          "replicas hold the final state");
      chk(mem.rd64(uaddr(0, 6, 0)) == 0, "latch released");
      // uncontended latency, then a dead replica
      p = '0; p[0] = uaddr(0, 6, 0); p[1] = uaddr(0, 6, 8); p[2] = 1;
      p[3] = uaddr(1, 6, 8); p[4] = uaddr(2, 6, 8);
      invoke(3, 3100, p);
      wait_tag(3100);
      $display("lock uncontended: %0d cycles", lat(3100));
      chk(got[3100].status == 0 && lat(3100) < 2 * 160 + 500 + 4 * 160 && lat(3100) > 500,
          "lock uncontended latency: one remote round trip");
      p[4] = uaddr(9, 6, 8);
      invoke(3, 3101, p);
      wait_tag(3101);
      chk(got[3101].status == 2, "lock with failed replica returns error status");
      chk(mem.rd64(uaddr(0, 6, 0)) == 0, "latch released after error");
      // held latch: bounded retries then FAIL
      mem.wr64(uaddr(0, 6, 0), 1);
      invoke(3, 3102, p);
      wait_tag(3102);
      chk(got[3102].status == 1, "lock held: FAIL after bounded retries");
      mem.wr64(uaddr(0, 6, 0), 0);
    end

    // ===== PagedAttention: 40 blocks of 8 KB =====
    begin
      int nb, bs;
      nb = 40; bs = 8192;
      for (int b = 0; b < nb; b++) begin
        logic [63:0] pb;
        pb = uaddr(0, 7, 64'((b * 37 % nb) * bs));
        mem.wr64(uaddr(0, 8, 8 * b), pb);
        for (int k = 0; k < bs / 8; k += 127) mem.wr64(pb + 8 * k, 64'(b * 100000 + k));
      end
      p = '0; p[0] = uaddr(0, 8, 0); p[1] = 64'(nb); p[2] = uaddr(1, 7, 0); p[3] = 64'(bs);
      invoke(4, 4000, p);
      wait_tag(4000);
      chk(got[4000].value == 64'(nb), "paged attention returns block count");
      for (int b = 0; b < nb; b++)
        for (int k = 0; k < bs / 8; k += 127)
          chk(mem.rd64(uaddr(1, 7, 64'(b * bs + 8 * k))) == 64'(b * 100000 + k),
              $sformatf("KV block %0d word %0d", b, k));
      $display("paged attention %0d x %0d B: %0d cycles", nb, bs, lat(4000));
    end

    // ===== MoE expert gather: 32 experts of 8 KB =====
    begin
      int k;
      k = 32;
      for (int e = 0; e < 64; e++) mem.wr64(uaddr(0, 9, 8 * e), uaddr(0, 10, 64'(e * 8192)));
      for (int j = 0; j < k; j++) begin
        int e;
        e = (j * 5 + 1) % 64;
        mem.wr64(uaddr(0, 11, 8 * j), 64'(e));
        mem.wr64(uaddr(0, 10, 64'(e * 8192 + 8)), 64'(7000 + e));
      end
      p = '0; p[0] = uaddr(0, 11, 0); p[1] = uaddr(0, 9, 0); p[2] = 64'(k);
      p[3] = uaddr(1, 8, 0); p[4] = 8192;
      invoke(5, 5000, p);
      wait_tag(5000);
      chk(got[5000].value == 64'(k), "MoE returns expert count");
      for (int j = 0; j < k; j++)
        chk(mem.rd64(uaddr(1, 8, 64'(j * 8192 + 8))) == 64'(7000 + (j * 5 + 1) % 64),
            $sformatf("expert slab %0d", j));
      $display("MoE gather %0d experts: %0d cycles", k, lat(5000));
    end

    // ===== strided bulk copy: 48 x 64 B, exhausts the 32 async slots =====
    for (int b = 0; b < 48; b++) mem.wr64(uaddr(0, 12, 64 * b), 64'(b + 55));
    p = '0; p[0] = uaddr(0, 12, 0); p[1] = 48; p[2] = uaddr(1, 12, 0); p[3] = 64;
    invoke(6, 5500, p);
    wait_tag(5500);
    for (int b = 0; b < 48; b++)
      chk(mem.rd64(uaddr(1, 12, 64 * b)) == 64'(b + 55), "bulk copy data");
    $display("bulk copy 48 x 64 B: %0d cycles", lat(5500));
    chk(lat(5500) >= 2 * 500 && lat(5500) < 2 * 500 + 48 * 12, "bulk copy: two waves of 32 slots");

    // ===== unregistered operator =====
    invoke(77, 6000, '0);
    wait_tag(6000);
    chk(got[6000].status == ST_NO_OP, "unregistered op rejected");

    repeat (10) @(negedge clk);
    $display("events: queue=%0d reject=%0d loopback=%0d jumpout=%0d local=%0d remote=%0d",
             ev_queue, ev_reject, ev_loopback, ev_jumpout, ev_local, ev_remote);
    $display("        asyncfull=%0d waitstall=%0d timeout=%0d backpressure=%0d collide=%0d",
             ev_asyncfull, ev_waitstall, ev_timeout, ev_backpressure, ev_collide);
    chk(ev_queue > 0, "tasks queued behind busy MPs");
    chk(ev_reject > 0, "rejection");
    chk(ev_loopback > 0, "loop-back");
    chk(ev_jumpout > 0, "jump out of a loop");
    chk(ev_local > 0 && ev_remote > 0, "local and remote routing");
    chk(ev_asyncfull > 0, "async slots exhausted");
    chk(ev_waitstall > 0, "Wait stall");
    chk(ev_timeout > 0, "async timeout");
    chk(ev_backpressure > 0, "response back-pressure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
