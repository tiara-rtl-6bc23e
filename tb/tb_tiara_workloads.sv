// tb_tiara_workloads: the evaluated workloads swept over their sizes on the
// full engine (default parameters) behind the behavioural memory model.
//   - PagedAttention: 8 MB of KV data (one layer, 2048 tokens) fetched
//     through a block table at block sizes 1 KB .. 256 KB;
//   - MoE expert gather: k = 1 .. 32 experts of 8 KB;
//   - distributed lock: 1 .. 16 contending clients, mean acquire time;
//   - graph traversal: depth 1 .. 10.
// Every run checks its result and (sampled) the data delivered to the
// client, and the engine-side time against a cycle budget derived from the
// per-step costs: 155 cycles per dependent Load (150 memory + 5 pipeline),
// 3 cycles per ComputeOp/Jump/Loop, 4 per Memcpy issue, 500 per remote trip.
// The model's links carry 60 bytes per cycle (12 GB/s at 200 MHz), so the
// large-block PagedAttention runs are checked to reach that line rate.
module tb_tiara_workloads;
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
  // 100 GbE at an effective 12 GB/s and a 200 MHz clock: 60 bytes per cycle
  localparam int unsigned LINK_BPC = 60;
  tiara_mem_model #(.LINK_BPC(LINK_BPC)) mem (.*);
  always #2.5 clk = ~clk;

  initial begin
    #100ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $fflush();
    $finish;
  end

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  resp_t  got [int];
  longint t_issue [int], t_done [int];
  longint now = 0;
  always @(posedge clk) begin
    now++;
    if (rsp_out_valid) begin
      got[int'(rsp_out.ctag)] = rsp_out;
      t_done[int'(rsp_out.ctag)] = now;
    end
  end
  assign rsp_out_ready = 1'b1;

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
    while (!got.exists(tag) && n < 4000000) begin @(negedge clk); n++; end
    if (!got.exists(tag)) chk(0, $sformatf("no response for tag %0d", tag));
  endtask
  function automatic longint lat(int tag);
    return t_done[tag] - t_issue[tag];
  endfunction

  initial begin
    logic [7:0][63:0] p;
    int tag;
    cfg_imem_we = 0; cfg_op_we = 0; cfg_op_valid = 0; cfg_imem_addr = 0; cfg_op_pc = 0;
    cfg_imem_data = 0; cfg_op_id = 0; task_valid = 0; task_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    tag = 1;

    // graph: r0 = node, r1 = depth
    put(0, i_loopr(1, 1));
    put(1, i_load(0, 0, 0));
    put(2, i_ret(0));
    reg_op(1, 0);
    // lock: r0 latch, r1 state, r2 increment, r3/r4 replicas
    put(40, i_alui(ALU_MOV, 8, 0, 1));
    put(41, i_alui(ALU_MOV, 9, 0, 0));
    put(42, i_loopi(1000, 2));
    put(43, i_cas(10, 0, 9, 8));
    put(44, i_jumpi(JC_EQ, 10, 0, 1));
    put(45, i_reti(0, 1));
    put(46, i_load(11, 1));
    put(47, i_alu(ALU_ADD, 12, 11, 2));
    put(48, i_store(1, 12));
    put(49, i_memcpy(3, 1, 8));
    put(50, i_memcpy(4, 1, 8));
    put(51, i_wait(0));
    put(52, i_store(0, 9));
    put(53, i_ret(11));
    reg_op(3, 40);
    // PagedAttention: r0 table, r1 nblocks, r2 dst, r3 block bytes
    put(60, i_loopr(1, 4));
    put(61, i_load(5, 0, 0));
    put(62, i_memcpy_r(2, 5, 3));
    put(63, i_alui(ALU_ADD, 0, 0, 8));
    put(64, i_alu(ALU_ADD, 2, 2, 3));
    put(65, i_wait(0));
    put(66, i_ret(1));
    reg_op(4, 60);
    // MoE: r0 ids, r1 table, r2 k, r3 dst, r4 slab bytes
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

    // ===== graph traversal, depth 1..10 =====
    for (int i = 0; i < 16; i++) mem.wr64(uaddr(0, 1, 64 * i), uaddr(0, 1, 64 * ((i + 1) % 16)));
    for (int d = 1; d <= 10; d++) begin
      p = '0; p[0] = uaddr(0, 1, 0); p[1] = 64'(d);
      invoke(1, tag, p);
      wait_tag(tag);
      chk(got[tag].value == uaddr(0, 1, 64 * (d % 16)), "graph result");
      chk(lat(tag) == 10 + 155 * d, $sformatf("graph d=%0d: %0d cycles", d, lat(tag)));
      $display("graph   depth %2d : %6d cycles  %7.2f us", d, lat(tag), real'(lat(tag)) * 0.005); $fflush();
      tag++;
    end

    // ===== PagedAttention: 8 MB at block sizes 1 KB .. 256 KB =====
    for (int bs = 1024; bs <= 262144; bs *= 2) begin
      int nb;
      real gbs;
      nb = 8388608 / bs;
      for (int b = 0; b < nb; b++) begin
        logic [63:0] pb;
        pb = uaddr(0, 7, 64'((b * 37 % nb) * bs));
        mem.wr64(uaddr(0, 8, 8 * b), pb);
        mem.wr64(pb, 64'(bs + b));                 // first word of each block
      end
      p = '0; p[0] = uaddr(0, 8, 0); p[1] = 64'(nb); p[2] = uaddr(1, 7, 0); p[3] = 64'(bs);
      invoke(4, tag, p);
      wait_tag(tag);
      chk(got[tag].value == 64'(nb), "paged: block count");
      for (int b = 0; b < nb; b += (nb > 64 ? nb / 64 : 1))
        chk(mem.rd64(uaddr(1, 7, 64'(b * bs))) == 64'(bs + b), "paged: block data at client");
      // per block: Load 155 + Memcpy issue 4 + 2 ComputeOps 6 + loop overhead.
      // The link needs xfer cycles for the 8 MB; the last copy then takes a
      // network trip. Whichever of control and link is slower sets the time.
      begin
        longint xfer, ctl;
        xfer = 8388608 / LINK_BPC;
        ctl  = 155 * nb;
        chk(lat(tag) >= (ctl > xfer ? ctl : xfer) + 500 && lat(tag) <= 180 * nb + xfer + 600,
            $sformatf("paged %0d B: %0d cycles", bs, lat(tag)));
        // from 16 KB blocks on, resolving a block takes less time than its
        // transfer, so the link stays busy: within 5 % of line rate
        if (bs >= 16384)
          chk(lat(tag) <= xfer + xfer / 20 + 1000,
              $sformatf("paged %0d B: not at line rate, %0d cycles", bs, lat(tag)));
      end
      gbs = 8388608.0 / (real'(lat(tag)) * 5.0);
      $display("paged   block %6d B : %4d blocks %8d cycles  %6.2f GB/s", bs, nb, lat(tag), gbs); $fflush();
      tag++;
    end

    // ===== MoE expert gather, k = 1 .. 32 =====
    for (int e = 0; e < 64; e++) mem.wr64(uaddr(0, 9, 8 * e), uaddr(0, 10, 64'(e * 8192)));
    for (int e = 0; e < 64; e++) mem.wr64(uaddr(0, 10, 64'(e * 8192)), 64'(9000 + e));
    for (int k = 1; k <= 32; k *= 2) begin
      for (int j = 0; j < k; j++) mem.wr64(uaddr(0, 11, 8 * j), 64'((j * 5 + 1) % 64));
      p = '0; p[0] = uaddr(0, 11, 0); p[1] = uaddr(0, 9, 0); p[2] = 64'(k);
      p[3] = uaddr(1, 8, 0); p[4] = 8192;
      invoke(5, tag, p);
      wait_tag(tag);
      chk(got[tag].value == 64'(k), "moe count");
      for (int j = 0; j < k; j++)
        chk(mem.rd64(uaddr(1, 8, 64'(j * 8192))) == 64'(9000 + (j * 5 + 1) % 64), "moe slab");
      // two dependent Loads per expert; the slabs move while the next
      // expert resolves, so only the last slab's link time adds on
      chk(lat(tag) >= 2 * 155 * k + 500 &&
          lat(tag) <= 2 * 155 * k + 30 * k + 8192 / LINK_BPC + 600,
          $sformatf("moe k=%0d: %0d cycles", k, lat(tag)));
      $display("moe     k %2d : %6d cycles  %7.2f us", k, lat(tag), real'(lat(tag)) * 0.005); $fflush();
      tag++;
    end

    // ===== distributed lock, 1 .. 16 contending clients =====
    for (int n = 1; n <= 16; n *= 2) begin
      longint sum;
      int first;
      mem.wr64(uaddr(0, 6, 0), 0);
      mem.wr64(uaddr(0, 6, 8), 0);
      first = tag;
      fork
        for (int c = 0; c < n; c++) begin
          p = '0; p[0] = uaddr(0, 6, 0); p[1] = uaddr(0, 6, 8); p[2] = 1;
          p[3] = uaddr(1, 6, 8); p[4] = uaddr(2, 6, 8);
          invoke(3, first + c, p);
        end
      join
      sum = 0;
      for (int c = 0; c < n; c++) begin
        wait_tag(first + c);
        chk(got[first + c].status == 0, "lock acquired");
        sum += lat(first + c);
      end
      chk(mem.rd64(uaddr(0, 6, 8)) == 64'(n) && mem.rd64(uaddr(2, 6, 8)) == 64'(n),
          "lock: every client's update reached primary and replica");
      if (n == 1) chk(lat(first) >= 4 * 155 + 500 && lat(first) <= 4 * 155 + 500 + 60,
                      $sformatf("lock uncontended: %0d cycles", lat(first)));
      $display("lock    %2d clients : mean %6d cycles  %7.2f us", n, sum / n, real'(sum / n) * 0.005); $fflush();
      tag += n;
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $fflush();
    $finish;
  end
endmodule
