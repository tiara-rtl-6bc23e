// tb_tiara_mem_router: eight MPs issue random loads/stores/atomics/copies to
// local (host 0) and remote hosts. The test checks each request reaches the
// right engine (DMA for local, RDMA for remote, a copy only locally when
// both ends are local) with its 'mp' field intact, that responses from both
// engines, including same-cycle collisions, come back to the issuing MP,
// and that back-pressure from either engine holds requests.
module tb_tiara_mem_router;
  import tiara_pkg::*;
  localparam int NMP = 8, PER = 150;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [NMP-1:0] mp_req_valid, mp_req_ready, mp_rsp_valid;
  mem_req_t [NMP-1:0] mp_req;
  mem_rsp_t mp_rsp;
  logic dma_req_valid, dma_req_ready, dma_rsp_valid, dma_rsp_ready;
  logic rdma_req_valid, rdma_req_ready, rdma_rsp_valid, rdma_rsp_ready;
  mem_req_t dma_req, rdma_req;
  mem_rsp_t dma_rsp, rdma_rsp;
  int issued [NMP], answered [NMP];
  int n_dma = 0, n_rdma = 0, collisions = 0;
  mem_rsp_t dq[$], rq[$];

  tiara_mem_router dut (.*);
  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit is_local(mem_req_t q);
    if (q.op == MEM_COPY) return q.addr[63:56] == 0 && q.src[63:56] == 0;
    return q.addr[63:56] == 0;
  endfunction

  function automatic mem_req_t rnd_req(int i, int n);
    mem_req_t q;
    q.op = mem_op_e'($urandom_range(0, 4));
    q.mp = MPID_W'(i); q.async = (q.op == MEM_COPY); q.tag = 6'(n);
    q.addr = {($urandom_range(0, 1) ? 8'd0 : 8'($urandom_range(1, 5))), 56'($urandom)};
    q.src  = {($urandom_range(0, 1) ? 8'd0 : 8'($urandom_range(1, 5))), 56'($urandom)};
    q.wdata = 64'(n); q.cmp = {32'(i), 32'(n)};
    return q;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (dma_req_valid && dma_req_ready) begin
      mem_rsp_t r;
      checks++;
      if (!is_local(dma_req) || dma_req.cmp[63:32] != 32'(dma_req.mp)) failures++;
      r.mp = dma_req.mp; r.async = dma_req.async; r.tag = dma_req.tag; r.err = 0;
      r.data = dma_req.cmp; dq.push_back(r); n_dma++;
    end
    if (rdma_req_valid && rdma_req_ready) begin
      mem_rsp_t r;
      checks++;
      if (is_local(rdma_req) || rdma_req.cmp[63:32] != 32'(rdma_req.mp)) failures++;
      r.mp = rdma_req.mp; r.async = rdma_req.async; r.tag = rdma_req.tag; r.err = 0;
      r.data = rdma_req.cmp; rq.push_back(r); n_rdma++;
    end
    if (dma_rsp_valid && rdma_rsp_valid) collisions++;
    if (dma_rsp_valid && dma_rsp_ready) void'(dq.pop_front());
    if (rdma_rsp_valid && rdma_rsp_ready) void'(rq.pop_front());
    for (int i = 0; i < NMP; i++) begin
      if (mp_req_valid[i] && mp_req_ready[i]) issued[i]++;
      if (mp_rsp_valid[i]) begin
        checks++;
        if (mp_rsp.mp != MPID_W'(i) || mp_rsp.data[63:32] != 32'(i)) begin
          failures++;
          $display("response for mp %0d delivered to %0d", mp_rsp.mp, i);
        end
        answered[i]++;
      end
    end
    checks++;
    if ($countones(mp_rsp_valid) > 1) failures++;
  end

  always @(negedge clk) begin
    dma_req_ready  = ($urandom_range(0, 4) != 0);
    rdma_req_ready = ($urandom_range(0, 4) != 0);
    dma_rsp_valid  = dq.size() > 0 && $urandom_range(0, 1);
    rdma_rsp_valid = rq.size() > 0 && $urandom_range(0, 1);
    dma_rsp  = dq.size() > 0 ? dq[0] : '0;
    rdma_rsp = rq.size() > 0 ? rq[0] : '0;
    for (int i = 0; i < NMP; i++) begin
      if (mp_req_valid[i] && !mp_req_ready[i]) continue;   // hold
      mp_req_valid[i] = (issued[i] < PER) && $urandom_range(0, 1);
      mp_req[i] = rnd_req(i, issued[i]);
    end
  end

  initial begin
    mp_req_valid = '0; mp_req = '0; dma_rsp_valid = 0; rdma_rsp_valid = 0;
    dma_req_ready = 0; rdma_req_ready = 0; dma_rsp = '0; rdma_rsp = '0;
    for (int i = 0; i < NMP; i++) begin issued[i] = 0; answered[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (answered.sum() == NMP * PER);
    checks++;
    if (n_dma == 0 || n_rdma == 0 || collisions == 0) failures++;
    $display("dma=%0d rdma=%0d collisions=%0d", n_dma, n_rdma, collisions);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
