// tiara_mem_model: behavioural model of everything behind the memory router.
//
// Not synthesizable; testbench only. It stands in for the PCIe DMA engine
// with host DRAM (dma_* port, DMA_LAT cycles) and for the RDMA engine with
// the remote hosts' memories (rdma_* port, RDMA_LAT cycles, one network
// round trip). All memories are one sparse array of 64-bit words indexed by
// the full unified address, so a Memcpy between hosts is a word copy.
// Each port accepts one request per cycle, performs it at once (so atomics
// are ordered) and returns the response after the port's latency, in order.
// Requests to host DEAD_HOST are swallowed: they never complete, which is
// how a failed replica is modelled. Counters expose how many requests each
// port took. LINK_BPC, when not 0, limits each port's Memcpy data to that
// many bytes per cycle: copies on one port are sent back to back, and a
// copy's response comes LAT cycles after its last byte has left. While rst_n is low the model drops both queues and ignores
// the request ports, whose values are not yet defined.
module tiara_mem_model
  import tiara_pkg::*;
#(
  parameter int unsigned DMA_LAT   = 150,
  parameter int unsigned RDMA_LAT  = 500,
  parameter int          DEAD_HOST = -1,
  parameter int unsigned LINK_BPC  = 0
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     dma_req_valid,
  output logic     dma_req_ready,
  input  mem_req_t dma_req,
  output logic     dma_rsp_valid,
  input  logic     dma_rsp_ready,
  output mem_rsp_t dma_rsp,
  input  logic     rdma_req_valid,
  output logic     rdma_req_ready,
  input  mem_req_t rdma_req,
  output logic     rdma_rsp_valid,
  input  logic     rdma_rsp_ready,
  output mem_rsp_t rdma_rsp
);
  logic [63:0] mem [logic [63:0]];
  longint unsigned now = 0;
  longint unsigned dma_free = 0, rdma_free = 0;   // cycle each port's link is next idle
  int dma_count = 0, rdma_count = 0, copy_bytes = 0;

  typedef struct { longint unsigned due; mem_rsp_t r; } pend_t;
  pend_t dq[$], rq[$];

  function automatic logic [63:0] rd64(logic [63:0] a);
    logic [63:0] k;
    k = {a[63:3], 3'b000};
    return mem.exists(k) ? mem[k] : 64'd0;
  endfunction
  function automatic void wr64(logic [63:0] a, logic [63:0] d);
    mem[{a[63:3], 3'b000}] = d;
  endfunction

  // Cycle at which a request's response is due on a port whose link is
  // next idle at 'free'; moves 'free' past a copy's data.
  function automatic longint unsigned due_at(mem_req_t q, int unsigned lat,
                                             ref longint unsigned free);
    if (LINK_BPC == 0 || q.op != MEM_COPY) return now + lat;
    if (free < now) free = now;
    free += (q.wdata + LINK_BPC - 1) / LINK_BPC;
    return free + lat;
  endfunction

  function automatic mem_rsp_t perform(mem_req_t q);
    mem_rsp_t r;
    logic [63:0] old;
    r.mp = q.mp; r.async = q.async; r.tag = q.tag; r.err = 1'b0; r.data = '0;
    case (q.op)
      MEM_LOAD:  r.data = rd64(q.addr);
      MEM_STORE: wr64(q.addr, q.wdata);
      MEM_CAS: begin
        old = rd64(q.addr); r.data = old;
        if (old == q.cmp) wr64(q.addr, q.wdata);
      end
      MEM_CAA: begin
        old = rd64(q.addr); r.data = old;
        if (old == q.cmp) wr64(q.addr, old + q.wdata);
      end
      MEM_COPY: begin
        for (longint unsigned b = 0; b < q.wdata; b += 8) wr64(q.addr + b, rd64(q.src + b));
        copy_bytes += int'(q.wdata);
      end
      default: r.err = 1'b1;
    endcase
    return r;
  endfunction

  assign dma_req_ready  = 1'b1;
  assign rdma_req_ready = 1'b1;
  assign dma_rsp_valid  = dq.size() > 0 && dq[0].due <= now;
  assign rdma_rsp_valid = rq.size() > 0 && rq[0].due <= now;
  assign dma_rsp        = dq.size() > 0 ? dq[0].r : '0;
  assign rdma_rsp       = rq.size() > 0 ? rq[0].r : '0;

  always @(posedge clk) begin
    if (!rst_n) begin
      dq.delete();
      rq.delete();
    end else begin
      if (dma_rsp_valid && dma_rsp_ready)   void'(dq.pop_front());
      if (rdma_rsp_valid && rdma_rsp_ready) void'(rq.pop_front());
      if (dma_req_valid) begin
        pend_t p;
        p.r = perform(dma_req); p.due = due_at(dma_req, DMA_LAT, dma_free);
        dq.push_back(p);
        dma_count++;
      end
      if (rdma_req_valid) begin
        pend_t p;
        bit dead;
        dead = DEAD_HOST >= 0 && (int'(addr_host(rdma_req.addr)) == DEAD_HOST ||
                (rdma_req.op == MEM_COPY && int'(addr_host(rdma_req.src)) == DEAD_HOST));
        p.r = perform(rdma_req); p.due = due_at(rdma_req, RDMA_LAT, rdma_free);
        if (!dead) rq.push_back(p);
        rdma_count++;
      end
    end
    now++;
  end
endmodule
