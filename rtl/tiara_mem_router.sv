// tiara_mem_router: device-id router between the MPs and the two memory paths.
//
// Requests from the NMP memory processors are arbitrated round-robin, one
// per cycle. The winner is routed by the host_id field of its unified
// address: accesses to this host go to the PCIe DMA engine, accesses to any
// other host to the RDMA engine (published rule). A Memcpy is local only if
// both its source and destination are on this host; otherwise the RDMA
// engine performs it as an RDMA Read (remote source) or Write (remote
// destination). Responses from the two engines carry the issuing MP's id
// and are steered back to it; when both engines answer in the same cycle the
// DMA engine goes first. The address packing, arbitration order and
// combinational (unregistered) routing are this design's choices.
module tiara_mem_router
  import tiara_pkg::*;
#(
  parameter int unsigned       NMP           = NUM_MP,
  parameter logic [HOST_W-1:0] LOCAL_HOST_ID = '0
) (
  input  logic                clk,
  input  logic                rst_n,
  // from the MPs
  input  logic     [NMP-1:0]  mp_req_valid,
  output logic     [NMP-1:0]  mp_req_ready,
  input  mem_req_t [NMP-1:0]  mp_req,
  output logic     [NMP-1:0]  mp_rsp_valid,
  output mem_rsp_t            mp_rsp,
  // PCIe DMA engine (local host memory)
  output logic                dma_req_valid,
  input  logic                dma_req_ready,
  output mem_req_t            dma_req,
  input  logic                dma_rsp_valid,
  output logic                dma_rsp_ready,
  input  mem_rsp_t            dma_rsp,
  // RDMA engine (remote hosts)
  output logic                rdma_req_valid,
  input  logic                rdma_req_ready,
  output mem_req_t            rdma_req,
  input  logic                rdma_rsp_valid,
  output logic                rdma_rsp_ready,
  input  mem_rsp_t            rdma_rsp
);
  logic [NMP-1:0]         gnt;
  logic [$clog2(NMP)-1:0] gnt_idx;
  mem_req_t               sel;
  logic                   any, local_q, accepted;

  assign any = |mp_req_valid;
  assign sel = mp_req[gnt_idx];

  always_comb begin
    if (sel.op == MEM_COPY)
      local_q = addr_host(sel.addr) == LOCAL_HOST_ID && addr_host(sel.src) == LOCAL_HOST_ID;
    else
      local_q = addr_host(sel.addr) == LOCAL_HOST_ID;
  end

  assign dma_req_valid  = any &&  local_q;
  assign rdma_req_valid = any && !local_q;
  assign dma_req        = sel;
  assign rdma_req       = sel;
  assign accepted       = local_q ? (dma_req_valid && dma_req_ready)
                                  : (rdma_req_valid && rdma_req_ready);
  assign mp_req_ready   = accepted ? gnt : '0;

  tiara_rr_arb #(.N(NMP)) u_arb (
    .clk     (clk),
    .rst_n   (rst_n),
    .req     (mp_req_valid),
    .advance (accepted),
    .gnt     (gnt),
    .gnt_idx (gnt_idx)
  );

  // ---- responses ----
  assign dma_rsp_ready  = 1'b1;
  assign rdma_rsp_ready = !dma_rsp_valid;
  assign mp_rsp         = dma_rsp_valid ? dma_rsp : rdma_rsp;

  always_comb begin
    mp_rsp_valid = '0;
    if (dma_rsp_valid || rdma_rsp_valid) mp_rsp_valid[mp_rsp.mp] = 1'b1;
  end
endmodule
