// tiara_top: the Tiara execution engine of a memory-side NIC.
//
// Remote clients invoke pre-registered operators with one message each; the
// engine runs the operator next to host memory and returns one response, so
// chains of dependent remote reads (pointer chasing, page-table walks, block
// table lookups, lock-then-replicate) cost one network round trip.
//
//   task_* --> tiara_dispatcher (96 slots, op_id -> start_pc table)
//                 |  one task per idle MP
//                 v
//              8 x tiara_mp  (regs, ALU, loop stack, async tracker, istore)
//                 |  Load/Store/CAS/CAA/Memcpy
//                 v
//              tiara_mem_router --host_id == local--> dma_*  (PCIe DMA engine)
//                               --otherwise---------> rdma_* (RDMA engine)
//   rsp_out_* <-- tiara_resp_arb <-- Ret of each MP, rejections of the dispatcher
//
// The RDMA engine, the PCIe DMA engine and host memory are outside this
// module (the published prototype reuses an existing NIC stack for them);
// their interfaces are the ports below. Operators are registered through
// cfg_*: instruction words are written into all eight instruction stores
// at once and cfg_op_* binds an operator id to its start address.
// Everything here is synchronous to one clock (200 MHz in the prototype)
// with an active-low asynchronous reset.
module tiara_top
  import tiara_pkg::*;
#(
  parameter int unsigned       NMP           = NUM_MP,
  parameter logic [HOST_W-1:0] LOCAL_HOST_ID = '0
) (
  input  logic              clk,
  input  logic              rst_n,
  // registration (host over PCIe)
  input  logic              cfg_imem_we,
  input  logic [PC_W-1:0]   cfg_imem_addr,
  input  logic [IW-1:0]     cfg_imem_data,
  input  logic              cfg_op_we,
  input  logic [OPID_W-1:0] cfg_op_id,
  input  logic              cfg_op_valid,
  input  logic [PC_W-1:0]   cfg_op_pc,
  // invocations in / responses out (RDMA engine)
  input  logic              task_valid,
  output logic              task_ready,
  input  task_t             task_in,
  output logic              rsp_out_valid,
  input  logic              rsp_out_ready,
  output resp_t             rsp_out,
  // PCIe DMA engine
  output logic              dma_req_valid,
  input  logic              dma_req_ready,
  output mem_req_t          dma_req,
  input  logic              dma_rsp_valid,
  output logic              dma_rsp_ready,
  input  mem_rsp_t          dma_rsp,
  // RDMA engine, remote memory accesses
  output logic              rdma_req_valid,
  input  logic              rdma_req_ready,
  output mem_req_t          rdma_req,
  input  logic              rdma_rsp_valid,
  output logic              rdma_rsp_ready,
  input  mem_rsp_t          rdma_rsp,
  // status
  output logic [NMP-1:0]    mp_busy
);
  logic     [NMP-1:0] d_valid, d_ready;
  mp_task_t           d_task;
  logic               rej_valid, rej_ready;
  resp_t              rej;
  logic [$clog2(DISP_SLOTS+1)-1:0] queued;

  tiara_dispatcher #(.NMP(NMP)) u_disp (
    .clk          (clk),
    .rst_n        (rst_n),
    .task_valid   (task_valid),
    .task_ready   (task_ready),
    .task_in      (task_in),
    .cfg_op_we    (cfg_op_we),
    .cfg_op_id    (cfg_op_id),
    .cfg_op_valid (cfg_op_valid),
    .cfg_op_pc    (cfg_op_pc),
    .mp_valid     (d_valid),
    .mp_ready     (d_ready),
    .mp_task      (d_task),
    .rej_valid    (rej_valid),
    .rej_ready    (rej_ready),
    .rej          (rej),
    .queued       (queued)
  );

  logic     [NMP-1:0] m_req_valid, m_req_ready, m_rsp_valid;
  mem_req_t [NMP-1:0] m_req;
  mem_rsp_t           m_rsp;
  logic     [NMP:0]   r_valid, r_ready;
  resp_t    [NMP:0]   r_data;

  for (genvar i = 0; i < NMP; i++) begin : g_mp
    tiara_mp #(.MP_ID(i)) u_mp (
      .clk        (clk),
      .rst_n      (rst_n),
      .imem_we    (cfg_imem_we),
      .imem_waddr (cfg_imem_addr),
      .imem_wdata (cfg_imem_data),
      .task_valid (d_valid[i]),
      .task_ready (d_ready[i]),
      .task_in    (d_task),
      .req_valid  (m_req_valid[i]),
      .req_ready  (m_req_ready[i]),
      .req        (m_req[i]),
      .rsp_valid  (m_rsp_valid[i]),
      .rsp        (m_rsp),
      .resp_valid (r_valid[i]),
      .resp_ready (r_ready[i]),
      .resp       (r_data[i]),
      .busy       (mp_busy[i])
    );
  end

  assign r_valid[NMP] = rej_valid;
  assign r_data[NMP]  = rej;
  assign rej_ready    = r_ready[NMP];

  tiara_mem_router #(.NMP(NMP), .LOCAL_HOST_ID(LOCAL_HOST_ID)) u_router (
    .clk            (clk),
    .rst_n          (rst_n),
    .mp_req_valid   (m_req_valid),
    .mp_req_ready   (m_req_ready),
    .mp_req         (m_req),
    .mp_rsp_valid   (m_rsp_valid),
    .mp_rsp         (m_rsp),
    .dma_req_valid  (dma_req_valid),
    .dma_req_ready  (dma_req_ready),
    .dma_req        (dma_req),
    .dma_rsp_valid  (dma_rsp_valid),
    .dma_rsp_ready  (dma_rsp_ready),
    .dma_rsp        (dma_rsp),
    .rdma_req_valid (rdma_req_valid),
    .rdma_req_ready (rdma_req_ready),
    .rdma_req       (rdma_req),
    .rdma_rsp_valid (rdma_rsp_valid),
    .rdma_rsp_ready (rdma_rsp_ready),
    .rdma_rsp       (rdma_rsp)
  );

  tiara_resp_arb #(.N(NMP + 1)) u_resp (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (r_valid),
    .in_ready  (r_ready),
    .in        (r_data),
    .out_valid (rsp_out_valid),
    .out_ready (rsp_out_ready),
    .out       (rsp_out)
  );
endmodule
