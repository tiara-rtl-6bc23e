// tiara_dispatcher: the task dispatcher with its op_id -> start_pc table.
//
// Incoming invocations (operator id, opaque caller tag, 8 parameters) are
// queued in 96 task slots (8 MPs x 12 outstanding tasks, the published
// sizing). The head of the queue is looked up in the 256-entry operator
// table (one cycle), then handed to an idle memory processor; idle MPs are
// chosen round-robin, so the dispatcher is work-conserving but not weighted,
// as published. A task whose op_id is not registered is answered at once
// with status ST_NO_OP through the rejection port (this design's choice).
// Interface: task_* in (valid/ready), mp_valid[i]/mp_ready[i] with one
// shared mp_task bus, rej_* out, cfg_* writes into the operator table.
// Timing: a task at the queue head reaches an idle MP two cycles after it
// is written, and one task leaves per cycle.
module tiara_dispatcher
  import tiara_pkg::*;
#(
  parameter int unsigned NMP   = NUM_MP,
  parameter int unsigned SLOTS = DISP_SLOTS
) (
  input  logic              clk,
  input  logic              rst_n,
  // invocations from the RDMA engine
  input  logic              task_valid,
  output logic              task_ready,
  input  task_t             task_in,
  // operator table registration
  input  logic              cfg_op_we,
  input  logic [OPID_W-1:0] cfg_op_id,
  input  logic              cfg_op_valid,
  input  logic [PC_W-1:0]   cfg_op_pc,
  // to the memory processors
  output logic [NMP-1:0]    mp_valid,
  input  logic [NMP-1:0]    mp_ready,
  output mp_task_t          mp_task,
  // rejections of unregistered operators
  output logic              rej_valid,
  input  logic              rej_ready,
  output resp_t             rej,
  output logic [$clog2(SLOTS+1)-1:0] queued
);
  // ---- task slots ----
  logic  q_valid, q_ready;
  task_t q_task;
  tiara_fifo #(.W(TASK_W), .DEPTH(SLOTS)) u_slots (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (task_valid),
    .in_ready  (task_ready),
    .in        (task_in),
    .out_valid (q_valid),
    .out_ready (q_ready),
    .out       (q_task),
    .count     (queued)
  );

  // ---- lookup stage ----
  logic            s1_valid, s1_done;
  task_t           s1_task;
  logic            hit;
  logic [PC_W-1:0] start_pc;

  assign q_ready = q_valid && (!s1_valid || s1_done);

  tiara_op_table u_table (
    .clk       (clk),
    .rst_n     (rst_n),
    .cfg_we    (cfg_op_we),
    .cfg_op    (cfg_op_id),
    .cfg_valid (cfg_op_valid),
    .cfg_pc    (cfg_op_pc),
    .lookup    (q_ready),
    .op        (q_task.op_id),
    .hit       (hit),
    .start_pc  (start_pc)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_task  <= '0;
    end else begin
      if (q_ready) begin
        s1_valid <= 1'b1;
        s1_task  <= q_task;
      end else if (s1_done) begin
        s1_valid <= 1'b0;
      end
    end
  end

  // ---- hand-off to an idle MP ----
  logic [NMP-1:0]         gnt;
  logic [$clog2(NMP)-1:0] gnt_idx;
  logic                   go;
  assign go = s1_valid && hit && |mp_ready;

  tiara_rr_arb #(.N(NMP)) u_pick (
    .clk     (clk),
    .rst_n   (rst_n),
    .req     (mp_ready & {NMP{s1_valid && hit}}),
    .advance (go),
    .gnt     (gnt),
    .gnt_idx (gnt_idx)
  );

  assign mp_valid         = go ? gnt : '0;
  assign mp_task.start_pc = start_pc;
  assign mp_task.ctag     = s1_task.ctag;
  assign mp_task.params   = s1_task.params;

  assign rej_valid  = s1_valid && !hit;
  assign rej.ctag   = s1_task.ctag;
  assign rej.status = ST_NO_OP;
  assign rej.value  = XLEN'(s1_task.op_id);

  assign s1_done = go || (rej_valid && rej_ready);

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(mp_valid));
endmodule
