// tiara_mp: a Tiara memory processor (MP).
//
// A sequential scalar core that runs one task (one operator invocation) at a
// time: no cache, no branch prediction, no out-of-order issue. It holds a
// 16 x 64-bit register file, an integer ALU, a depth-8 loop stack, a 32-entry
// async-op tracker and a 1024-entry instruction store, which is what the
// published design puts in each MP. Control is an 11-state FSM (the count is
// published; the states below are this design's):
//
//   IDLE -> FETCH -> DECODE -> EXEC -+-> FETCH            (Compute, Jump, Loop)
//                                    +-> MEM_REQ -> MEM_WAIT -> WB -> FETCH
//                                    |              (Load, Store, CAS, CAA)
//                                    +-> ASYNC -> FETCH   (Memcpy)
//                                    +-> WAIT  -> FETCH   (Wait)
//                                    +-> RET -> DRAIN -> IDLE
//
// A synchronous memory op stalls fetch until its response is written back,
// so a Load's result is usable as the next Load's address with no hazard
// logic. Memcpy is issued asynchronously and only occupies a tracker slot;
// Wait(threshold) stalls until at most 'threshold' copies are in flight.
// After Ret the MP drains its in-flight copies (or lets them time out)
// before it takes the next task, so a late completion is never credited to
// the following task; that rule, acknowledged Stores and the instruction
// encoding (see tiara_pkg) are this design's choices.
//
// Interfaces (all valid/ready, one transfer per cycle):
//   task_*  from the dispatcher: start pc, caller tag, 8 parameters -> r0..r7
//   req_*   memory requests to the router, 'mp' field = MP_ID
//   rsp_*   responses from the router; always accepted
//   resp_*  Ret responses towards the caller
//   imem_*  registration write port of the instruction store
// Timing: a register-chained Load costs 5 cycles plus the memory latency.
module tiara_mp
  import tiara_pkg::*;
#(
  parameter int unsigned MP_ID      = 0,
  parameter int unsigned DEPTH      = IMEM_DEPTH,
  parameter int unsigned TIMEOUT    = ASYNC_TIMEOUT
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // instruction store registration
  input  logic                     imem_we,
  input  logic [$clog2(DEPTH)-1:0] imem_waddr,
  input  logic [IW-1:0]            imem_wdata,
  // task from dispatcher
  input  logic                     task_valid,
  output logic                     task_ready,
  input  mp_task_t                 task_in,
  // memory
  output logic                     req_valid,
  input  logic                     req_ready,
  output mem_req_t                 req,
  input  logic                     rsp_valid,
  input  mem_rsp_t                 rsp,
  // response to caller
  output logic                     resp_valid,
  input  logic                     resp_ready,
  output resp_t                    resp,
  // status
  output logic                     busy
);
  localparam int unsigned PW = $clog2(DEPTH);

  typedef enum logic [3:0] {
    S_IDLE, S_FETCH, S_DECODE, S_EXEC, S_MEM_REQ, S_MEM_WAIT, S_WB,
    S_ASYNC, S_WAIT, S_RET, S_DRAIN
  } state_e;

  state_e            state;
  logic [PW-1:0]     pc;
  instr_t            ir;
  logic [IW-1:0]     imem_rdata;
  logic [CTAG_W-1:0] ctag;
  mem_req_t          req_q;
  logic [XLEN-1:0]   rdata_q;

  // ---------------- instruction store ----------------
  tiara_istore #(.DEPTH(DEPTH), .W(IW)) u_istore (
    .clk   (clk),
    .we    (imem_we),
    .waddr (imem_waddr),
    .wdata (imem_wdata),
    .re    (state == S_FETCH),
    .raddr (pc),
    .rdata (imem_rdata)
  );

  // ---------------- register file ----------------
  logic            rf_we;
  logic [XLEN-1:0] rf_wdata, r1, r2, r3;
  tiara_regfile u_rf (
    .clk         (clk),
    .rst_n       (rst_n),
    .load_params (task_valid && task_ready),
    .params      (task_in.params),
    .we          (rf_we),
    .waddr       (ir.rd),
    .wdata       (rf_wdata),
    .ra1         (ir.rs1),
    .ra2         (ir.rs2),
    .ra3         (ir.rs3),
    .rd1         (r1),
    .rd2         (r2),
    .rd3         (r3)
  );

  // ---------------- ALU ----------------
  logic [XLEN-1:0] imm_sx, opb, alu_y;
  logic            jtake, async_err;
  assign imm_sx = XLEN'($signed(ir.imm));
  always_comb begin
    if (ir.opcode == OP_JUMP) opb = ir.use_imm ? XLEN'($signed(ir.imm[15:0])) : r2;
    else                      opb = ir.use_imm ? imm_sx : r2;
  end
  tiara_alu u_alu (
    .op   (alu_op_e'(ir.func)),
    .a    (r1),
    .b    (opb),
    .y    (alu_y),
    .jc   (jcond_e'(ir.func)),
    .err  (async_err),
    .take (jtake)
  );

  // ---------------- loop stack ----------------
  logic          ls_push, ls_step, ls_jump, ls_redirect, ls_ovf;
  logic [PW-1:0] ls_next;
  logic [PW:0]   jump_tgt, skip_tgt;
  logic [31:0]   loop_m;
  logic [$clog2(LOOP_DEPTH+1)-1:0] ls_depth;
  assign jump_tgt = {1'b0, pc} + (PW+1)'(1) + (PW+1)'(ir.imm[31:16]);
  assign skip_tgt = {1'b0, pc} + (PW+1)'(1) + (PW+1)'(ir.aux);
  assign loop_m   = ir.use_imm ? ir.imm : r1[31:0];
  logic [PW:0] jump_tgt_sel;
  assign jump_tgt_sel = (ir.opcode == OP_LOOP) ? skip_tgt : jump_tgt;

  tiara_loop_stack #(.PCW(PW)) u_loops (
    .clk         (clk),
    .rst_n       (rst_n),
    .clear       (task_valid && task_ready),
    .push        (ls_push),
    .push_start  (pc + PW'(1)),
    .push_end    (pc + PW'(ir.aux)),
    .push_count  (loop_m),
    .pc          (pc),
    .step        (ls_step),
    .next_pc     (ls_next),
    .redirect    (ls_redirect),
    .jump        (ls_jump),
    .jump_target (jump_tgt_sel),
    .overflow    (ls_ovf),
    .depth       (ls_depth)
  );

  // ---------------- async tracker ----------------
  localparam int unsigned ASW = $clog2(ASYNC_SLOTS) + 1;
  logic           at_alloc, at_full, at_tmo;
  logic [ASW-1:0] at_tag, at_count;
  tiara_async_tracker #(.TIMEOUT(TIMEOUT)) u_async (
    .clk         (clk),
    .rst_n       (rst_n),
    .clear       (task_valid && task_ready),
    .alloc       (at_alloc),
    .alloc_tag   (at_tag),
    .full        (at_full),
    .cpl         (rsp_valid && rsp.async),
    .cpl_tag     (rsp.tag),
    .cpl_err     (rsp.err),
    .count       (at_count),
    .err         (async_err),
    .timeout_evt (at_tmo)
  );

  // ---------------- control ----------------
  logic [31:0] wait_thr;
  logic        step_ok;   // sequential advance stays inside the store
  assign wait_thr = ir.use_imm ? ir.imm : r1[31:0];
  assign step_ok  = ls_redirect || pc != PW'(DEPTH - 1);

  assign task_ready = (state == S_IDLE);
  assign busy       = (state != S_IDLE);
  assign req_valid  = (state == S_MEM_REQ) || (state == S_ASYNC && !at_full);
  assign req        = (state == S_ASYNC) ? '{op: MEM_COPY, mp: MPID_W'(MP_ID), async: 1'b1,
                                             tag: at_tag, addr: req_q.addr, src: req_q.src,
                                             wdata: req_q.wdata, cmp: '0}
                                         : req_q;
  assign at_alloc   = (state == S_ASYNC) && req_ready && !at_full;
  assign resp_valid = (state == S_RET);

  // register write: Compute in EXEC, memory result in WB
  always_comb begin
    rf_we    = 1'b0;
    rf_wdata = alu_y;
    if (state == S_EXEC && ir.opcode == OP_COMPUTE) rf_we = 1'b1;
    if (state == S_WB && req_q.op != MEM_STORE) begin
      rf_we    = 1'b1;
      rf_wdata = rdata_q;
    end
  end

  // loop-stack strobes
  always_comb begin
    ls_push = 1'b0;
    ls_step = 1'b0;
    ls_jump = 1'b0;
    unique case (state)
      S_EXEC: begin
        unique case (ir.opcode)
          OP_JUMP: begin
            if (jtake) ls_jump = 1'b1;
            else       ls_step = 1'b1;
          end
          OP_LOOP: begin
            if (loop_m == 0 || ir.aux == 0) ls_jump = 1'b1;
            else                            ls_push = 1'b1;
          end
          OP_COMPUTE, OP_NOP: ls_step = 1'b1;
          default: ;
        endcase
      end
      S_WB:    ls_step = 1'b1;
      S_ASYNC: ls_step = req_ready && !at_full;
      S_WAIT:  ls_step = (32'(at_count) <= wait_thr);
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      pc      <= '0;
      ir      <= '0;
      ctag    <= '0;
      req_q   <= '0;
      rdata_q <= '0;
      resp    <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (task_valid) begin
          pc    <= task_in.start_pc[PW-1:0];
          ctag  <= task_in.ctag;
          state <= S_FETCH;
        end
        S_FETCH:  state <= S_DECODE;
        S_DECODE: begin
          ir    <= instr_t'(imem_rdata);
          state <= S_EXEC;
        end
        S_EXEC: begin
          state <= S_FETCH;
          unique case (ir.opcode)
            OP_COMPUTE, OP_NOP: begin
              if (step_ok) pc <= ls_next;
              else         state <= S_RET;
            end
            OP_JUMP: begin
              if (jtake) begin
                if (jump_tgt < (PW+1)'(DEPTH)) pc <= jump_tgt[PW-1:0];
                else                           state <= S_RET;
              end else if (step_ok) pc <= ls_next;
              else                  state <= S_RET;
            end
            OP_LOOP: begin
              if (loop_m == 0 || ir.aux == 0) begin
                if (skip_tgt < (PW+1)'(DEPTH)) pc <= skip_tgt[PW-1:0];
                else                           state <= S_RET;
              end else if (ls_depth == ($bits(ls_depth))'(LOOP_DEPTH) ||
                           pc == PW'(DEPTH - 1)) begin
                state <= S_RET;
              end else begin
                pc <= pc + PW'(1);
              end
            end
            OP_LOAD, OP_STORE, OP_CAS, OP_CAA: begin
              req_q.op    <= (ir.opcode == OP_LOAD)  ? MEM_LOAD  :
                             (ir.opcode == OP_STORE) ? MEM_STORE :
                             (ir.opcode == OP_CAS)   ? MEM_CAS   : MEM_CAA;
              req_q.mp    <= MPID_W'(MP_ID);
              req_q.async <= 1'b0;
              req_q.tag   <= '0;
              req_q.addr  <= r1 + imm_sx;
              req_q.src   <= '0;
              req_q.wdata <= (ir.opcode == OP_STORE) ? r2 : r3;
              req_q.cmp   <= r2;
              state       <= S_MEM_REQ;
            end
            OP_MEMCPY: begin
              req_q.addr  <= r1;
              req_q.src   <= r2;
              req_q.wdata <= ir.use_imm ? imm_sx : r3;
              state       <= S_ASYNC;
            end
            OP_WAIT: state <= S_WAIT;
            OP_RET: state <= S_RET;
            default: begin   // unknown opcode behaves as Nop
              if (step_ok) pc <= ls_next;
              else         state <= S_RET;
            end
          endcase
          // response for Ret and for the error exits above
          resp.ctag <= ctag;
          if (ir.opcode == OP_RET) begin
            resp.status <= {1'b0, ir.aux};
            resp.value  <= ir.use_imm ? imm_sx : r1;
          end else if (ir.opcode == OP_LOOP) begin
            resp.status <= ST_LOOP_OVF;
            resp.value  <= XLEN'(pc);
          end else begin
            resp.status <= ST_RUNAWAY;
            resp.value  <= XLEN'(pc);
          end
        end
        S_MEM_REQ: if (req_ready) state <= S_MEM_WAIT;
        S_MEM_WAIT: if (rsp_valid && !rsp.async) begin
          rdata_q <= rsp.data;
          state   <= S_WB;
        end
        S_WB: begin
          if (step_ok) begin
            pc    <= ls_next;
            state <= S_FETCH;
          end else begin
            resp.status <= ST_RUNAWAY;
            resp.value  <= XLEN'(pc);
            state       <= S_RET;
          end
        end
        S_ASYNC: if (req_ready && !at_full) begin
          if (step_ok) begin
            pc    <= ls_next;
            state <= S_FETCH;
          end else begin
            resp.status <= ST_RUNAWAY;
            resp.value  <= XLEN'(pc);
            state       <= S_RET;
          end
        end
        S_WAIT: if (32'(at_count) <= wait_thr) begin
          if (step_ok) begin
            pc    <= ls_next;
            state <= S_FETCH;
          end else begin
            resp.status <= ST_RUNAWAY;
            resp.value  <= XLEN'(pc);
            state       <= S_RET;
          end
        end
        S_RET:   if (resp_ready) state <= S_DRAIN;
        S_DRAIN: if (at_count == '0) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // a response for this MP's single synchronous request only while waiting
  assert property (@(posedge clk) disable iff (!rst_n)
                   rsp_valid && !rsp.async |-> state == S_MEM_WAIT);
  assert property (@(posedge clk) disable iff (!rst_n)
                   req_valid && !req_ready |=> req_valid && $stable(req.addr));
endmodule
