// tiara_pkg: types and constants shared by the Tiara execution engine.
//
// The engine runs pre-registered "operators" (short programs) on eight
// memory processors (MPs) sitting on the memory-side NIC. This package holds
// the sizes that follow the published design (8 MPs, 16 x 64-bit registers,
// 1024-entry instruction store, 256 operator ids, depth-8 loop stack,
// 32 in-flight async ops, 96 dispatcher slots) and the formats that are this
// design's own choice, because the published description names the
// instructions but not their bit layout: the 64-bit instruction word, the
// packed unified address, the memory request/response records and the task
// and response messages.
package tiara_pkg;

  // ---------------- sizes (published values) ----------------
  localparam int unsigned NUM_MP        = 8;
  localparam int unsigned XLEN          = 64;
  localparam int unsigned NREGS         = 16;
  localparam int unsigned REG_W         = $clog2(NREGS);
  localparam int unsigned IMEM_DEPTH    = 1024;
  localparam int unsigned PC_W          = $clog2(IMEM_DEPTH);
  localparam int unsigned NUM_OPS       = 256;
  localparam int unsigned OPID_W        = $clog2(NUM_OPS);
  localparam int unsigned LOOP_DEPTH    = 8;
  localparam int unsigned ASYNC_SLOTS   = 32;
  localparam int unsigned DISP_SLOTS    = 96;
  localparam int unsigned NPARAMS       = 8;

  // ---------------- sizes (own choices) ----------------
  localparam int unsigned MPID_W        = 3;        // holds 0..NUM_MP-1
  localparam int unsigned ATAG_W        = 6;        // {generation, slot[4:0]}
  localparam int unsigned CTAG_W        = 16;       // opaque caller tag
  localparam int unsigned IW            = 64;       // instruction width
  localparam int unsigned ASYNC_TIMEOUT = 1 << 20;  // cycles (5.2 ms at 200 MHz)

  // Unified address: {host_id, region_id, offset}
  localparam int unsigned HOST_W   = 8;
  localparam int unsigned REGION_W = 8;
  localparam int unsigned OFFS_W   = 48;

  function automatic logic [HOST_W-1:0] addr_host(input logic [XLEN-1:0] a);
    return a[XLEN-1 -: HOST_W];
  endfunction

  // ---------------- instruction set ----------------
  typedef enum logic [3:0] {
    OP_LOAD    = 4'd0,   // rd  = mem[rs1 + imm]
    OP_STORE   = 4'd1,   // mem[rs1 + imm] = rs2
    OP_MEMCPY  = 4'd2,   // async copy dst=rs1, src=rs2, len = use_imm ? imm : rs3
    OP_CAS     = 4'd3,   // rd = old; if old == rs2 then mem = rs3
    OP_CAA     = 4'd4,   // rd = old; if old == rs2 then mem = old + rs3
    OP_JUMP    = 4'd5,   // if cond(rs1, B) pc += 1 + imm[31:16]  (forward only)
    OP_LOOP    = 4'd6,   // repeat next aux ops, M = use_imm ? imm : rs1 times
    OP_WAIT    = 4'd7,   // stall until in-flight <= (use_imm ? imm : rs1)
    OP_RET     = 4'd8,   // respond status=aux, value = use_imm ? imm : rs1
    OP_COMPUTE = 4'd9,   // rd = alu(func, rs1, use_imm ? sext(imm) : rs2)
    OP_NOP     = 4'd15
  } opcode_e;

  typedef enum logic [3:0] {
    ALU_ADD  = 4'd0,  ALU_SUB  = 4'd1,  ALU_AND  = 4'd2,  ALU_OR    = 4'd3,
    ALU_XOR  = 4'd4,  ALU_SHL  = 4'd5,  ALU_SHR  = 4'd6,  ALU_SRA   = 4'd7,
    ALU_SLT  = 4'd8,  ALU_SLTU = 4'd9,  ALU_MOV  = 4'd10, ALU_MOVHI = 4'd11
  } alu_op_e;

  typedef enum logic [3:0] {
    JC_ALWAYS = 4'd0, JC_EQ  = 4'd1, JC_NE  = 4'd2, JC_LTU = 4'd3,
    JC_GEU    = 4'd4, JC_LT  = 4'd5, JC_GE  = 4'd6, JC_ERR = 4'd7,
    JC_NOERR  = 4'd8
  } jcond_e;

  typedef struct packed {
    opcode_e          opcode;   // [63:60]
    logic [REG_W-1:0] rd;       // [59:56]
    logic [REG_W-1:0] rs1;      // [55:52]
    logic [REG_W-1:0] rs2;      // [51:48]
    logic [REG_W-1:0] rs3;      // [47:44]
    logic [3:0]       func;     // [43:40] alu_op_e / jcond_e
    logic             use_imm;  // [39]
    logic [6:0]       aux;      // [38:32] loop body length / ret status
    logic [31:0]      imm;      // [31:0]
  } instr_t;

  // Ret status codes
  localparam logic [7:0] ST_OK       = 8'd0;
  localparam logic [7:0] ST_NO_OP    = 8'hF0;  // op_id not registered
  localparam logic [7:0] ST_LOOP_OVF = 8'hF1;  // loop stack overflow
  localparam logic [7:0] ST_RUNAWAY  = 8'hF2;  // pc ran past the store

  // ---------------- memory interface ----------------
  typedef enum logic [2:0] {
    MEM_LOAD = 3'd0, MEM_STORE = 3'd1, MEM_CAS = 3'd2, MEM_CAA = 3'd3,
    MEM_COPY = 3'd4
  } mem_op_e;

  typedef struct packed {
    mem_op_e           op;
    logic [MPID_W-1:0] mp;      // filled in by the router
    logic              async;   // Memcpy completion goes to the async tracker
    logic [ATAG_W-1:0] tag;
    logic [XLEN-1:0]   addr;    // target address (Memcpy destination)
    logic [XLEN-1:0]   src;     // Memcpy source
    logic [XLEN-1:0]   wdata;   // store data / swap / add value / copy length
    logic [XLEN-1:0]   cmp;     // CAS/CAA compare value
  } mem_req_t;

  typedef struct packed {
    logic [MPID_W-1:0] mp;
    logic              async;
    logic [ATAG_W-1:0] tag;
    logic              err;
    logic [XLEN-1:0]   data;    // load data / old value
  } mem_rsp_t;

  // ---------------- task and response messages ----------------
  typedef struct packed {
    logic [OPID_W-1:0]            op_id;
    logic [CTAG_W-1:0]            ctag;
    logic [NPARAMS-1:0][XLEN-1:0] params;
  } task_t;

  typedef struct packed {
    logic [PC_W-1:0]              start_pc;
    logic [CTAG_W-1:0]            ctag;
    logic [NPARAMS-1:0][XLEN-1:0] params;
  } mp_task_t;

  typedef struct packed {
    logic [CTAG_W-1:0] ctag;
    logic [7:0]        status;
    logic [XLEN-1:0]   value;
  } resp_t;

  localparam int unsigned TASK_W   = $bits(task_t);
  localparam int unsigned RESP_W   = $bits(resp_t);

endpackage
