// tiara_alu: the memory processor's integer ALU.
//
// Purely combinational. It computes the ComputeOp result (add, subtract,
// and/or/xor, shifts, signed/unsigned set-less-than, move and move-high)
// used for address arithmetic, and in parallel evaluates a Jump condition
// on the same two operands. The ISA's published description asks only for
// "integer arithmetic, logical and shift" operations; the exact operation
// list, the 6-bit shift amount and the lack of a multiplier are this
// design's choices. Interface: op/a/b in, y out; jc/err in, take out.
module tiara_alu
  import tiara_pkg::*;
#(
  parameter int unsigned W = XLEN
) (
  input  alu_op_e      op,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] y,
  input  jcond_e       jc,
  input  logic         err,   // task's async error flag
  output logic         take
);
  localparam int unsigned SH_W = $clog2(W);
  logic [SH_W-1:0] sh;
  assign sh = b[SH_W-1:0];

  always_comb begin
    unique case (op)
      ALU_ADD:   y = a + b;
      ALU_SUB:   y = a - b;
      ALU_AND:   y = a & b;
      ALU_OR:    y = a | b;
      ALU_XOR:   y = a ^ b;
      ALU_SHL:   y = a << sh;
      ALU_SHR:   y = a >> sh;
      ALU_SRA:   y = W'($signed(a) >>> sh);
      ALU_SLT:   y = W'($signed(a) < $signed(b));
      ALU_SLTU:  y = W'(a < b);
      ALU_MOV:   y = b;
      ALU_MOVHI: y = {b[W/2-1:0], a[W/2-1:0]};
      default:   y = '0;
    endcase
  end

  always_comb begin
    unique case (jc)
      JC_ALWAYS: take = 1'b1;
      JC_EQ:     take = (a == b);
      JC_NE:     take = (a != b);
      JC_LTU:    take = (a < b);
      JC_GEU:    take = (a >= b);
      JC_LT:     take = ($signed(a) < $signed(b));
      JC_GE:     take = ($signed(a) >= $signed(b));
      JC_ERR:    take = err;
      JC_NOERR:  take = !err;
      default:   take = 1'b0;
    endcase
  end
endmodule
