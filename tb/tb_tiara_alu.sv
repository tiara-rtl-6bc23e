// tb_tiara_alu: self-checking test of the ALU and the Jump-condition unit.
// Random and corner operands for every operation and condition, compared
// with a reference written with plain SystemVerilog operators on separate
// signed/unsigned copies of the operands.
module tb_tiara_alu;
  import tiara_pkg::*;
  int checks = 0, failures = 0;
  alu_op_e op; jcond_e jc;
  logic [63:0] a, b, y; logic err, take;

  tiara_alu dut (.op(op), .a(a), .b(b), .y(y), .jc(jc), .err(err), .take(take));

  function automatic logic [63:0] ref_y(alu_op_e o, logic [63:0] x, logic [63:0] z);
    longint sx, sz; int s;
    sx = x; sz = z; s = int'(z[5:0]);
    case (o)
      ALU_ADD: return x + z;       ALU_SUB: return x - z;
      ALU_AND: return x & z;       ALU_OR:  return x | z;
      ALU_XOR: return x ^ z;       ALU_SHL: return x << s;
      ALU_SHR: return x >> s;      ALU_SRA: return sx >>> s;
      ALU_SLT: return (sx < sz) ? 64'd1 : 64'd0;
      ALU_SLTU: return (x < z) ? 64'd1 : 64'd0;
      ALU_MOV: return z;
      ALU_MOVHI: return {z[31:0], x[31:0]};
      default: return 0;
    endcase
  endfunction
  function automatic bit ref_t(jcond_e c, logic [63:0] x, logic [63:0] z, bit e);
    longint sx, sz; sx = x; sz = z;
    case (c)
      JC_ALWAYS: return 1; JC_EQ: return x == z; JC_NE: return x != z;
      JC_LTU: return x < z; JC_GEU: return x >= z; JC_LT: return sx < sz;
      JC_GE: return sx >= sz; JC_ERR: return e; JC_NOERR: return !e;
      default: return 0;
    endcase
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] corners [6] = '{64'd0, 64'd1, 64'hFFFF_FFFF_FFFF_FFFF,
                                 64'h8000_0000_0000_0000, 64'h7FFF_FFFF_FFFF_FFFF, 64'd63};
    for (int it = 0; it < 3000; it++) begin
      a = (it % 5 == 0) ? corners[$urandom_range(0,5)] : {$urandom, $urandom};
      b = (it % 7 == 0) ? corners[$urandom_range(0,5)] : {$urandom, $urandom};
      if (it % 3 == 0) b = b[5:0];
      op = alu_op_e'($urandom_range(0, 11));
      jc = jcond_e'($urandom_range(0, 8));
      err = 1'($urandom);
      if (it % 11 == 0) b = a;
      #1;
      checks++;
      if (y !== ref_y(op, a, b)) begin
        failures++;
        if (failures < 10) $display("ALU mismatch op=%s a=%h b=%h y=%h", op.name(), a, b, y);
      end
      checks++;
      if (take !== ref_t(jc, a, b, err)) begin
        failures++;
        if (failures < 10) $display("COND mismatch jc=%s a=%h b=%h", jc.name(), a, b);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
