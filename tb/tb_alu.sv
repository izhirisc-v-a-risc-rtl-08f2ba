// tb_alu: self-checking test of the RV32IM ALU.
// Random and corner operands (0, -1, INT_MIN) for every operation; the
// expected result is computed in the testbench with 64-bit arithmetic and
// the RISC-V rules for division by zero and overflow.
module tb_alu;
  import izhi_pkg::*;
  alu_op_e op;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  alu dut (.*);

  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [31:0] corner();
    case ($urandom_range(0, 5))
      0: return 0; 1: return 32'hFFFF_FFFF; 2: return 32'h8000_0000; 3: return $urandom_range(0, 40);
      default: return $urandom;
    endcase
  endfunction

  function automatic logic [31:0] model(alu_op_e o, logic [31:0] x, logic [31:0] z);
    longint sx = longint'($signed(x)), sz = longint'($signed(z));
    longint ux = longint'({32'd0, x}), uz = longint'({32'd0, z});
    longint p;
    case (o)
      ALU_ADD:  return 32'(ux + uz);
      ALU_SUB:  return 32'(ux - uz);
      ALU_SLL:  return 32'(ux << z[4:0]);
      ALU_SLT:  return (sx < sz) ? 1 : 0;
      ALU_SLTU: return (ux < uz) ? 1 : 0;
      ALU_XOR:  return x ^ z;
      ALU_SRL:  return 32'(ux >> z[4:0]);
      ALU_SRA:  return 32'(sx >>> z[4:0]);
      ALU_OR:   return x | z;
      ALU_AND:  return x & z;
      ALU_MUL:  begin p = sx * sz; return p[31:0]; end
      ALU_MULH: begin p = sx * sz; return p[63:32]; end
      ALU_MULHSU: begin p = sx * uz; return p[63:32]; end
      ALU_MULHU: begin logic [63:0] q = 64'(ux) * 64'(uz); return q[63:32]; end
      ALU_DIV:  return (z == 0) ? 32'hFFFF_FFFF : 32'(sx / sz);
      ALU_DIVU: return (z == 0) ? 32'hFFFF_FFFF : 32'(ux / uz);
      ALU_REM:  return (z == 0) ? x : 32'(sx % sz);
      ALU_REMU: return (z == 0) ? x : 32'(ux % uz);
      default:  return z;
    endcase
  endfunction

  initial begin
    for (int i = 0; i < 6000; i++) begin
      op = alu_op_e'($urandom_range(0, 18));
      a = corner(); b = corner();
      #1;
      checks++;
      if (y !== model(op, a, b)) begin
        failures++; $display("FAIL op=%s a=%h b=%h y=%h exp=%h", op.name(), a, b, y, model(op, a, b));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
