// tb_extender: self-checking test of the immediate generator.
// Random immediates are encoded into instructions by the assembler helpers
// and must come back unchanged, sign-extended, for every format.
module tb_extender;
  import izhi_pkg::*;
  import rv_asm_pkg::*;
  logic [31:0] instr, imm;
  imm_e imm_type;
  int checks = 0, failures = 0;

  extender dut (.instr, .imm_type, .imm);

  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(imm_e t, logic [31:0] ins, int exp);
    imm_type = t; instr = ins; #1;
    checks++;
    if (imm !== 32'(exp)) begin failures++; $display("FAIL type %0d imm %h exp %h", t, imm, exp); end
  endtask

  initial begin
    for (int i = 0; i < 300; i++) begin
      int v12, v13, v21, v20;
      v12 = $signed(12'($urandom));
      v13 = $signed({12'($urandom), 1'b0});
      v21 = $signed({20'($urandom), 1'b0});
      v20 = $urandom_range(0, 32'hFFFFF);
      chk(IMM_I, ADDI(1, 2, v12), v12);
      chk(IMM_S, SW(3, 4, v12), v12);
      chk(IMM_B, BEQ(5, 6, v13), v13);
      chk(IMM_J, JAL(1, v21), v21);
      chk(IMM_U, LUI(1, v20), v20 << 12);
      chk(IMM_NONE, NMPN(1, 2, 3), 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
