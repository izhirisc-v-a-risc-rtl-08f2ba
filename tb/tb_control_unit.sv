// tb_control_unit: self-checking test of the instruction decoder.
// Encodes instructions of every class (including the four neuromorphic ones)
// and checks the decoded fields against the values each instruction must
// produce.
module tb_control_unit;
  import izhi_pkg::*;
  import rv_asm_pkg::*;
  logic [31:0] instr;
  ctrl_t ctrl;
  int checks = 0, failures = 0;

  control_unit dut (.instr, .ctrl);

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic expect_(string name, logic [31:0] ins, logic rw, alu_op_e op, srca_e sa, srcb_e sb,
                         imm_e it, br_e bt, nm_op_e nm, logic mr, logic mw,
                         logic u1, logic u2, logic u3);
    instr = ins; #1;
    checks++;
    if (ctrl.reg_write !== rw || ctrl.src_a !== sa || ctrl.src_b !== sb || ctrl.imm_type !== it ||
        ctrl.br_type !== bt || ctrl.nm_op !== nm || ctrl.mem_read !== mr || ctrl.mem_write !== mw ||
        ctrl.use_rs1 !== u1 || ctrl.use_rs2 !== u2 || ctrl.use_rd !== u3 ||
        (op != ALU_ADD && ctrl.alu_op !== op)) begin
      failures++; $display("FAIL %s: %p", name, ctrl);
    end
    checks++;
    if (ctrl.rd !== ins[11:7] || ctrl.rs1 !== ins[19:15] || ctrl.rs2 !== ins[24:20]) failures++;
  endtask

  initial begin
    //                                   rw  op          sa        sb         imm    br       nm      mr mw u1 u2 u3
    expect_("addi", ADDI(5, 6, -3),      1, ALU_ADD,  SRCA_RS1, SRCB_IMM,  IMM_I, BR_NONE, NM_NONE, 0, 0, 1, 0, 0);
    expect_("sub",  SUB(1, 2, 3),        1, ALU_SUB,  SRCA_RS1, SRCB_RS2,  IMM_NONE, BR_NONE, NM_NONE, 0, 0, 1, 1, 0);
    expect_("srai", SRAI(1, 2, 3),       1, ALU_SRA,  SRCA_RS1, SRCB_IMM,  IMM_I, BR_NONE, NM_NONE, 0, 0, 1, 0, 0);
    expect_("mul",  MUL(7, 8, 9),        1, ALU_MUL,  SRCA_RS1, SRCB_RS2,  IMM_NONE, BR_NONE, NM_NONE, 0, 0, 1, 1, 0);
    expect_("div",  DIV(7, 8, 9),        1, ALU_DIV,  SRCA_RS1, SRCB_RS2,  IMM_NONE, BR_NONE, NM_NONE, 0, 0, 1, 1, 0);
    expect_("rem",  REM(7, 8, 9),        1, ALU_REM,  SRCA_RS1, SRCB_RS2,  IMM_NONE, BR_NONE, NM_NONE, 0, 0, 1, 1, 0);
    expect_("lui",  LUI(3, 'h12345),     1, ALU_PASSB, SRCA_RS1, SRCB_IMM, IMM_U, BR_NONE, NM_NONE, 0, 0, 0, 0, 0);
    expect_("auipc", AUIPC(3, 1),        1, ALU_ADD,  SRCA_PC,  SRCB_IMM,  IMM_U, BR_NONE, NM_NONE, 0, 0, 0, 0, 0);
    expect_("lw",   LW(4, 5, 8),         1, ALU_ADD,  SRCA_RS1, SRCB_IMM,  IMM_I, BR_NONE, NM_NONE, 1, 0, 1, 0, 0);
    expect_("sw",   SW(4, 5, 8),         0, ALU_ADD,  SRCA_RS1, SRCB_IMM,  IMM_S, BR_NONE, NM_NONE, 0, 1, 1, 1, 0);
    expect_("bne",  BNE(4, 5, 8),        0, ALU_ADD,  SRCA_RS1, SRCB_RS2,  IMM_B, BR_COND, NM_NONE, 0, 0, 1, 1, 0);
    expect_("jal",  JAL(1, 64),          1, ALU_ADD,  SRCA_PC,  SRCB_FOUR, IMM_J, BR_JAL,  NM_NONE, 0, 0, 0, 0, 0);
    expect_("jalr", JALR(1, 2, 4),       1, ALU_ADD,  SRCA_PC,  SRCB_FOUR, IMM_I, BR_JALR, NM_NONE, 0, 0, 1, 0, 0);
    expect_("nmldl", NMLDL(0, 16, 17),   1, ALU_ADD,  SRCA_RS1, SRCB_RS2,  IMM_NONE, BR_NONE, NM_LDL, 0, 0, 1, 1, 0);
    expect_("nmldh", NMLDH(5, 16, 0),    1, ALU_ADD,  SRCA_RS1, SRCB_RS2,  IMM_NONE, BR_NONE, NM_LDH, 0, 0, 1, 0, 0);
    expect_("nmpn", NMPN(12, 16, 17),    1, ALU_ADD,  SRCA_RD,  SRCB_IMM,  IMM_NONE, BR_NONE, NM_PN,  0, 1, 1, 1, 1);
    expect_("nmdec", NMDEC(17, 17, 14),  1, ALU_ADD,  SRCA_RS1, SRCB_RS2,  IMM_NONE, BR_NONE, NM_DEC, 0, 0, 1, 1, 0);
    // nmpn stores a full word
    instr = NMPN(12, 16, 17); #1; checks++; if (ctrl.funct3 !== 3'b010) failures++;
    // no-ops: fence, ecall, undefined custom-0 funct3
    for (int k = 0; k < 3; k++) begin
      instr = (k == 0) ? 32'h0000_000F : (k == 1) ? 32'h0000_0073 : 32'h0000_700B; #1;
      checks++;
      if (ctrl.reg_write || ctrl.mem_read || ctrl.mem_write || ctrl.br_type != BR_NONE) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
