// control_unit: instruction decoder of the merged fetch/decode stage.
//
// Purely combinational. Turns a 32-bit instruction into the control word
// ctrl_t that the pipeline carries: register indices and which of them are
// read, ALU operation and operand sources, immediate format, branch kind,
// memory access and the neuromorphic operation. It decodes RV32I, the M
// extension, and the four instructions of the custom-0 opcode (0001011):
//   nmldl  R-type: rs1 = {b, a}, rs2 = {d, c} -> NM REGS, rd <- 1
//   nmldh  R-type: rs1[1] = pin, rs1[0] = h   -> NM REGS, rd <- 1
//   nmpn   "N"-type: rs1 = VU word, rs2 = Isyn, rd = address of the VU word;
//          the new VU word is stored at that address and rd <- spike
//   nmdec  R-type: rs1 = Isyn, rs2 = tau select, rd <- decayed Isyn
// The opcode and operand roles follow the published ISA table; the funct3
// values (see izhi_pkg) are this design's. FENCE, SYSTEM and any undefined
// encoding decode to a no-op: the core has no traps and no CSRs.
module control_unit
  import izhi_pkg::*;
(
  input  logic [31:0] instr,
  output ctrl_t       ctrl
);
  logic [6:0] opc;
  logic [2:0] f3;
  logic [6:0] f7;

  assign opc = instr[6:0];
  assign f3  = instr[14:12];
  assign f7  = instr[31:25];

  always_comb begin
    ctrl        = CTRL_NOP;
    ctrl.rd     = instr[11:7];
    ctrl.rs1    = instr[19:15];
    ctrl.rs2    = instr[24:20];
    ctrl.funct3 = f3;
    unique case (opc)
      OPC_LUI: begin
        ctrl.reg_write = 1'b1; ctrl.imm_type = IMM_U;
        ctrl.src_b = SRCB_IMM; ctrl.alu_op = ALU_PASSB;
      end
      OPC_AUIPC: begin
        ctrl.reg_write = 1'b1; ctrl.imm_type = IMM_U;
        ctrl.src_a = SRCA_PC; ctrl.src_b = SRCB_IMM;
      end
      OPC_JAL: begin
        ctrl.reg_write = 1'b1; ctrl.imm_type = IMM_J; ctrl.br_type = BR_JAL;
        ctrl.src_a = SRCA_PC; ctrl.src_b = SRCB_FOUR;
      end
      OPC_JALR: begin
        ctrl.reg_write = 1'b1; ctrl.imm_type = IMM_I; ctrl.br_type = BR_JALR;
        ctrl.use_rs1 = 1'b1; ctrl.src_a = SRCA_PC; ctrl.src_b = SRCB_FOUR;
      end
      OPC_BRANCH: begin
        ctrl.imm_type = IMM_B; ctrl.br_type = BR_COND;
        ctrl.use_rs1 = 1'b1; ctrl.use_rs2 = 1'b1;
      end
      OPC_LOAD: begin
        ctrl.reg_write = 1'b1; ctrl.mem_read = 1'b1; ctrl.imm_type = IMM_I;
        ctrl.use_rs1 = 1'b1; ctrl.src_b = SRCB_IMM;
      end
      OPC_STORE: begin
        ctrl.mem_write = 1'b1; ctrl.imm_type = IMM_S;
        ctrl.use_rs1 = 1'b1; ctrl.use_rs2 = 1'b1; ctrl.src_b = SRCB_IMM;
      end
      OPC_OPIMM: begin
        ctrl.reg_write = 1'b1; ctrl.imm_type = IMM_I; ctrl.use_rs1 = 1'b1;
        ctrl.src_b = SRCB_IMM;
        unique case (f3)
          3'b000: ctrl.alu_op = ALU_ADD;
          3'b001: ctrl.alu_op = ALU_SLL;
          3'b010: ctrl.alu_op = ALU_SLT;
          3'b011: ctrl.alu_op = ALU_SLTU;
          3'b100: ctrl.alu_op = ALU_XOR;
          3'b101: ctrl.alu_op = f7[5] ? ALU_SRA : ALU_SRL;
          3'b110: ctrl.alu_op = ALU_OR;
          default: ctrl.alu_op = ALU_AND;
        endcase
      end
      OPC_OP: begin
        ctrl.reg_write = 1'b1; ctrl.use_rs1 = 1'b1; ctrl.use_rs2 = 1'b1;
        if (f7 == 7'b0000001) begin
          unique case (f3)
            3'b000: ctrl.alu_op = ALU_MUL;
            3'b001: ctrl.alu_op = ALU_MULH;
            3'b010: ctrl.alu_op = ALU_MULHSU;
            3'b011: ctrl.alu_op = ALU_MULHU;
            3'b100: ctrl.alu_op = ALU_DIV;
            3'b101: ctrl.alu_op = ALU_DIVU;
            3'b110: ctrl.alu_op = ALU_REM;
            default: ctrl.alu_op = ALU_REMU;
          endcase
        end else begin
          unique case (f3)
            3'b000: ctrl.alu_op = f7[5] ? ALU_SUB : ALU_ADD;
            3'b001: ctrl.alu_op = ALU_SLL;
            3'b010: ctrl.alu_op = ALU_SLT;
            3'b011: ctrl.alu_op = ALU_SLTU;
            3'b100: ctrl.alu_op = ALU_XOR;
            3'b101: ctrl.alu_op = f7[5] ? ALU_SRA : ALU_SRL;
            3'b110: ctrl.alu_op = ALU_OR;
            default: ctrl.alu_op = ALU_AND;
          endcase
        end
      end
      OPC_CUSTOM0: begin
        unique case (f3)
          F3_NMLDL: begin
            ctrl.nm_op = NM_LDL; ctrl.reg_write = 1'b1;
            ctrl.use_rs1 = 1'b1; ctrl.use_rs2 = 1'b1;
          end
          F3_NMLDH: begin
            ctrl.nm_op = NM_LDH; ctrl.reg_write = 1'b1; ctrl.use_rs1 = 1'b1;
          end
          F3_NMPN: begin
            // ALU: address = rd value + 0; NPU result stored there.
            ctrl.nm_op = NM_PN; ctrl.reg_write = 1'b1; ctrl.mem_write = 1'b1;
            ctrl.funct3 = 3'b010;
            ctrl.use_rs1 = 1'b1; ctrl.use_rs2 = 1'b1; ctrl.use_rd = 1'b1;
            ctrl.src_a = SRCA_RD; ctrl.src_b = SRCB_IMM;
          end
          F3_NMDEC: begin
            ctrl.nm_op = NM_DEC; ctrl.reg_write = 1'b1;
            ctrl.use_rs1 = 1'b1; ctrl.use_rs2 = 1'b1;
          end
          default: ctrl = CTRL_NOP;
        endcase
      end
      default: ctrl = CTRL_NOP;  // FENCE, SYSTEM, undefined
    endcase
  end
endmodule
