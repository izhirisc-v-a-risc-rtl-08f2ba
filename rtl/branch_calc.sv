// branch_calc: branch and jump resolution in the merged fetch/decode stage.
//
// Combinational. For a conditional branch it compares the two (forwarded)
// register operands by funct3 (beq, bne, blt, bge, bltu, bgeu) and gives the
// target PC + imm; JAL is always taken to PC + imm, JALR to (rs1 + imm) with
// bit 0 cleared. Placing this unit in the stage that fetches, as the block
// diagram does, lets the PC be redirected at the next clock edge with no
// wrongly fetched instruction to flush.
module branch_calc
  import izhi_pkg::*;
(
  input  logic [31:0] pc,
  input  logic [31:0] imm,
  input  logic [31:0] op1,
  input  logic [31:0] op2,
  input  br_e         br_type,
  input  logic [2:0]  funct3,
  output logic        taken,
  output logic [31:0] target
);
  logic cond;

  always_comb begin
    unique case (funct3)
      3'b000:  cond = (op1 == op2);
      3'b001:  cond = (op1 != op2);
      3'b100:  cond = ($signed(op1) <  $signed(op2));
      3'b101:  cond = ($signed(op1) >= $signed(op2));
      3'b110:  cond = (op1 <  op2);
      3'b111:  cond = (op1 >= op2);
      default: cond = 1'b0;
    endcase
    unique case (br_type)
      BR_COND: begin taken = cond; target = pc + imm; end
      BR_JAL:  begin taken = 1'b1; target = pc + imm; end
      BR_JALR: begin taken = 1'b1; target = (op1 + imm) & ~32'd1; end
      default: begin taken = 1'b0; target = pc + imm; end
    endcase
  end
endmodule
