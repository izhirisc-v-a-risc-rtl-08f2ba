// extender: immediate generator of the merged fetch/decode stage.
//
// Combinational. Assembles and sign-extends the I, S, B, U or J immediate of
// a RISC-V instruction as selected by the decoder; R-type and the custom
// neuromorphic instructions use IMM_NONE and get 0 (so nmpn's address is the
// rd register plus 0). The encoding is the standard RISC-V one; the block
// diagram only names the unit.
module extender
  import izhi_pkg::*;
(
  input  logic [31:0] instr,
  input  imm_e        imm_type,
  output logic [31:0] imm
);
  always_comb begin
    unique case (imm_type)
      IMM_I:   imm = {{21{instr[31]}}, instr[30:20]};
      IMM_S:   imm = {{21{instr[31]}}, instr[30:25], instr[11:7]};
      IMM_B:   imm = {{20{instr[31]}}, instr[7], instr[30:25], instr[11:8], 1'b0};
      IMM_U:   imm = {instr[31:12], 12'd0};
      IMM_J:   imm = {{12{instr[31]}}, instr[19:12], instr[20], instr[30:21], 1'b0};
      default: imm = 32'd0;
    endcase
  end
endmodule
