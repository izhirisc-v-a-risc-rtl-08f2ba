// alu: the RV32IM arithmetic unit of the execute stage.
//
// Combinational, one cycle for every operation: add/sub, shifts, signed and
// unsigned compares, logic, the four multiplies (low word and the three high
// words) and signed/unsigned divide and remainder, plus a pass of operand B
// for LUI. It also forms load/store addresses, link addresses (PC + 4) and,
// for nmpn, the address at which the updated VU word is stored. Divide by
// zero and signed overflow give the results the RISC-V specification
// defines. The single-cycle multiply/divide is this design's choice; the
// source only says the core implements RV32IM.
module alu
  import izhi_pkg::*;
(
  input  alu_op_e     op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic signed [63:0] mul_ss;
  logic signed [63:0] mul_su;
  logic        [63:0] mul_uu;
  logic               div0, ovf;

  assign mul_ss = $signed(a) * $signed(b);
  assign mul_su = $signed({{32{a[31]}}, a}) * $signed({32'd0, b});
  assign mul_uu = {32'd0, a} * {32'd0, b};
  assign div0   = (b == 32'd0);
  assign ovf    = (a == 32'h8000_0000) && (b == 32'hFFFF_FFFF);

  always_comb begin
    unique case (op)
      ALU_ADD:    y = a + b;
      ALU_SUB:    y = a - b;
      ALU_SLL:    y = a << b[4:0];
      ALU_SLT:    y = {31'd0, $signed(a) < $signed(b)};
      ALU_SLTU:   y = {31'd0, a < b};
      ALU_XOR:    y = a ^ b;
      ALU_SRL:    y = a >> b[4:0];
      ALU_SRA:    y = $unsigned($signed(a) >>> b[4:0]);
      ALU_OR:     y = a | b;
      ALU_AND:    y = a & b;
      ALU_MUL:    y = mul_ss[31:0];
      ALU_MULH:   y = mul_ss[63:32];
      ALU_MULHSU: y = mul_su[63:32];
      ALU_MULHU:  y = mul_uu[63:32];
      ALU_DIV:    y = div0 ? 32'hFFFF_FFFF : ovf ? a : $unsigned($signed(a) / $signed(b));
      ALU_DIVU:   y = div0 ? 32'hFFFF_FFFF : a / b;
      ALU_REM:    y = div0 ? a : ovf ? 32'd0 : $unsigned($signed(a) % $signed(b));
      ALU_REMU:   y = div0 ? a : a % b;
      default:    y = b;  // ALU_PASSB
    endcase
  end
endmodule
