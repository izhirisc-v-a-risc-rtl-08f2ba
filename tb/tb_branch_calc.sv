// tb_branch_calc: self-checking test of branch and jump resolution.
// Random operands (often equal, to hit the equality cases) for every branch
// condition, JAL and JALR; the expected outcome is computed in the testbench
// from 64-bit sign/zero-extended comparisons.
module tb_branch_calc;
  import izhi_pkg::*;
  logic [31:0] pc, imm, op1, op2, target;
  br_e br_type;
  logic [2:0] funct3;
  logic taken;
  int checks = 0, failures = 0;

  branch_calc dut (.*);

  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      longint s1, s2, u1, u2;
      logic et; logic [31:0] ett;
      pc = {$urandom, 2'b00}; imm = $signed(13'($urandom & 32'h1FFE));
      op1 = $urandom; op2 = ($urandom_range(0, 3) == 0) ? op1 : $urandom;
      if ($urandom_range(0, 5) == 0) op2 = {~op1[31], op1[30:0]};
      funct3 = 3'($urandom);
      br_type = br_e'($urandom_range(0, 3));
      s1 = longint'($signed(op1)); s2 = longint'($signed(op2));
      u1 = longint'({32'd0, op1}); u2 = longint'({32'd0, op2});
      case (funct3)
        0: et = (u1 == u2);  1: et = (u1 != u2);
        4: et = (s1 < s2);   5: et = !(s1 < s2);
        6: et = (u1 < u2);   7: et = !(u1 < u2);
        default: et = 0;
      endcase
      ett = pc + imm;
      if (br_type == BR_NONE) et = 0;
      if (br_type == BR_JAL) et = 1;
      if (br_type == BR_JALR) begin et = 1; ett = (op1 + imm) & 32'hFFFF_FFFE; end
      #1;
      checks++;
      if (taken !== et) begin failures++; $display("FAIL taken f3=%0d %h %h", funct3, op1, op2); end
      if (et) begin checks++; if (target !== ett) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
