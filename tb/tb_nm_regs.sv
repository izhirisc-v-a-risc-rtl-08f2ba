// tb_nm_regs: self-checking test of the neuromorphic configuration
// registers. Random nmldl/nmldh loads; every field must hold the bits of the
// operand word the ISA table assigns to it, and keep them until reloaded.
module tb_nm_regs;
  import izhi_pkg::*;
  logic clk = 0, rst_n = 0, ld_l = 0, ld_h = 0;
  logic [31:0] rs1 = 0, rs2 = 0;
  nm_cfg_t cfg;
  logic [15:0] ea = 0, eb = 0, ec = 0, ed = 0;
  logic eh = 0, ep = 0;
  int checks = 0, failures = 0;

  nm_regs dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    @(posedge clk); @(posedge clk); #1;
    checks++; if (cfg !== '0) failures++;
    rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      ld_l = $urandom_range(0, 2) == 0; ld_h = $urandom_range(0, 2) == 0;
      rs1 = $urandom; rs2 = $urandom;
      @(posedge clk);
      if (ld_l) begin ea = rs1[15:0]; eb = rs1[31:16]; ec = rs2[15:0]; ed = rs2[31:16]; end
      if (ld_h) begin eh = rs1[0]; ep = rs1[1]; end
      #1;
      checks++;
      if (cfg.a !== ea || cfg.b !== eb || cfg.c !== ec || cfg.d !== ed || cfg.h !== eh || cfg.pin !== ep) begin
        failures++; $display("FAIL %p", cfg);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
