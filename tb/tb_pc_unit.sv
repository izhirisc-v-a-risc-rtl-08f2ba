// tb_pc_unit: self-checking test of the program counter.
// Drives random hold/redirect patterns and compares the PC each cycle with
// a reference register kept in the testbench (priority hold > redirect > +4).
module tb_pc_unit;
  logic clk = 0, rst_n = 0, hold = 0, redirect = 0;
  logic [31:0] target = 0, pc, pc_plus4, ref_pc;
  int checks = 0, failures = 0;

  pc_unit #(.RESET_PC(32'h0000_0100)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    @(posedge clk); @(posedge clk); #1;
    checks++; if (pc !== 32'h100) begin failures++; $display("reset pc %h", pc); end
    rst_n = 1; ref_pc = 32'h100;
    for (int i = 0; i < 500; i++) begin
      hold = ($urandom_range(0, 3) == 0);
      redirect = ($urandom_range(0, 2) == 0);
      target = {$urandom, 2'b00};
      checks++; if (pc_plus4 !== ref_pc + 4) failures++;
      @(posedge clk);
      if (!hold) ref_pc = redirect ? target : ref_pc + 4;
      #1;
      checks++; if (pc !== ref_pc) begin failures++; $display("pc %h exp %h", pc, ref_pc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
