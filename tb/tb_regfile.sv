// tb_regfile: self-checking test of the three-read, one-write register file.
// Random writes and reads on all three ports against a reference array;
// checks that x0 stays zero and that reset clears the registers.
module tb_regfile;
  logic clk = 0, rst_n = 0, we = 0;
  logic [4:0] ra1 = 0, ra2 = 0, ra3 = 0, wa = 0;
  logic [31:0] rd1, rd2, rd3, wd = 0;
  logic [31:0] model [32];
  int checks = 0, failures = 0;

  regfile dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 32; i++) model[i] = 0;
    @(posedge clk); @(posedge clk); #1 rst_n = 1;
    for (int r = 0; r < 32; r++) begin
      ra1 = 5'(r); #1; checks++; if (rd1 !== 0) failures++;
    end
    for (int i = 0; i < 2000; i++) begin
      we = $urandom_range(0, 1); wa = 5'($urandom); wd = $urandom;
      ra1 = 5'($urandom); ra2 = 5'($urandom); ra3 = 5'($urandom);
      #1;
      checks += 3;
      if (rd1 !== model[ra1]) begin failures++; $display("rd1 x%0d %h exp %h", ra1, rd1, model[ra1]); end
      if (rd2 !== model[ra2]) failures++;
      if (rd3 !== model[ra3]) failures++;
      @(posedge clk);
      if (we && wa != 0) model[wa] = wd;
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
