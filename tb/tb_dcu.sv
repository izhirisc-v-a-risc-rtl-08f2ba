// tb_dcu: self-checking test of the synaptic decay unit.
// For each divider 2..8 the testbench holds the published shift-sum
// coefficient as a real number and computes I - I*k*h in floating point.
// For inputs that are multiples of 2^12 all shifts are exact and the result
// must match exactly; for random inputs the truncation of up to four terms
// and the timestep shift allow a few LSBs. It also checks that every
// coefficient is within 0.5% of 1/tau and that tau outside 2..8 leaves the
// current unchanged.
module tb_dcu;
  logic [31:0] isyn, tau, isyn_next;
  logic h;
  int checks = 0, failures = 0;
  real k [10];

  dcu dut (.*);

  initial begin
    #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    k[0] = 0; k[1] = 0; k[9] = 0;
    k[2] = 0.5;
    k[3] = 1.0/4 + 1.0/16 + 1.0/64 + 1.0/256;
    k[4] = 0.25;
    k[5] = 1.0/8 + 1.0/16 + 1.0/128 + 1.0/256;
    k[6] = 1.0/8 + 1.0/32 + 1.0/128 + 1.0/512;
    k[7] = 1.0/8 + 1.0/64 + 1.0/512;
    k[8] = 0.125;
    for (int t = 2; t <= 8; t++) begin
      checks++;
      if (((k[t] - 1.0/t) / (1.0/t)) > 0.005 || ((k[t] - 1.0/t) / (1.0/t)) < -0.005) failures++;
    end
    for (int n = 0; n < 6000; n++) begin
      real x, e, hh;
      logic exact;
      exact = (n % 2 == 0);
      isyn = exact ? ($urandom & 32'hFFFF_F000) : $urandom;
      tau = $urandom_range(0, 10);
      if (n % 50 == 0) tau = 32'h0000_0013;   // 19: not a supported divider
      h = 1'($urandom);
      hh = h ? 0.125 : 0.5;
      x = real'($signed(isyn));
      e = (tau < 10) ? x - x * k[tau] * hh : x;
      #1;
      checks++;
      if (exact || tau < 2 || tau > 8) begin
        if (real'($signed(isyn_next)) != e) begin failures++; $display("FAIL exact tau=%0d x=%f got %0d exp %f", tau, x, $signed(isyn_next), e); end
      end else begin
        if (real'($signed(isyn_next)) < e - 0.01 || real'($signed(isyn_next)) > e + 5.0) begin
          failures++; $display("FAIL tau=%0d x=%f got %0d exp %f", tau, x, $signed(isyn_next), e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
