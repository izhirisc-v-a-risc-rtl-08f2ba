// tb_npu: self-checking test of the Izhikevich neuron update.
// The expected result is computed in the testbench in floating point from
// the Euler equations, using the same quantised parameters and 0.04
// constant (2621/65536). The unit truncates towards minus infinity, so its
// v and u must lie within one Q7.8 step below the real result. Random
// neurons cover spiking and resting states, both timesteps, pin on and off,
// and saturation; a few fixed cases are checked exactly.
module tb_npu;
  import izhi_pkg::*;
  logic [31:0] vu, isyn, vu_next;
  nm_cfg_t cfg;
  logic spike;
  int checks = 0, failures = 0, nspike = 0, npin = 0, nsat = 0;

  npu dut (.*);

  initial begin
    #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic real satr(real x);
    if (x > 32767.0) return 32767.0;
    if (x < -32768.0) return -32768.0;
    return x;
  endfunction

  task automatic run_case(real vmv, real umv, real imv, real a, real b, real c, real d,
                          logic h, logic pin);
    real v, u, i, hh, vn, un, ev, eu, av, bv, cv, dv;
    logic sp;
    logic signed [15:0] gv, gu;
    cfg.a = 16'($rtoi(a * 2048.0)); cfg.b = 16'($rtoi(b * 2048.0));
    cfg.c = 16'($rtoi(c * 256.0));  cfg.d = 16'($rtoi(d * 2048.0));
    cfg.h = h; cfg.pin = pin;
    vu = {16'($rtoi(vmv * 256.0)), 16'($rtoi(umv * 256.0))};
    isyn = 32'($rtoi(imv * 65536.0));
    // quantised values as reals
    v = real'($signed(vu[31:16])) / 256.0; u = real'($signed(vu[15:0])) / 256.0;
    i = real'($signed(isyn)) / 65536.0;
    av = real'(cfg.a) / 2048.0; bv = real'(cfg.b) / 2048.0;
    cv = real'(cfg.c) / 256.0;  dv = real'(cfg.d) / 2048.0;
    hh = h ? 0.125 : 0.5;
    vn = v + hh * (2621.0 / 65536.0 * v * v + 5.0 * v + 140.0 - u + i);
    un = u + hh * av * (bv * v - u);
    if (vn >= 30.0 && vn < 30.0 + 2.0/256.0) return;  // too close to call
    if (vn >= 30.0) begin sp = 1; ev = cv * 256.0; eu = satr(un * 256.0 + $floor(dv * 256.0)); end
    else begin
      sp = 0; eu = satr(un * 256.0);
      if (pin && vn < cv) ev = cv * 256.0; else ev = satr(vn * 256.0);
      if (pin && vn < cv) npin++;
      if (vn * 256.0 > 32767.0 || vn * 256.0 < -32768.0) nsat++;
    end
    #1;
    gv = vu_next[31:16]; gu = vu_next[15:0];
    checks += 3;
    if (spike !== sp) begin failures++; $display("FAIL spike v=%f vn=%f", v, vn); end
    if (real'(gv) > ev + 1e-6 || real'(gv) < ev - 1.0 - 1e-6 - (sp ? 0.0 : 0.0)) begin
      failures++; $display("FAIL v: v=%f u=%f i=%f got %0d exp %f", v, u, i, gv, ev);
    end
    if (real'(gu) > eu + 1e-6 || real'(gu) < eu - 2.0 - 1e-6) begin
      failures++; $display("FAIL u: got %0d exp %f", gu, eu);
    end
    nspike += sp;
  endtask

  initial begin
    // Regular spiking neuron at rest, exact value worked out by hand:
    // v=-65, u=-13, I=0, h=0.5: dv=0.0399933*4225-325+140+13 = -3.02674
    // v' = -65 - 1.51337 = -66.51337 -> floor(Q7.8) = -17028
    cfg = '{a: 16'sd41, b: 16'sd410, c: -16'sd16640, d: 16'sd16384, h: 1'b0, pin: 1'b0};
    vu = {16'(-16640), 16'(-3328)}; isyn = 0; #1;
    checks++; if ($signed(vu_next[31:16]) !== -16'sd17028 || spike) begin
      failures++; $display("FAIL hand case v=%0d", $signed(vu_next[31:16])); end
    // spiking: v=29, I=20 -> far above threshold, v <- c, u <- u + d
    vu = {16'(29*256), 16'(-3328)}; isyn = 32'(20 * 65536); #1;
    checks++; if (!spike || $signed(vu_next[31:16]) !== -16'sd16640) failures++;
    for (int n = 0; n < 4000; n++) begin
      run_case($urandom_range(0, 11000) / 100.0 - 80.0,   // v in [-80, 30]
               $urandom_range(0, 4000) / 100.0 - 25.0,    // u in [-25, 15]
               $urandom_range(0, 8000) / 100.0 - 20.0,    // I in [-20, 60]
               $urandom_range(2, 100) / 1000.0,           // a
               $urandom_range(150, 260) / 1000.0,         // b
               -$urandom_range(50, 70),                    // c
               $urandom_range(5, 800) / 100.0,            // d
               1'($urandom), 1'($urandom));
    end
    // saturation: huge current
    run_case(0.0, 0.0, -30000.0, 0.02, 0.2, -65.0, 2.0, 1'b0, 1'b0);
    checks++; if (nspike == 0 || npin == 0 || nsat == 0) begin failures++; $display("coverage %0d %0d %0d", nspike, npin, nsat); end
    $display("spikes=%0d pinned=%0d saturated=%0d", nspike, npin, nsat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
