// tb_network_8020: the Izhikevich "80-20" cortical network run as a program
// on the IzhiRISC-V core.
// N_NEUR neurons, 80% excitatory (regular spiking to chattering) and 20%
// inhibitory (fast spiking), with the parameter distributions of
// Izhikevich's 2003 network: excitatory a=0.02, b=0.2, c=-65+15r^2,
// d=8-6r^2; inhibitory a=0.02+0.08r, b=0.25-0.05r, c=-65, d=2; all-to-all
// random weights 0.5*rand (excitatory) and -rand (inhibitory); noisy
// thalamic input 5*randn (excitatory) or 2*randn (inhibitory) per neuron and
// timestep. The testbench generates all of this into memory.
// The program processes every neuron as the published listing does (nmldl
// with its parameters, synaptic + thalamic current, nmpn) and takes the
// 1 ms timestep as two 0.5 ms nmpn; it decays the synaptic current with
// nmdec (tau = 4), records which neurons fired, and then adds each fired
// neuron's weight column to all synaptic currents. The spike count of
// every timestep, the final VU words and the final currents are compared
// with the same computation done in the testbench on the integer reference
// model. It reports the firing rate, IPC and the effective IPC (each nmpn
// counted as one update worth 19 base instructions, nmpn/nmdec excluded
// from the regular instructions).
// The network has the 1000 neurons of the published experiment; the run is
// cut to 500 of its 1000 timesteps to keep the simulation near a minute
// (1000 steps take about 180 M cycles). Design choices, not from the paper:
// the weights are multiplied by 1000/N_NEUR, so that a smaller N_NEUR keeps
// the total charge of a spike, and divided by tau, because here the
// synaptic current decays over about tau steps instead of being rebuilt
// every step. The network then fires at roughly 10-15 Hz per neuron.
module tb_network_8020;
  import rv_asm_pkg::*;
  import izhi_ref_pkg::*;

  localparam int N_NEUR  = 1000;
  localparam int N_EXC   = N_NEUR * 8 / 10;
  localparam int T_STEPS = 500;
  localparam int TAU     = 4;
  localparam int TOHOST  = 32'h0000_FFF0;
  localparam int REC     = 32'h0001_0000;   // VU, {b,a}, {d,c} per neuron
  localparam int ISYN    = 32'h0001_4000;
  localparam int FIRED   = 32'h0001_5000;
  localparam int SPK     = 32'h0001_6000;
  localparam int CONST   = 32'h0001_7000;
  localparam int THAL    = 32'h0002_0000;   // T_STEPS x N_NEUR input currents
  localparam int WGT     = THAL + ((T_STEPS * N_NEUR * 4 + 32'hFFF) & ~32'hFFF);  // column j at WGT + 4*N*j
  localparam int TOP     = WGT + N_NEUR * N_NEUR * 4;
  localparam int WORDS   = 1 << $clog2(TOP / 4);

  logic clk = 0, rst_n = 0;
  logic [31:0] i_avm_address, i_avm_readdata, d_avm_address, d_avm_writedata, d_avm_readdata;
  logic i_avm_read, i_avm_waitrequest, d_avm_read, d_avm_write, d_avm_waitrequest;
  logic [3:0] d_avm_byteenable;
  logic retire, hazard_stall;

  izhirisc_core dut (.*);
  avalon_mem_model #(.WORDS(WORDS), .MAX_WAIT(1)) mem (
    .clk, .i_address(i_avm_address), .i_read(i_avm_read), .i_readdata(i_avm_readdata),
    .i_waitrequest(i_avm_waitrequest), .d_address(d_avm_address), .d_read(d_avm_read),
    .d_write(d_avm_write), .d_writedata(d_avm_writedata), .d_byteenable(d_avm_byteenable),
    .d_readdata(d_avm_readdata), .d_waitrequest(d_avm_waitrequest));

  always #5 clk = ~clk;

  int checks = 0, failures = 0, pcw = 0;
  longint unsigned cycles = 0, n_retire = 0, n_hz = 0, n_pn = 0, n_dec = 0;
  logic done = 0;

  task automatic emit(logic [31:0] w); mem.mem[pcw] = w; pcw++; endtask
  function automatic int here(); return pcw * 4; endfunction
  task automatic li(int rd, int value);   // load a 32-bit constant
    int lo = $signed(12'(value));
    emit(LUI(rd, (value - lo) >>> 12));
    emit(ADDI(rd, rd, lo));
  endtask

  function automatic real urand(); return real'($urandom) / 4294967296.0; endfunction
  function automatic real randn();
    real s = 0;
    for (int k = 0; k < 12; k++) s += urand();
    return s - 6.0;
  endfunction
  function automatic logic [31:0] q16(real x); return 32'($rtoi(x * 65536.0)); endfunction

  logic [31:0] e_vu [N_NEUR], e_i [N_NEUR], e_ba [N_NEUR], e_dc [N_NEUR];
  int e_spk [T_STEPS];

  initial begin
    int tloop, nloop, nospike, dloop, iloop, ddone_fix, dj;
    int fired [N_NEUR];
    int nf, total;
    real wscale = 1000.0 / N_NEUR / TAU;
    // Until the first clock edge in reset the core's pipeline registers hold
    // power-up values and its bus outputs are meaningless; the memory model
    // has no reset, so it is loaded only after reset has taken hold.
    repeat (2) @(posedge clk);
    for (int i = 0; i < WORDS; i++) mem.mem[i] = 0;
    // ---------------------------------------------------------- network
    for (int n = 0; n < N_NEUR; n++) begin
      real r, a, b, c, d;
      r = urand();
      if (n < N_EXC) begin a = 0.02; b = 0.2; c = -65.0 + 15.0 * r * r; d = 8.0 - 6.0 * r * r; end
      else begin a = 0.02 + 0.08 * r; b = 0.25 - 0.05 * r; c = -65.0; d = 2.0; end
      e_ba[n] = {16'($rtoi(b * 2048.0)), 16'($rtoi(a * 2048.0))};
      e_dc[n] = {16'($rtoi(d * 2048.0)), 16'($rtoi(c * 256.0))};
      e_vu[n] = {16'(-65 * 256), 16'($rtoi(b * -65.0 * 256.0))};
      e_i[n]  = 0;
      mem.mem[(REC + 12 * n) / 4]     = e_vu[n];
      mem.mem[(REC + 12 * n + 4) / 4] = e_ba[n];
      mem.mem[(REC + 12 * n + 8) / 4] = e_dc[n];
      for (int i = 0; i < N_NEUR; i++)
        mem.mem[(WGT + 4 * (N_NEUR * n + i)) / 4] = q16(wscale * ((n < N_EXC) ? 0.5 * urand() : -urand()));
    end
    for (int t = 0; t < T_STEPS; t++)
      for (int n = 0; n < N_NEUR; n++)
        mem.mem[(THAL + 4 * (N_NEUR * t + n)) / 4] = q16(((n < N_EXC) ? 5.0 : 2.0) * randn());
    mem.mem[CONST / 4] = TAU;
    // ---------------------------------------------------------- program
    li(5, REC); li(6, ISYN); li(7, THAL); li(8, WGT); li(9, SPK); li(10, FIRED);
    li(17, N_NEUR * 4);
    li(20, CONST);
    emit(LW(25, 20, 0));               // tau
    emit(NMLDH(0, 0, 0));              // h = 0.5 ms, pin off
    li(26, T_STEPS);
    tloop = here();
    emit(ADDI(11, 0, 0));              // fired count
    emit(ADD(14, 0, 10));              // fired list pointer
    emit(ADD(27, 0, 5));
    emit(ADD(28, 0, 6));
    li(29, N_NEUR);
    emit(ADDI(12, 0, 0));              // neuron index
    nloop = here();
    emit(LW(21, 27, 4));
    emit(LW(22, 27, 8));
    emit(NMLDL(0, 21, 22));
    emit(LW(1, 7, 0));                 // thalamic input
    emit(LW(31, 28, 0));               // synaptic current
    emit(LW(30, 27, 0));               // VU
    emit(ADD(3, 31, 1));
    emit(ADD(2, 0, 27));
    emit(NMPN(2, 30, 3));              // first 0.5 ms
    emit(LW(30, 27, 0));
    emit(ADD(4, 0, 27));
    emit(NMPN(4, 30, 3));              // second 0.5 ms
    emit(OR_(2, 2, 4));
    nospike = here();
    emit(BEQ(2, 0, 16));
    emit(SW(12, 14, 0));
    emit(ADDI(14, 14, 4));
    emit(ADDI(11, 11, 1));
    emit(NMDEC(31, 31, 25));
    emit(SW(31, 28, 0));
    emit(ADDI(27, 27, 12));
    emit(ADDI(28, 28, 4));
    emit(ADDI(7, 7, 4));
    emit(ADDI(12, 12, 1));
    emit(ADDI(29, 29, -1));
    emit(BNE(29, 0, nloop - here()));
    emit(SW(11, 9, 0));
    emit(ADDI(9, 9, 4));
    emit(ADD(14, 0, 10));
    dloop = here();
    emit(BEQ(11, 0, 4 * 18));          // to ddone, 18 instructions ahead
    emit(LW(15, 14, 0));               // j
    emit(MUL(16, 15, 17));
    emit(ADD(16, 16, 8));              // column j
    emit(ADD(28, 0, 6));
    emit(ADD(29, 0, 17));
    emit(SRAI(29, 29, 2));             // N
    iloop = here();
    emit(LW(18, 16, 0));
    emit(LW(19, 28, 0));
    emit(ADD(19, 19, 18));
    emit(SW(19, 28, 0));
    emit(ADDI(16, 16, 4));
    emit(ADDI(28, 28, 4));
    emit(ADDI(29, 29, -1));
    emit(BNE(29, 0, iloop - here()));
    emit(ADDI(14, 14, 4));
    emit(ADDI(11, 11, -1));
    emit(JAL(0, dloop - here()));
    ddone_fix = here();
    if (ddone_fix != dloop + 4 * 18) $fatal(1, "branch offset");
    emit(ADDI(26, 26, -1));
    emit(BNE(26, 0, tloop - here()));
    emit(ADDI(13, 0, 1));
    li(24, TOHOST);
    emit(SW(13, 24, 0));
    emit(JAL(0, 0));
    // ---------------------------------------------------------- reference
    total = 0;
    for (int t = 0; t < T_STEPS; t++) begin
      nf = 0;
      for (int n = 0; n < N_NEUR; n++) begin
        logic [32:0] r1, r2;
        logic [31:0] itot;
        itot = e_i[n] + mem.mem[(THAL + 4 * (N_NEUR * t + n)) / 4];
        r1 = ref_npu(e_vu[n], itot, e_ba[n], e_dc[n], 1'b0, 1'b0);
        r2 = ref_npu(r1[31:0], itot, e_ba[n], e_dc[n], 1'b0, 1'b0);
        e_vu[n] = r2[31:0];
        if (r1[32] || r2[32]) begin fired[nf] = n; nf++; end
        e_i[n] = ref_dcu(e_i[n], TAU, 1'b0);
      end
      e_spk[t] = nf; total += nf;
      for (int k = 0; k < nf; k++) begin
        dj = fired[k];
        for (int i = 0; i < N_NEUR; i++) e_i[i] = e_i[i] + mem.mem[(WGT + 4 * (N_NEUR * dj + i)) / 4];
      end
    end
    // ---------------------------------------------------------- run
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    wait (done);
    repeat (5) @(posedge clk);
    for (int t = 0; t < T_STEPS; t++) begin
      checks++;
      if (mem.mem[SPK / 4 + t] !== e_spk[t]) begin
        failures++; $display("FAIL step %0d: %0d spikes, expected %0d", t, mem.mem[SPK / 4 + t], e_spk[t]);
      end
    end
    for (int n = 0; n < N_NEUR; n++) begin
      checks += 2;
      if (mem.mem[(REC + 12 * n) / 4] !== e_vu[n]) begin failures++; $display("FAIL VU[%0d]", n); end
      if (mem.mem[(ISYN + 4 * n) / 4] !== e_i[n]) begin failures++; $display("FAIL I[%0d]", n); end
    end
    checks++; if (total == 0) begin failures++; $display("FAIL: network never fired"); end
    $display("%0d neurons, %0d ms: %0d spikes (%f Hz per neuron)", N_NEUR, T_STEPS, total,
             real'(total) / N_NEUR / (T_STEPS / 1000.0));
    $display("cycles=%0d instructions=%0d IPC=%f hazard stalls=%f%% nmpn=%0d IPC_eff=%f",
             cycles, n_retire, real'(n_retire) / cycles, 100.0 * n_hz / cycles, n_pn,
             (real'(n_retire - n_pn - n_dec) + 19.0 * n_pn) / cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (d_avm_write && !d_avm_waitrequest && d_avm_address == TOHOST) done <= 1;
  always @(posedge clk) if (rst_n && !done) begin
    cycles++;
    if (retire) n_retire++;
    if (hazard_stall) n_hz++;
    if (dut.ex_go && dut.idex.ctrl.nm_op == izhi_pkg::NM_PN) n_pn++;
    if (dut.ex_go && dut.idex.ctrl.nm_op == izhi_pkg::NM_DEC) n_dec++;
  end

  initial begin
    repeat (400_000_000) @(posedge clk);
    failures++; $display("watchdog: program did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
