// tb_izhirisc_core: end-to-end test of the IzhiRISC-V core.
// The core runs, from a behavioural Avalon memory with random wait states,
// a program assembled here. Part A exercises the RV32IM instructions
// (arithmetic, multiply/divide, byte loads/stores, jal/jalr/auipc, branch
// loops) and stores results that are compared with hand-computed values.
// Part B simulates a small network the way the published assembly listing
// does: for every neuron, load its parameters (nmldl), add an input current
// to its synaptic current, update it with nmpn (the new VU word is stored
// by the instruction itself, the spike bit lands in rd), decay the current
// with nmdec and store it. The timestep/pin setting (nmldh) alternates
// between timesteps. The final neuron state, the currents and the spike
// counts are compared with a reference computed in the testbench.
// The test also counts each pipeline mechanism (hazard stall, write-back
// bypass, cache misses and refills, bus wait states, taken branches, spikes,
// pinning, all four custom instructions) and fails if one never happened,
// and it checks that every cycle without a retiring instruction is
// explained by a stall: apart from stalls, the core completes one
// instruction, neuromorphic ones included, per cycle.
module tb_izhirisc_core;
  import rv_asm_pkg::*;
  import izhi_ref_pkg::*;

  localparam int N_NEUR = 8;
  localparam int T_STEPS = 20;
  localparam int RES = 32'h3000, DATA = 32'h2000, TOHOST = 32'h37F0;
  localparam int REC = DATA + 64;       // neuron records: VU, {b,a}, {d,c}
  localparam int CUR = DATA + 512;      // synaptic currents
  localparam int BIAS = CUR + 512;      // input currents

  logic clk = 0, rst_n = 0;
  logic [31:0] i_avm_address, i_avm_readdata, d_avm_address, d_avm_writedata, d_avm_readdata;
  logic i_avm_read, i_avm_waitrequest, d_avm_read, d_avm_write, d_avm_waitrequest;
  logic [3:0] d_avm_byteenable;
  logic retire, hazard_stall;

  izhirisc_core dut (.*);
  avalon_mem_model #(.WORDS(16384), .MAX_WAIT(2)) mem (
    .clk, .i_address(i_avm_address), .i_read(i_avm_read), .i_readdata(i_avm_readdata),
    .i_waitrequest(i_avm_waitrequest), .d_address(d_avm_address), .d_read(d_avm_read),
    .d_write(d_avm_write), .d_writedata(d_avm_writedata), .d_byteenable(d_avm_byteenable),
    .d_readdata(d_avm_readdata), .d_waitrequest(d_avm_waitrequest));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int pcw = 0;  // program word index
  int unsigned cycles = 0, n_retire = 0, n_hz = 0, n_fwd = 0, n_imiss = 0, n_dmiss = 0,
               n_dwait = 0, n_busy = 0, n_ibub = 0, n_taken = 0, n_spike = 0, n_pin = 0,
               n_ldl = 0, n_ldh = 0, n_pn = 0, n_dec = 0, n_muldiv = 0;
  logic done = 0;

  task automatic emit(logic [31:0] w); mem.mem[pcw] = w; pcw++; endtask
  function automatic int here(); return pcw * 4; endfunction

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp); end
  endtask

  // neuron parameters: {b,a}, {d,c} in Q4.11 / Q7.8
  function automatic logic [31:0] ba(real a, real b); return {16'($rtoi(b * 2048)), 16'($rtoi(a * 2048))}; endfunction
  function automatic logic [31:0] dcw(real c, real d); return {16'($rtoi(d * 2048)), 16'($rtoi(c * 256))}; endfunction

  logic [31:0] e_vu [N_NEUR], e_cur [N_NEUR], e_bal [N_NEUR], e_dc [N_NEUR], e_bias [N_NEUR];
  int e_spikes = 0;

  initial begin
    int loop_a, tloop, nloop, skip, jt, auipc_pc;
    // Until the first clock edge in reset the core's pipeline registers hold
    // power-up values and its bus outputs are meaningless; the memory model
    // has no reset, so it is loaded only after reset has taken hold.
    repeat (2) @(posedge clk);
    for (int i = 0; i < 16384; i++) mem.mem[i] = 0;
    // ------------------------------------------------------------- part A
    emit(LUI(5, RES >> 12));
    emit(ADDI(1, 0, 100));
    emit(ADDI(2, 0, -7));
    emit(ADD(3, 1, 2));          // 93, depends on the previous instruction
    emit(SW(3, 5, 0));
    emit(MUL(4, 1, 2));          // -700
    emit(SW(4, 5, 4));
    emit(DIV(6, 1, 2));          // -14
    emit(REM(7, 1, 2));          // 2
    emit(SW(6, 5, 8));
    emit(SW(7, 5, 12));
    emit(ADDI(8, 0, -2));
    emit(SB(8, 5, 17));          // byte 1 of word 0x3010
    emit(LB(9, 5, 17));          // -2
    emit(LBU(10, 5, 17));        // 254
    emit(SW(9, 5, 20));
    emit(SW(10, 5, 24));
    emit(JAL(11, 8));            // skip one
    emit(ADDI(12, 0, 1));
    emit(ADDI(12, 12, 5));       // 5
    emit(SW(12, 5, 28));
    auipc_pc = here();
    emit(AUIPC(13, 0));
    emit(SW(13, 5, 32));
    jt = here() + 16;
    emit(ADDI(15, 0, jt));
    emit(JALR(16, 15, 0));
    emit(ADDI(14, 0, 77));       // skipped
    emit(ADDI(14, 0, 78));       // skipped
    emit(SW(16, 5, 36));         // jt: link = address of the skipped addi
    emit(ADDI(17, 0, 10));
    emit(ADDI(18, 0, 0));
    loop_a = here();
    emit(ADD(18, 18, 17));
    emit(ADDI(17, 17, -1));
    emit(BNE(17, 0, loop_a - here()));
    emit(SW(18, 5, 40));         // 55
    emit(BLT(2, 1, 8));          // -7 < 100: taken
    emit(ADDI(19, 0, 99));       // skipped
    emit(SW(19, 5, 44));         // 0
    emit(SW(14, 5, 48));         // 0
    // ------------------------------------------------------------- part B
    emit(LUI(20, DATA >> 12));
    emit(LW(23, 20, 8));         // nmldh operand, first timestep: pin=1, h=0
    emit(LW(25, 20, 12));        // tau
    emit(ADDI(26, 0, T_STEPS));
    emit(ADDI(9, 0, 0));
    emit(ADDI(4, 0, 0));
    tloop = here();
    emit(NMLDH(24, 23, 0));      // x24 = 1
    emit(XORI_(23, 23, 3));      // alternate between pin (2) and h (1)
    emit(ADDI(27, 20, 64));
    emit(ADDI(28, 20, 512));
    emit(ADDI(29, 0, N_NEUR));
    nloop = here();
    emit(LW(21, 27, 4));         // {b,a}
    emit(LW(22, 27, 8));         // {d,c}
    emit(NMLDL(0, 21, 22));
    emit(LW(1, 28, 512));        // input current
    emit(LW(31, 28, 0));         // synaptic current
    emit(LW(30, 27, 0));         // VU word
    emit(ADD(31, 31, 1));
    emit(ADD(2, 0, 27));
    emit(NMPN(2, 30, 31));       // update, store VU, x2 = spike
    emit(ADD(9, 9, 2));
    emit(BEQ(2, 0, 8));
    emit(ADDI(4, 4, 1));
    emit(NMDEC(31, 31, 25));
    emit(SW(31, 28, 0));
    emit(ADDI(27, 27, 12));
    emit(ADDI(28, 28, 4));
    emit(ADDI(29, 29, -1));
    emit(BNE(29, 0, nloop - here()));
    emit(ADDI(26, 26, -1));
    emit(BNE(26, 0, tloop - here()));
    emit(SW(9, 5, 52));
    emit(SW(4, 5, 56));
    emit(SW(24, 5, 60));
    emit(ADDI(7, 0, 1));
    emit(SW(7, 5, TOHOST - RES));
    emit(JAL(0, 0));
    // ------------------------------------------------------------- data
    mem.mem[(DATA + 8) / 4] = 32'd2;   // pin=1, h=0
    mem.mem[(DATA + 12) / 4] = 32'd4;  // tau = 4
    for (int n = 0; n < N_NEUR; n++) begin
      case (n % 4)
        0: begin e_bal[n] = ba(0.02, 0.2); e_dc[n] = dcw(-65, 8); end   // regular spiking
        1: begin e_bal[n] = ba(0.1, 0.2);  e_dc[n] = dcw(-65, 2); end   // fast spiking
        2: begin e_bal[n] = ba(0.02, 0.2); e_dc[n] = dcw(-55, 4); end   // intrinsically bursting
        default: begin e_bal[n] = ba(0.02, 0.2); e_dc[n] = dcw(-50, 2); end  // chattering
      endcase
      e_vu[n] = {16'(-65 * 256), 16'(-13 * 256)};
      e_cur[n] = 0;
      e_bias[n] = (n == 3) ? 32'(-6 * 65536) : 32'($urandom_range(1 * 65536, 4 * 65536));
      mem.mem[(REC + 12 * n) / 4] = e_vu[n];
      mem.mem[(REC + 12 * n + 4) / 4] = e_bal[n];
      mem.mem[(REC + 12 * n + 8) / 4] = e_dc[n];
      mem.mem[(CUR + 4 * n) / 4] = 0;
      mem.mem[(BIAS + 4 * n) / 4] = e_bias[n];
    end
    // reference run
    for (int t = 0; t < T_STEPS; t++) begin
      logic h, pin;
      h = (t % 2 == 1); pin = (t % 2 == 0);
      for (int n = 0; n < N_NEUR; n++) begin
        logic [32:0] r;
        logic [31:0] itot;
        itot = e_cur[n] + e_bias[n];
        r = ref_npu(e_vu[n], itot, e_bal[n], e_dc[n], h, pin);
        e_vu[n] = r[31:0]; e_spikes += r[32];
        e_cur[n] = ref_dcu(itot, 4, h);
      end
    end
    // ------------------------------------------------------------- run
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    wait (done);
    repeat (5) @(posedge clk);
    // part A results
    chk("add", mem.mem[RES / 4], 93);
    chk("mul", mem.mem[RES / 4 + 1], -700);
    chk("div", mem.mem[RES / 4 + 2], -14);
    chk("rem", mem.mem[RES / 4 + 3], 2);
    chk("sb", mem.mem[RES / 4 + 4], 32'h0000_FE00);
    chk("lb", mem.mem[RES / 4 + 5], -2);
    chk("lbu", mem.mem[RES / 4 + 6], 254);
    chk("jal", mem.mem[RES / 4 + 7], 5);
    chk("auipc", mem.mem[RES / 4 + 8], auipc_pc);
    chk("jalr", mem.mem[RES / 4 + 9], jt - 8);
    chk("loop", mem.mem[RES / 4 + 10], 55);
    chk("blt", mem.mem[RES / 4 + 11], 0);
    chk("jalr skip", mem.mem[RES / 4 + 12], 0);
    // part B results
    for (int n = 0; n < N_NEUR; n++) begin
      chk($sformatf("VU[%0d]", n), mem.mem[(REC + 12 * n) / 4], e_vu[n]);
      chk($sformatf("I[%0d]", n), mem.mem[(CUR + 4 * n) / 4], e_cur[n]);
    end
    chk("spikes (add)", mem.mem[RES / 4 + 13], e_spikes);
    chk("spikes (branch)", mem.mem[RES / 4 + 14], e_spikes);
    chk("nmldh rd", mem.mem[RES / 4 + 15], 1);
    // every cycle that retires nothing is a stall, a bubble, or pipeline fill
    checks++;
    if (cycles - n_retire > n_hz + n_ibub + n_busy + 2 || cycles - n_retire + 2 < n_hz + n_ibub + n_busy) begin
      failures++; $display("FAIL cycle accounting: cycles=%0d retired=%0d hz=%0d ibub=%0d busy=%0d",
                           cycles, n_retire, n_hz, n_ibub, n_busy);
    end
    $display("cycles=%0d retired=%0d IPC=%f hazard=%0d bypass=%0d imiss=%0d dmiss=%0d dwait=%0d taken=%0d",
             cycles, n_retire, real'(n_retire) / cycles, n_hz, n_fwd, n_imiss, n_dmiss, n_dwait, n_taken);
    $display("nmldl=%0d nmldh=%0d nmpn=%0d nmdec=%0d spikes=%0d pinned=%0d muldiv=%0d",
             n_ldl, n_ldh, n_pn, n_dec, n_spike, n_pin, n_muldiv);
    checks++; if (n_hz == 0)     begin failures++; $display("never: hazard stall"); end
    checks++; if (n_fwd == 0)    begin failures++; $display("never: bypass"); end
    checks++; if (n_imiss == 0)  begin failures++; $display("never: icache miss"); end
    checks++; if (n_dmiss == 0)  begin failures++; $display("never: dcache miss"); end
    checks++; if (n_dwait == 0)  begin failures++; $display("never: bus wait"); end
    checks++; if (n_taken == 0)  begin failures++; $display("never: taken branch"); end
    checks++; if (n_spike == 0)  begin failures++; $display("never: spike"); end
    checks++; if (n_pin == 0)    begin failures++; $display("never: pinned v"); end
    checks++; if (n_ldl == 0 || n_ldh == 0 || n_pn == 0 || n_dec == 0 || n_muldiv == 0) begin
      failures++; $display("never: some instruction class"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stop on the store to TOHOST
  always @(posedge clk) if (d_avm_write && !d_avm_waitrequest && d_avm_address == TOHOST) done <= 1;

  // mechanism counters
  always @(posedge clk) if (rst_n && !done) begin
    cycles++;
    if (retire) n_retire++;
    if (hazard_stall) n_hz++;
    if (dut.id_advance && ((dut.fwd1 && dut.ctrl.use_rs1) || (dut.fwd2 && dut.ctrl.use_rs2) || (dut.fwd3 && dut.ctrl.use_rd))) n_fwd++;
    if (i_avm_read && !i_avm_waitrequest) n_imiss++;
    if (!dut.ic_valid && !dut.mem_busy) n_ibub++;
    if (dut.mem_busy) n_busy++;
    if (d_avm_read && !d_avm_waitrequest) n_dmiss++;
    if ((d_avm_read || d_avm_write) && d_avm_waitrequest) n_dwait++;
    if (dut.id_advance && dut.br_taken) n_taken++;
    if (dut.ex_go) begin
      case (dut.idex.ctrl.nm_op)
        izhi_pkg::NM_LDL: n_ldl++;
        izhi_pkg::NM_LDH: n_ldh++;
        izhi_pkg::NM_DEC: n_dec++;
        izhi_pkg::NM_PN: begin
          n_pn++;
          if (dut.spike) n_spike++;
          else if (dut.cfg.pin && $signed(dut.u_npu.v_new) < $signed(dut.u_npu.c_w)) n_pin++;
        end
        default: ;
      endcase
      if (dut.idex.ctrl.alu_op inside {izhi_pkg::ALU_MUL, izhi_pkg::ALU_DIV, izhi_pkg::ALU_REM}) n_muldiv++;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog: program did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
