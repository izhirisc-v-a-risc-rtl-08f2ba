// tb_sudoku_wta: a spiking winner-takes-all Sudoku solver run as a program
// on the IzhiRISC-V core. BOX sets the board: 2 gives a 4x4 board (64
// neurons, the default), 3 the classic 9x9 board (729 neurons).
// Neuron (r,c,k) stands for "digit k+1 in row r, column c". A spike of it
// inhibits every neuron of the same cell with another digit and every
// neuron for the same digit in the same row, column and box. All neurons
// get a noisy drive; neurons of given digits get a strong extra drive and
// the other digits of a given cell a negative one. The noise drives a
// search in which the network moves towards patterns where one neuron per
// cell fires most. Every WIN timesteps the most active neuron of each cell
// in that window is read as the cell's digit; the puzzle counts as solved
// if any window decodes to the solution.
// The program follows tb_network_8020 per neuron (nmldl, synaptic +
// external current, two 0.5 ms nmpn per 1 ms step, nmdec of the synaptic
// current); a fired neuron's spike is delivered through its target list in
// memory (count, then byte offset / weight pairs). The testbench checks every
// step's spike count and the final states against the integer reference
// model, watches the spike list the program writes to find the winners, and
// checks the decoded boards against the puzzle's unique solution.
// The board size, drive, noise and weights are this testbench's choices;
// with them the 4x4 puzzle is solved within 300 ms for every seed tried.
// With BOX = 3 and T_STEPS = 2000 the core still matches the reference
// exactly, and the 9x9 network reached the solution in two of four seeds
// tried (after 1.1 s): these simple settings are not a tuned 9x9 solver.
module tb_sudoku_wta;
  import rv_asm_pkg::*;
  import izhi_ref_pkg::*;

  localparam int BOX     = 2;                     // 2: 4x4 board, 3: 9x9 board
  localparam int S       = BOX * BOX;             // digits per cell, cells per row
  localparam int N_NEUR  = S * S * S;
  localparam int K_TGT   = 3 * (S - 1) + (BOX - 1) * (BOX - 1);   // neurons one spike inhibits
  localparam int LSTRIDE = 4 * (1 + 2 * K_TGT);   // bytes per target list
  localparam int T_STEPS = 600;
  localparam int WIN     = 100;                   // scoring window, timesteps
  localparam string PUZZLE   = (BOX == 2) ? ".2..3..2..4..3.." :
    "53..7....6..195....98....6.8...6...34..8.3..17...2...6.6....28....419..5....8..79";
  localparam string SOLUTION = (BOX == 2) ? "1234341221434321" :
    "534678912672195348198342567859761423426853791713924856961537284287419635345286179";
  localparam real W_INH = -6.0, DRIVE = 6.0, NOISE = 3.0, CLUE = 10.0, NOT_CLUE = -10.0;
  localparam int TAU     = 4;
  localparam int TOHOST  = 32'h0000_FFF0;
  localparam int REC     = 32'h0001_0000;   // VU, {b,a}, {d,c} per neuron
  localparam int ISYN    = 32'h0001_4000;
  localparam int FIRED   = 32'h0001_5000;
  localparam int SPK     = 32'h0001_6000;
  localparam int CONST   = 32'h0001_7000;
  localparam int THAL    = 32'h0002_0000;   // T_STEPS x N_NEUR input currents
  localparam int WGT     = THAL + ((T_STEPS * N_NEUR * 4 + 32'hFFF) & ~32'hFFF);  // target list of j at WGT + LSTRIDE*j
  localparam int TOP     = WGT + N_NEUR * LSTRIDE;
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

  // neuron n = S*(S*row + col) + digit
  function automatic bit conflict(int n, int m);
    int r1 = n / (S * S), c1 = (n / S) % S, k1 = n % S, r2 = m / (S * S), c2 = (m / S) % S, k2 = m % S;
    if (r1 == r2 && c1 == c2) return 1;
    if (k1 != k2) return 0;
    return r1 == r2 || c1 == c2 || (r1 / BOX == r2 / BOX && c1 / BOX == c2 / BOX);
  endfunction

  int score [N_NEUR];
  int steps_seen = 0;
  int board [S * S];
  int solved_at = -1, last_wrong = -1;

  // Winner of every cell from the current window's spike counts; returns
  // the number of cells that differ from the solution.
  function automatic int decode();
    int wrong = 0;
    for (int cl = 0; cl < S * S; cl++) begin
      int best = 0;
      for (int k = 1; k < S; k++) if (score[S * cl + k] > score[S * cl + best]) best = k;
      board[cl] = best + 1;
      if (best + 1 != SOLUTION[cl] - "0") wrong++;
    end
    return wrong;
  endfunction

  logic [31:0] e_vu [N_NEUR], e_i [N_NEUR], e_ba [N_NEUR], e_dc [N_NEUR];
  int e_spk [T_STEPS];

  initial begin
    int tloop, nloop, nospike, dloop, iloop, ddone_fix, dj, nt;
    int fired [N_NEUR];
    int nf, total;
    // Until the first clock edge in reset the core's pipeline registers hold
    // power-up values and its bus outputs are meaningless; the memory model
    // has no reset, so it is loaded only after reset has taken hold.
    repeat (2) @(posedge clk);
    for (int i = 0; i < WORDS; i++) mem.mem[i] = 0;
    for (int n = 0; n < N_NEUR; n++) score[n] = 0;
    // ---------------------------------------------------------- network
    for (int n = 0; n < N_NEUR; n++) begin
      e_ba[n] = {16'($rtoi(0.2 * 2048.0)), 16'($rtoi(0.1 * 2048.0))};   // fast spiking
      e_dc[n] = {16'($rtoi(2.0 * 2048.0)), 16'(-65 * 256)};
      e_vu[n] = {16'(-13 * 256), 16'(-65 * 256)};
      e_i[n]  = 0;
      mem.mem[(REC + 12 * n) / 4]     = e_vu[n];
      mem.mem[(REC + 12 * n + 4) / 4] = e_ba[n];
      mem.mem[(REC + 12 * n + 8) / 4] = e_dc[n];
      nt = 0;
      for (int i = 0; i < N_NEUR; i++)
        if (i != n && conflict(n, i)) begin
          mem.mem[(WGT + LSTRIDE * n + 4 + 8 * nt) / 4] = 4 * i;          // byte offset of the target
          mem.mem[(WGT + LSTRIDE * n + 8 + 8 * nt) / 4] = q16(W_INH);
          nt++;
        end
      if (nt != K_TGT) $fatal(1, "target count");
      mem.mem[(WGT + LSTRIDE * n) / 4] = nt;
    end
    for (int t = 0; t < T_STEPS; t++)
      for (int n = 0; n < N_NEUR; n++) begin
        real x;
        byte p;
        x = DRIVE + NOISE * randn();
        p = PUZZLE[n / S];
        if (p != ".") x += (p - "1" == n % S) ? CLUE : NOT_CLUE;
        mem.mem[(THAL + 4 * (N_NEUR * t + n)) / 4] = q16(x);
      end
    mem.mem[CONST / 4] = TAU;
    // ---------------------------------------------------------- program
    li(5, REC); li(6, ISYN); li(7, THAL); li(8, WGT); li(9, SPK); li(10, FIRED);
    li(17, LSTRIDE);
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
    emit(ADD(16, 16, 8));              // target list of j
    emit(LW(29, 16, 0));               // number of targets
    emit(ADDI(16, 16, 4));
    iloop = here();
    emit(LW(20, 16, 0));               // target offset
    emit(LW(18, 16, 4));               // weight
    emit(ADD(20, 20, 6));
    emit(LW(19, 20, 0));
    emit(ADD(19, 19, 18));
    emit(SW(19, 20, 0));
    emit(ADDI(16, 16, 8));
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
        for (int q = 0; q < K_TGT; q++) begin
          int ti;
          ti = mem.mem[(WGT + LSTRIDE * dj + 4 + 8 * q) / 4] / 4;
          e_i[ti] = e_i[ti] + mem.mem[(WGT + LSTRIDE * dj + 8 + 8 * q) / 4];
        end
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
    $write("board in the last window: ");
    for (int cl = 0; cl < S * S; cl++) $write("%0d", board[cl]);
    $display("  (%0d cells wrong)", last_wrong);
    checks++;
    if (solved_at < 0) begin
      failures++; $display("FAIL: no window decoded to the solution");
    end else $display("solution first decoded in the window ending at %0d ms", solved_at);
    $display("%0d neurons, %0d ms: %0d spikes", N_NEUR, T_STEPS, total);
    $display("cycles=%0d instructions=%0d IPC=%f hazard stalls=%f%% nmpn=%0d IPC_eff=%f",
             cycles, n_retire, real'(n_retire) / cycles, 100.0 * n_hz / cycles, n_pn,
             (real'(n_retire - n_pn - n_dec) + 19.0 * n_pn) / cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (d_avm_write && !d_avm_waitrequest && d_avm_address == TOHOST) done <= 1;
  // spike list and per-step count as the program writes them
  // (the fired-list writes of a step all come before its count is written)
  always @(posedge clk) if (d_avm_write && !d_avm_waitrequest) begin
    if (d_avm_address >= FIRED && d_avm_address < FIRED + 4 * N_NEUR)
      score[d_avm_writedata] = score[d_avm_writedata] + 1;
    if (d_avm_address >= SPK && d_avm_address < SPK + 4 * T_STEPS) begin
      steps_seen = steps_seen + 1;
      if (steps_seen % WIN == 0) begin
        last_wrong = decode();
        if (last_wrong == 0 && solved_at < 0) solved_at = steps_seen;
        for (int n = 0; n < N_NEUR; n++) score[n] = 0;
      end
    end
  end
  always @(posedge clk) if (rst_n && !done) begin
    cycles++;
    if (retire) n_retire++;
    if (hazard_stall) n_hz++;
    if (dut.ex_go && dut.idex.ctrl.nm_op == izhi_pkg::NM_PN) n_pn++;
    if (dut.ex_go && dut.idex.ctrl.nm_op == izhi_pkg::NM_DEC) n_dec++;
  end

  initial begin
    repeat (200_000_000) @(posedge clk);
    failures++; $display("watchdog: program did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
