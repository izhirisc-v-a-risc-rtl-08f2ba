// izhirisc_core: the IzhiRISC-V processor core.
//
// A three-stage in-order RV32IM pipeline with a neuromorphic extension:
//   1. Fetch/Decode (merged): PC, instruction cache, decoder, immediate
//      extender, register file read with write-back bypass, branch and jump
//      resolution. Taken branches redirect the PC at the next edge, so no
//      instruction is ever fetched down a wrong path.
//   2. Execute: ALU, and beside it the NPU (nmpn), the DCU (nmdec) and the
//      NM REGS configuration registers (nmldl, nmldh).
//   3. Memory+Writeback (merged): data cache access, load alignment, register
//      file write.
// nmpn works like an R-type and an S-type instruction at once: rs1 holds the
// VU word, rs2 the synaptic current and rd the address of the VU word. The
// NPU computes the new VU word, the ALU forms the address (rd + 0), the
// memory stage stores the word there, and rd receives 1 if the neuron spiked
// and 0 if not.
// Stalls: a register the decode-stage instruction reads that the execute
// stage instruction will write holds decode for one cycle (hazard_stall) and
// inserts a bubble; an instruction cache miss holds the PC and inserts
// bubbles; a data cache miss or a store waiting on the bus freezes all three
// stages. Each instruction otherwise takes one cycle in every stage.
// Both caches have an Avalon-MM master, brought out as ports for the system
// bus. retire pulses when an instruction leaves the last stage and
// hazard_stall when a hazard bubble is inserted, for counting IPC and stall
// rates.
// The stage split, the units and the nmpn data flow follow the published
// block diagram and text; cache organisation, the custom funct3 encoding,
// the absence of traps/CSRs and the bus protocol details are this design's.
module izhirisc_core
  import izhi_pkg::*;
#(
  parameter logic [31:0] RESET_PC     = 32'h0000_0000,
  parameter int          ICACHE_LINES = 1024,
  parameter int          DCACHE_LINES = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  // instruction master
  output logic [31:0] i_avm_address,
  output logic        i_avm_read,
  input  logic [31:0] i_avm_readdata,
  input  logic        i_avm_waitrequest,
  // data master
  output logic [31:0] d_avm_address,
  output logic        d_avm_read,
  output logic        d_avm_write,
  output logic [31:0] d_avm_writedata,
  output logic [3:0]  d_avm_byteenable,
  input  logic [31:0] d_avm_readdata,
  input  logic        d_avm_waitrequest,
  // activity
  output logic        retire,
  output logic        hazard_stall
);
  // ---------------------------------------------------------------------
  // pipeline registers
  typedef struct packed {
    logic        valid;
    ctrl_t       ctrl;
    logic [31:0] pc;
    logic [31:0] op1;   // rs1 value
    logic [31:0] op2;   // rs2 value
    logic [31:0] op3;   // rd value (nmpn address)
    logic [31:0] imm;
  } idex_t;

  typedef struct packed {
    logic        valid;
    logic        reg_write;
    logic [4:0]  rd;
    logic        mem_read;
    logic        mem_write;
    logic [2:0]  funct3;
    logic [31:0] result;  // ALU result / NM result
    logic [31:0] addr;
    logic [31:0] sdata;   // store data (rs2 or new VU word)
  } exwb_t;

  idex_t idex;
  exwb_t exwb;

  logic mem_busy;

  // ---------------------------------------------------------------------
  // Fetch / Decode
  logic [31:0] pc, pc_plus4, instr, imm, target;
  logic        ic_valid, br_taken, fwd1, fwd2, fwd3;
  logic [31:0] rf1, rf2, rf3, op1, op2, op3, wb_data;
  logic        wb_we;
  ctrl_t       ctrl;
  logic        id_valid, id_advance, hold_pc, hz;

  icache #(.LINES(ICACHE_LINES)) u_icache (
    .clk, .rst_n, .addr(pc), .instr, .valid(ic_valid),
    .avm_address(i_avm_address), .avm_read(i_avm_read),
    .avm_readdata(i_avm_readdata), .avm_waitrequest(i_avm_waitrequest));

  control_unit u_ctrl (.instr, .ctrl);
  extender     u_ext  (.instr, .imm_type(ctrl.imm_type), .imm);

  regfile u_rf (
    .clk, .rst_n, .ra1(ctrl.rs1), .ra2(ctrl.rs2), .ra3(ctrl.rd),
    .rd1(rf1), .rd2(rf2), .rd3(rf3), .we(wb_we), .wa(exwb.rd), .wd(wb_data));

  forwarding_unit u_fwd (
    .id_rs1(ctrl.rs1), .id_rs2(ctrl.rs2), .id_rd(ctrl.rd),
    .id_use_rs1(ctrl.use_rs1), .id_use_rs2(ctrl.use_rs2), .id_use_rd(ctrl.use_rd),
    .ex_valid(idex.valid), .ex_reg_write(idex.ctrl.reg_write), .ex_rd(idex.ctrl.rd),
    .wb_valid(exwb.valid), .wb_reg_write(exwb.reg_write), .wb_rd(exwb.rd),
    .hazard_stall(hz), .fwd1, .fwd2, .fwd3);

  assign op1 = fwd1 ? wb_data : rf1;
  assign op2 = fwd2 ? wb_data : rf2;
  assign op3 = fwd3 ? wb_data : rf3;

  branch_calc u_br (
    .pc, .imm, .op1, .op2, .br_type(ctrl.br_type), .funct3(ctrl.funct3),
    .taken(br_taken), .target);

  // An instruction leaves decode when it is fetched, has no hazard and the
  // memory stage is not frozen.
  assign id_valid     = ic_valid && !hz;
  assign id_advance   = id_valid && !mem_busy;
  assign hold_pc      = !id_advance;
  assign hazard_stall = ic_valid && hz && !mem_busy;

  pc_unit #(.RESET_PC(RESET_PC)) u_pc (
    .clk, .rst_n, .hold(hold_pc), .redirect(br_taken), .target, .pc, .pc_plus4);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      idex <= '0;
    end else if (!mem_busy) begin
      idex.valid <= id_valid;
      idex.ctrl  <= id_valid ? ctrl : CTRL_NOP;
      idex.pc    <= pc;
      idex.op1   <= op1;
      idex.op2   <= op2;
      idex.op3   <= op3;
      idex.imm   <= imm;
    end
  end

  // ---------------------------------------------------------------------
  // Execute
  logic [31:0] alu_a, alu_b, alu_y, vu_next, dec_out, ex_result;
  logic        spike;
  nm_cfg_t     cfg;
  logic        ex_go;

  assign ex_go = idex.valid && !mem_busy;

  always_comb begin
    unique case (idex.ctrl.src_a)
      SRCA_PC: alu_a = idex.pc;
      SRCA_RD: alu_a = idex.op3;
      default: alu_a = idex.op1;
    endcase
    unique case (idex.ctrl.src_b)
      SRCB_IMM:  alu_b = idex.imm;
      SRCB_FOUR: alu_b = 32'd4;
      default:   alu_b = idex.op2;
    endcase
  end

  alu u_alu (.op(idex.ctrl.alu_op), .a(alu_a), .b(alu_b), .y(alu_y));

  nm_regs u_nmregs (
    .clk, .rst_n,
    .ld_l(ex_go && idex.ctrl.nm_op == NM_LDL),
    .ld_h(ex_go && idex.ctrl.nm_op == NM_LDH),
    .rs1(idex.op1), .rs2(idex.op2), .cfg);

  npu u_npu (.vu(idex.op1), .isyn(idex.op2), .cfg, .vu_next, .spike);
  dcu u_dcu (.isyn(idex.op1), .tau(idex.op2), .h(cfg.h), .isyn_next(dec_out));

  always_comb begin
    unique case (idex.ctrl.nm_op)
      NM_LDL, NM_LDH: ex_result = 32'd1;
      NM_PN:          ex_result = {31'd0, spike};
      NM_DEC:         ex_result = dec_out;
      default:        ex_result = alu_y;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      exwb <= '0;
    end else if (!mem_busy) begin
      exwb.valid     <= idex.valid;
      exwb.reg_write <= idex.valid && idex.ctrl.reg_write;
      exwb.rd        <= idex.ctrl.rd;
      exwb.mem_read  <= idex.valid && idex.ctrl.mem_read;
      exwb.mem_write <= idex.valid && idex.ctrl.mem_write;
      exwb.funct3    <= idex.ctrl.funct3;
      exwb.result    <= ex_result;
      exwb.addr      <= alu_y;
      exwb.sdata     <= (idex.ctrl.nm_op == NM_PN) ? vu_next : idex.op2;
    end
  end

  // ---------------------------------------------------------------------
  // Memory + Writeback
  logic [31:0] dc_rdata;

  dcache #(.LINES(DCACHE_LINES)) u_dcache (
    .clk, .rst_n,
    .rd_req(exwb.valid && exwb.mem_read), .wr_req(exwb.valid && exwb.mem_write),
    .addr(exwb.addr), .wdata(store_data(exwb.funct3[1:0], exwb.sdata)),
    .be(store_be(exwb.funct3[1:0], exwb.addr[1:0])),
    .rdata(dc_rdata), .busy(mem_busy),
    .avm_address(d_avm_address), .avm_read(d_avm_read), .avm_write(d_avm_write),
    .avm_writedata(d_avm_writedata), .avm_byteenable(d_avm_byteenable),
    .avm_readdata(d_avm_readdata), .avm_waitrequest(d_avm_waitrequest));

  assign wb_data = exwb.mem_read ? load_extend(exwb.funct3, exwb.addr[1:0], dc_rdata)
                                 : exwb.result;
  assign wb_we   = exwb.valid && exwb.reg_write && !mem_busy;
  assign retire  = exwb.valid && !mem_busy;
endmodule
