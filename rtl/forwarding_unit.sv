// forwarding_unit: hazard detection and write-back bypass ("Hazard Unit").
//
// Combinational. The instruction in fetch/decode reads up to three registers
// (rs1, rs2, and rd for nmpn). If any register it reads is the destination of
// the instruction now in execute, the result does not exist yet: the unit
// raises hazard_stall, which holds fetch/decode for one cycle and sends a
// bubble into execute. This is the stall rule the source states ("halted if
// any of the source registers of the fetched instruction is equal to the
// destination register of the current instruction"). One cycle later the
// producer is in memory+writeback, and for each read port the unit selects
// the value being written back instead of the stale register-file output
// (fwd1..fwd3 drive the "reg/fwd" multiplexers). x0 never causes a stall or a
// bypass.
module forwarding_unit (
  input  logic [4:0] id_rs1,
  input  logic [4:0] id_rs2,
  input  logic [4:0] id_rd,
  input  logic       id_use_rs1,
  input  logic       id_use_rs2,
  input  logic       id_use_rd,
  input  logic       ex_valid,
  input  logic       ex_reg_write,
  input  logic [4:0] ex_rd,
  input  logic       wb_valid,
  input  logic       wb_reg_write,
  input  logic [4:0] wb_rd,
  output logic       hazard_stall,
  output logic       fwd1,
  output logic       fwd2,
  output logic       fwd3
);
  logic ex_wr, wb_wr;

  assign ex_wr = ex_valid && ex_reg_write && (ex_rd != 5'd0);
  assign wb_wr = wb_valid && wb_reg_write && (wb_rd != 5'd0);

  assign hazard_stall = ex_wr && ((id_use_rs1 && id_rs1 == ex_rd) ||
                                  (id_use_rs2 && id_rs2 == ex_rd) ||
                                  (id_use_rd  && id_rd  == ex_rd));

  assign fwd1 = wb_wr && (id_rs1 == wb_rd);
  assign fwd2 = wb_wr && (id_rs2 == wb_rd);
  assign fwd3 = wb_wr && (id_rd  == wb_rd);
endmodule
