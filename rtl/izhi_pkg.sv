// izhi_pkg: types and constants shared by the IzhiRISC-V core.
//
// Holds the RV32 base opcodes, the custom-0 opcode of the neuromorphic
// extension (0001011, as the ISA table fixes it) and the funct3 values chosen
// for its four instructions (nmldl, nmldh, nmpn, nmdec; the values 0..3 in
// table order are this design's choice, no encoding is published), the
// decoded control word that travels down the pipeline, and the neuromorphic
// configuration record (a, b, c, d, h, pin) read by the NPU and the DCU.
// Fixed-point formats: v, u, c in Q7.8; a, b, d in Q4.11; Isyn in Q15.16.
package izhi_pkg;

  localparam int XLEN = 32;

  // RV32 major opcodes
  localparam logic [6:0] OPC_LUI     = 7'b0110111;
  localparam logic [6:0] OPC_AUIPC   = 7'b0010111;
  localparam logic [6:0] OPC_JAL     = 7'b1101111;
  localparam logic [6:0] OPC_JALR    = 7'b1100111;
  localparam logic [6:0] OPC_BRANCH  = 7'b1100011;
  localparam logic [6:0] OPC_LOAD    = 7'b0000011;
  localparam logic [6:0] OPC_STORE   = 7'b0100011;
  localparam logic [6:0] OPC_OPIMM   = 7'b0010011;
  localparam logic [6:0] OPC_OP      = 7'b0110011;
  localparam logic [6:0] OPC_MISCMEM = 7'b0001111;
  localparam logic [6:0] OPC_SYSTEM  = 7'b1110011;
  localparam logic [6:0] OPC_CUSTOM0 = 7'b0001011;

  // funct3 of the neuromorphic instructions (design choice)
  localparam logic [2:0] F3_NMLDL = 3'b000;
  localparam logic [2:0] F3_NMLDH = 3'b001;
  localparam logic [2:0] F3_NMPN  = 3'b010;
  localparam logic [2:0] F3_NMDEC = 3'b011;

  typedef enum logic [4:0] {
    ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLT, ALU_SLTU, ALU_XOR, ALU_SRL, ALU_SRA,
    ALU_OR, ALU_AND, ALU_MUL, ALU_MULH, ALU_MULHSU, ALU_MULHU,
    ALU_DIV, ALU_DIVU, ALU_REM, ALU_REMU, ALU_PASSB
  } alu_op_e;

  typedef enum logic [2:0] {IMM_NONE, IMM_I, IMM_S, IMM_B, IMM_U, IMM_J} imm_e;
  typedef enum logic [1:0] {SRCA_RS1, SRCA_PC, SRCA_RD} srca_e;
  typedef enum logic [1:0] {SRCB_RS2, SRCB_IMM, SRCB_FOUR} srcb_e;
  typedef enum logic [1:0] {BR_NONE, BR_COND, BR_JAL, BR_JALR} br_e;
  typedef enum logic [2:0] {NM_NONE, NM_LDL, NM_LDH, NM_PN, NM_DEC} nm_op_e;

  // Decoded control word
  typedef struct packed {
    logic       reg_write;  // writes rd
    logic [4:0] rd;
    logic [4:0] rs1;
    logic [4:0] rs2;
    logic       use_rs1;
    logic       use_rs2;
    logic       use_rd;     // rd is also read (nmpn: address of the VU word)
    logic       mem_read;
    logic       mem_write;  // store, or nmpn VU-word store
    logic [2:0] funct3;     // load/store size, branch condition
    alu_op_e    alu_op;
    srca_e      src_a;
    srcb_e      src_b;
    imm_e       imm_type;
    br_e        br_type;
    nm_op_e     nm_op;
  } ctrl_t;

  localparam ctrl_t CTRL_NOP = '{
    reg_write: 1'b0, rd: 5'd0, rs1: 5'd0, rs2: 5'd0, use_rs1: 1'b0, use_rs2: 1'b0,
    use_rd: 1'b0, mem_read: 1'b0, mem_write: 1'b0, funct3: 3'd0, alu_op: ALU_ADD,
    src_a: SRCA_RS1, src_b: SRCB_RS2, imm_type: IMM_NONE, br_type: BR_NONE, nm_op: NM_NONE};

  // Neuromorphic configuration registers (NM REGS)
  typedef struct packed {
    logic signed [15:0] a;   // Q4.11
    logic signed [15:0] b;   // Q4.11
    logic signed [15:0] c;   // Q7.8, reset potential V_RST
    logic signed [15:0] d;   // Q4.11
    logic               h;   // 1: 0.125 ms, 0: 0.5 ms
    logic               pin; // 1: do not let v fall below c
  } nm_cfg_t;

  // Timestep as a right-shift amount: 0.5 ms = >>1, 0.125 ms = >>3
  function automatic int unsigned h_shift(input logic h);
    return h ? 3 : 1;
  endfunction

  // Byte enables of a store of size funct3[1:0] at byte offset off
  function automatic logic [3:0] store_be(input logic [1:0] size, input logic [1:0] off);
    case (size)
      2'b00:   return 4'b0001 << off;
      2'b01:   return off[1] ? 4'b1100 : 4'b0011;
      default: return 4'b1111;
    endcase
  endfunction

  // Store data replicated onto the byte lanes
  function automatic logic [31:0] store_data(input logic [1:0] size, input logic [31:0] d);
    case (size)
      2'b00:   return {4{d[7:0]}};
      2'b01:   return {2{d[15:0]}};
      default: return d;
    endcase
  endfunction

  // Load result from the addressed word: size/sign from funct3, byte offset off
  function automatic logic [31:0] load_extend(input logic [2:0] f3, input logic [1:0] off,
                                              input logic [31:0] w);
    logic [31:0] s;
    s = w >> {off, 3'b000};
    case (f3)
      3'b000:  return {{24{s[7]}}, s[7:0]};
      3'b001:  return {{16{s[15]}}, s[15:0]};
      3'b100:  return {24'd0, s[7:0]};
      3'b101:  return {16'd0, s[15:0]};
      default: return w;
    endcase
  endfunction

endpackage
