// regfile: the 32 x 32-bit integer register file.
//
// x0 reads as zero. Three asynchronous read ports serve rs1, rs2 and rd: the
// third exists because nmpn reads its rd register (the address of the VU
// word) in fetch/decode and writes its spike flag to the same register at
// writeback, so the core diagram feeds rs1, rs2 and rd into this block. One
// write port, written at the rising clock edge. A read in the same cycle as
// a write to that register returns the old value; the forwarding unit
// bypasses the write-back value around it. Reset clears all registers
// (this design's choice).
module regfile #(
  parameter int NREGS = 32,
  parameter int XLEN  = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [$clog2(NREGS)-1:0] ra1,
  input  logic [$clog2(NREGS)-1:0] ra2,
  input  logic [$clog2(NREGS)-1:0] ra3,
  output logic [XLEN-1:0]          rd1,
  output logic [XLEN-1:0]          rd2,
  output logic [XLEN-1:0]          rd3,
  input  logic                     we,
  input  logic [$clog2(NREGS)-1:0] wa,
  input  logic [XLEN-1:0]          wd
);
  logic [XLEN-1:0] regs [NREGS];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
    end else if (we && wa != '0) begin
      regs[wa] <= wd;
    end
  end

  assign rd1 = (ra1 == '0) ? '0 : regs[ra1];
  assign rd2 = (ra2 == '0) ? '0 : regs[ra2];
  assign rd3 = (ra3 == '0) ? '0 : regs[ra3];
endmodule
