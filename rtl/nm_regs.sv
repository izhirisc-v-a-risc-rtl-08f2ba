// nm_regs: the neuromorphic configuration registers ("NM REGS").
//
// Hold the Izhikevich parameters that every nmpn and nmdec uses until they
// are reloaded. nmldl writes, with the field positions of the published ISA
// table, a = rs1[15:0] and b = rs1[31:16] (Q4.11), c = rs2[15:0] (Q7.8) and
// d = rs2[31:16] (Q4.11); nmldh writes h = rs1[0] (1: 0.125 ms timestep,
// 0: 0.5 ms) and pin = rs1[1]. Both write at the clock edge that ends their
// execute cycle, so the next instruction already sees the new values. tau is
// not stored here: nmdec takes it from its rs2 operand. Reset clears every
// field (this design's choice).
module nm_regs
  import izhi_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ld_l,
  input  logic        ld_h,
  input  logic [31:0] rs1,
  input  logic [31:0] rs2,
  output nm_cfg_t     cfg
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cfg <= '0;
    end else begin
      if (ld_l) begin
        cfg.a <= rs1[15:0];
        cfg.b <= rs1[31:16];
        cfg.c <= rs2[15:0];
        cfg.d <= rs2[31:16];
      end
      if (ld_h) begin
        cfg.h   <= rs1[0];
        cfg.pin <= rs1[1];
      end
    end
  end
endmodule
