// icache: instruction cache of the merged fetch/decode stage.
//
// Direct mapped, one 32-bit word per line, LINES lines, read only. The tag,
// valid and data arrays are read combinationally from the PC, so a hit
// delivers the instruction in the same cycle the PC is presented, which is
// what allows fetch and decode to share one stage. On a miss the cache
// raises avm_read for the word at the PC on its Avalon-MM master and keeps
// it raised, with the address stable, until the slave drops waitrequest; in
// that cycle the read data is passed straight to the decoder (valid = 1) and
// written into the line. valid = 0 tells the core to hold the PC and send a
// bubble down the pipeline. Only the valid bits are reset.
// The source gives this cache only its name and hit rates; organisation,
// size and refill protocol are this design's choices.
module icache #(
  parameter int LINES = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] addr,
  output logic [31:0] instr,
  output logic        valid,
  // Avalon-MM read master
  output logic [31:0] avm_address,
  output logic        avm_read,
  input  logic [31:0] avm_readdata,
  input  logic        avm_waitrequest
);
  localparam int IW = $clog2(LINES);
  localparam int TW = 30 - IW;

  logic [LINES-1:0] vld;
  logic [TW-1:0]    tags [LINES];
  logic [31:0]      data [LINES];
  logic [IW-1:0]    idx;
  logic [TW-1:0]    tag;
  logic             hit;

  assign idx = addr[IW+1:2];
  assign tag = addr[31:IW+2];
  assign hit = vld[idx] && (tags[idx] == tag);

  assign avm_address = {addr[31:2], 2'b00};
  assign avm_read    = !hit;
  assign instr       = hit ? data[idx] : avm_readdata;
  assign valid       = hit || !avm_waitrequest;

  always_ff @(posedge clk) begin
    if (!rst_n) vld <= '0;
    else if (avm_read && !avm_waitrequest) vld[idx] <= 1'b1;
  end

  always_ff @(posedge clk) begin
    if (avm_read && !avm_waitrequest) begin
      tags[idx] <= tag;
      data[idx] <= avm_readdata;
    end
  end

  // Avalon-MM: a master holds its request stable while waitrequest is high
  a_hold : assert property (@(posedge clk) disable iff (!rst_n)
    (avm_read && avm_waitrequest) |=> (avm_read && $stable(avm_address)));
endmodule
