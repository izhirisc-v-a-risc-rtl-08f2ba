// dcache: data cache of the merged memory+writeback stage.
//
// Direct mapped, one 32-bit word per line, LINES lines, write-through with
// no write allocation. Loads, stores and the VU-word store of nmpn come in
// from the execute/memory pipeline register. A load hit returns the line in
// the same cycle (combinational read), so the load completes in this stage.
// A load miss raises avm_read on the Avalon-MM master; in the cycle the
// slave drops waitrequest the read data is returned and written into the
// line. Every store raises avm_write with its byte enables and, once it is
// accepted, also updates the line if it is present. busy = 1 while a miss or
// a store waits on the bus; the core then freezes the whole pipeline. Only
// the valid bits are reset.
// The source gives this cache only its name and hit rates; organisation,
// size and write policy are this design's choices.
module dcache #(
  parameter int LINES = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        rd_req,
  input  logic        wr_req,
  input  logic [31:0] addr,
  input  logic [31:0] wdata,
  input  logic [3:0]  be,
  output logic [31:0] rdata,
  output logic        busy,
  // Avalon-MM master
  output logic [31:0] avm_address,
  output logic        avm_read,
  output logic        avm_write,
  output logic [31:0] avm_writedata,
  output logic [3:0]  avm_byteenable,
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
  logic             hit, fill, wr_done;

  assign idx = addr[IW+1:2];
  assign tag = addr[31:IW+2];
  assign hit = vld[idx] && (tags[idx] == tag);

  assign avm_address    = {addr[31:2], 2'b00};
  assign avm_read       = rd_req && !hit;
  assign avm_write      = wr_req;
  assign avm_writedata  = wdata;
  assign avm_byteenable = wr_req ? be : 4'b1111;

  assign fill    = avm_read && !avm_waitrequest;
  assign wr_done = avm_write && !avm_waitrequest;
  assign rdata   = hit ? data[idx] : avm_readdata;
  assign busy    = (avm_read || avm_write) && avm_waitrequest;

  always_ff @(posedge clk) begin
    if (!rst_n) vld <= '0;
    else if (fill) vld[idx] <= 1'b1;
  end

  always_ff @(posedge clk) begin
    if (fill) begin
      tags[idx] <= tag;
      data[idx] <= avm_readdata;
    end else if (wr_done && hit) begin
      for (int i = 0; i < 4; i++)
        if (be[i]) data[idx][8*i +: 8] <= wdata[8*i +: 8];
    end
  end

  a_one_cmd : assert property (@(posedge clk) disable iff (!rst_n) !(avm_read && avm_write));
  a_hold : assert property (@(posedge clk) disable iff (!rst_n)
    ((avm_read || avm_write) && avm_waitrequest) |=>
      ((avm_read || avm_write) && $stable(avm_address)));
endmodule
