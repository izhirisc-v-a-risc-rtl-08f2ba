// avalon_mem_model: behavioural memory with two Avalon-MM slave ports, used
// by the testbenches in place of the system's on-chip RAM and SDRAM.
// Port i is read only (instruction fetch), port d reads and writes with byte
// enables; both see the same array mem[], which the testbench fills and
// inspects directly. Each transfer waits a random number of cycles, 0 to
// MAX_WAIT (per port), with waitrequest high, and completes in the cycle
// waitrequest is low: read data is valid in that cycle and a write is
// performed at its clock edge. Addresses wrap modulo the memory size.
module avalon_mem_model #(
  parameter int WORDS    = 16384,
  parameter int MAX_WAIT = 3
) (
  input  logic        clk,
  input  logic [31:0] i_address,
  input  logic        i_read,
  output logic [31:0] i_readdata,
  output logic        i_waitrequest,
  input  logic [31:0] d_address,
  input  logic        d_read,
  input  logic        d_write,
  input  logic [31:0] d_writedata,
  input  logic [3:0]  d_byteenable,
  output logic [31:0] d_readdata,
  output logic        d_waitrequest
);
  localparam int AW = $clog2(WORDS);
  logic [31:0] mem [WORDS];
  int unsigned iwc = 0, dwc = 0;
  int unsigned i_reads = 0, d_reads = 0, d_writes = 0, d_waits = 0;
  logic d_req;

  assign d_req         = d_read || d_write;
  assign i_waitrequest = i_read && (iwc != 0);
  assign d_waitrequest = d_req && (dwc != 0);
  assign i_readdata    = mem[i_address[AW+1:2]];
  assign d_readdata    = mem[d_address[AW+1:2]];

  always @(posedge clk) begin
    if (i_read) begin
      if (iwc != 0) iwc <= iwc - 1;
      else begin iwc <= $urandom_range(0, MAX_WAIT); i_reads <= i_reads + 1; end
    end
    if (d_req) begin
      if (dwc != 0) begin dwc <= dwc - 1; d_waits <= d_waits + 1; end
      else begin
        dwc <= $urandom_range(0, MAX_WAIT);
        if (d_read) d_reads <= d_reads + 1;
        if (d_write) begin
          d_writes <= d_writes + 1;
          for (int b = 0; b < 4; b++)
            if (d_byteenable[b]) mem[d_address[AW+1:2]][8*b +: 8] <= d_writedata[8*b +: 8];
        end
      end
    end
  end
endmodule
