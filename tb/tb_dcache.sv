// tb_dcache: self-checking test of the write-through data cache.
// Random loads and byte/half/word stores to a small address range, each
// request held until busy drops, as the core's memory stage does. Loads
// must return the contents of a reference memory kept in the testbench, and
// after every store the backing memory must match the reference, so both the
// cache update on a hit and the write-through are checked. A load right
// after a load of the same line must hit without using the bus.
module tb_dcache;
  logic clk = 0, rst_n = 0, rd_req = 0, wr_req = 0;
  logic [31:0] addr = 0, wdata = 0, rdata;
  logic [3:0] be = 0;
  logic busy;
  logic [31:0] avm_address, avm_writedata, avm_readdata;
  logic avm_read, avm_write, avm_waitrequest;
  logic [3:0] avm_byteenable;
  logic [31:0] refm [256];
  logic [31:0] unused_i;
  logic unused_iw;
  int checks = 0, failures = 0, hits = 0;

  dcache #(.LINES(32)) dut (.*);
  avalon_mem_model #(.WORDS(1024), .MAX_WAIT(3)) mem (
    .clk, .i_address(32'd0), .i_read(1'b0), .i_readdata(unused_i), .i_waitrequest(unused_iw),
    .d_address(avm_address), .d_read(avm_read), .d_write(avm_write), .d_writedata(avm_writedata),
    .d_byteenable(avm_byteenable), .d_readdata(avm_readdata), .d_waitrequest(avm_waitrequest));
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic access(logic wr, logic [31:0] a, logic [31:0] d, logic [3:0] b, output int cyc);
    rd_req = !wr; wr_req = wr; addr = a; wdata = d; be = b; cyc = 0;
    #1;
    while (busy) begin @(posedge clk); #1; cyc++; end
    if (!wr) begin
      checks++;
      if (rdata !== refm[a[9:2]]) begin failures++; $display("FAIL load %h: %h exp %h", a, rdata, refm[a[9:2]]); end
    end
    @(posedge clk); #1;
    rd_req = 0; wr_req = 0;
    if (wr) begin
      for (int i = 0; i < 4; i++) if (b[i]) refm[a[9:2]][8*i +: 8] = d[8*i +: 8];
      checks++;
      if (mem.mem[a[9:2]] !== refm[a[9:2]]) begin failures++; $display("FAIL store %h", a); end
    end
  endtask

  initial begin
    int c;
    for (int i = 0; i < 1024; i++) mem.mem[i] = $urandom;
    for (int i = 0; i < 256; i++) refm[i] = mem.mem[i];
    @(posedge clk); @(posedge clk); #1 rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      logic [31:0] a;
      a = {22'd0, 8'($urandom_range(0, 95)), 2'b00};
      if ($urandom_range(0, 2) == 0) begin
        logic [3:0] b;
        case ($urandom_range(0, 2)) 0: b = 4'b0001 << $urandom_range(0, 3); 1: b = $urandom_range(0, 1) ? 4'b1100 : 4'b0011; default: b = 4'b1111; endcase
        access(1, a, $urandom, b, c);
      end else begin
        access(0, a, 0, 4'b1111, c);
        access(0, a, 0, 4'b1111, c);   // second load: a hit
        checks++; if (c != 0) failures++; else hits++;
      end
    end
    $display("hits=%0d writes=%0d waits=%0d", hits, mem.d_writes, mem.d_waits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
