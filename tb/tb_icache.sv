// tb_icache: self-checking test of the instruction cache.
// A requester walks random, often repeated, addresses and holds each one
// until the cache says valid, as the core's PC does. Every delivered word
// must equal the memory word; a second fetch of a resident line must be a
// hit (valid at once, no bus read), and an address that aliases the same
// line with another tag must miss and refill.
module tb_icache;
  logic clk = 0, rst_n = 0;
  logic [31:0] addr = 0, instr, avm_address, avm_readdata;
  logic valid, avm_read, avm_waitrequest;
  int checks = 0, failures = 0, hits = 0, misses = 0;
  logic [31:0] unused_d;
  logic unused_w;

  icache #(.LINES(64)) dut (.*);
  avalon_mem_model #(.WORDS(1024), .MAX_WAIT(3)) mem (
    .clk, .i_address(avm_address), .i_read(avm_read), .i_readdata(avm_readdata),
    .i_waitrequest(avm_waitrequest), .d_address(32'd0), .d_read(1'b0), .d_write(1'b0),
    .d_writedata(32'd0), .d_byteenable(4'd0), .d_readdata(unused_d), .d_waitrequest(unused_w));
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic fetch(logic [31:0] a, output int cycles);
    addr = a; cycles = 0;
    #1;
    if (avm_read) cycles = 1000;  // bus used: a miss
    while (!valid) begin @(posedge clk); #1; cycles++; end
    checks++;
    if (instr !== mem.mem[a[11:2]]) begin failures++; $display("FAIL %h: %h exp %h", a, instr, mem.mem[a[11:2]]); end
    @(posedge clk); #1;
  endtask

  initial begin
    int c, c2;
    for (int i = 0; i < 1024; i++) mem.mem[i] = $urandom;
    @(posedge clk); @(posedge clk); #1 rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      logic [31:0] a;
      a = {20'd0, 10'($urandom_range(0, 127)), 2'b00};
      fetch(a, c);
      if (c < 1000) hits++; else misses++;
      fetch(a, c2);   // immediately again: must hit
      checks++; if (c2 != 0) begin failures++; $display("FAIL refetch %h", a); end
    end
    // aliasing: line 5 with two tags
    fetch(32'h0000_0014, c); fetch(32'h0000_0114, c); fetch(32'h0000_0014, c);
    checks++; if (c < 1000) begin failures++; $display("FAIL alias"); end
    checks++; if (hits == 0 || misses == 0) failures++;
    $display("hits=%0d misses=%0d", hits, misses);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
