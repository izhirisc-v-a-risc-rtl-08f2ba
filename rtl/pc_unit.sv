// pc_unit: program counter of the merged fetch/decode stage.
//
// The PC register, its +4 incrementer and the next-PC multiplexer drawn at
// the left of the core's block diagram. Each clock the PC takes, in this
// order of priority: its own value when the pipeline holds (cache miss,
// hazard or memory stall), the branch/jump target when the branch unit in
// the same stage redirects, otherwise PC+4. Because branches resolve in the
// stage that fetches, a redirect costs no cycle. Reset (synchronous,
// active low) loads RESET_PC; the reset address and the priority order are
// this design's choices.
module pc_unit #(
  parameter logic [31:0] RESET_PC = 32'h0000_0000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        hold,
  input  logic        redirect,
  input  logic [31:0] target,
  output logic [31:0] pc,
  output logic [31:0] pc_plus4
);
  assign pc_plus4 = pc + 32'd4;

  always_ff @(posedge clk) begin
    if (!rst_n)        pc <= RESET_PC;
    else if (hold)     pc <= pc;
    else if (redirect) pc <= target;
    else               pc <= pc_plus4;
  end
endmodule
