// dcu: Neuron Decay Unit, exponential decay of a synaptic current.
//
// Combinational; serves nmdec in the execute stage. One Forward Euler step
// of dI/dt = -I / tau is I <- I - (I / tau) h. There is no divider: the
// Q15.16 input is shifted right arithmetically by one to nine places and,
// depending on the divider tau (the rs2 value), a fixed set of these shifted
// copies is summed to approximate I / tau:
//   /2 = x>>1   /3 = x>>2 + x>>4 + x>>6 + x>>8   /4 = x>>2
//   /5 = x>>3 + x>>4 + x>>7 + x>>8   /6 = x>>3 + x>>5 + x>>7 + x>>9
//   /7 = x>>3 + x>>6 + x>>9   /8 = x>>3
// (the published approximation table). The sum is then multiplied by the
// timestep h through a shift by 1 (0.5 ms) or 3 (0.125 ms) and subtracted
// from I. Returning the decayed current rather than only the decrement, and
// leaving I unchanged for a tau outside 2..8, are this design's choices.
module dcu (
  input  logic [31:0] isyn,
  input  logic [31:0] tau,
  input  logic        h,
  output logic [31:0] isyn_next
);
  logic signed [31:0] x, q, dec;
  logic signed [31:0] sh [10];

  assign x = $signed(isyn);

  always_comb begin
    for (int k = 0; k < 10; k++) sh[k] = x >>> k;
    unique case (tau)
      32'd2:    q = sh[1];
      32'd3:    q = sh[2] + sh[4] + sh[6] + sh[8];
      32'd4:    q = sh[2];
      32'd5:    q = sh[3] + sh[4] + sh[7] + sh[8];
      32'd6:    q = sh[3] + sh[5] + sh[7] + sh[9];
      32'd7:    q = sh[3] + sh[6] + sh[9];
      32'd8:    q = sh[3];
      default: q = '0;
    endcase
    dec       = h ? (q >>> 3) : (q >>> 1);
    isyn_next = $unsigned(x - dec);
  end
endmodule
