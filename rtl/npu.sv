// npu: Neuron Processing Unit, one Izhikevich neuron update per cycle.
//
// Combinational; it sits beside the ALU in the execute stage and serves nmpn.
// From the VU word (v in [31:16], u in [15:0], both Q7.8), the synaptic
// current Isyn (Q15.16) and the parameters in NM REGS it takes one Forward
// Euler step of
//   dv/dt = 0.04 v^2 + 5 v + 140 - u + Isyn,   du/dt = a (b v - u)
// with timestep h = 0.5 ms (shift right by 1) or 0.125 ms (shift by 3).
// Internally the dv sum is kept exactly with 32 fraction bits (0.04 is the
// Q0.16 constant 2621/65536) and the du sum with 30 fraction bits (a, b in
// Q4.11); each is scaled by h and brought back to Q7.8 by one arithmetic
// right shift, i.e. rounded towards minus infinity. If the new v reaches the
// threshold V_TH (30 mV) the neuron spikes: spike = 1, v <- c and u <- u + d.
// Otherwise, with the pin bit set, v is not allowed below c. Results are
// saturated to 16 bits and packed back into a VU word.
// Following the source: the equations, the Q-formats, the shift-based
// timestep, the reset and the pin rule. This design's own choices: the
// threshold value, the 0.04 constant, rounding, saturation, and taking the
// reset on the updated v in the same instruction.
module npu
  import izhi_pkg::*;
#(
  parameter int V_TH_Q78 = 7680  // 30.0 in Q7.8
) (
  input  logic [31:0] vu,
  input  logic [31:0] isyn,
  input  nm_cfg_t     cfg,
  output logic [31:0] vu_next,
  output logic        spike
);
  localparam longint K004 = 2621;  // 0.04 in Q0.16

  logic signed [15:0] v, u;
  logic signed [63:0] vv, acc_v, acc_u, v_new, u_new, u_rst, c_w;
  logic signed [15:0] v_out, u_out;
  int unsigned        hs;

  function automatic logic signed [15:0] sat16(input logic signed [63:0] x);
    if (x > 64'sd32767)       return 16'sh7FFF;
    else if (x < -64'sd32768) return 16'sh8000;
    else                      return x[15:0];
  endfunction

  assign v  = vu[31:16];
  assign u  = vu[15:0];
  assign hs = h_shift(cfg.h);

  always_comb begin
    vv    = 64'(v) * 64'(v);                      // Q.16
    // dv/dt with 32 fraction bits
    acc_v = vv * K004                               // 0.04 v^2
          + (64'(v) * 5 <<< 24)                     // 5 v
          + (64'sd140 <<< 32)                       // 140
          - (64'(u) <<< 24)                         // u
          + (64'($signed(isyn)) <<< 16);            // Isyn
    v_new = 64'(v) + (acc_v >>> (24 + hs));
    // du/dt with 30 fraction bits: a * (b v - u)
    acc_u = 64'(cfg.a) * (64'(cfg.b) * 64'(v) - (64'(u) <<< 11));
    u_new = 64'(u) + (acc_u >>> (22 + hs));
    u_rst = u_new + (64'(cfg.d) >>> 3);
    c_w   = 64'(cfg.c);

    spike = (v_new >= 64'(V_TH_Q78));
    if (spike) begin
      v_out = cfg.c;
      u_out = sat16(u_rst);
    end else begin
      v_out = (cfg.pin && v_new < c_w) ? cfg.c : sat16(v_new);
      u_out = sat16(u_new);
    end
    vu_next = {v_out, u_out};
  end
endmodule
