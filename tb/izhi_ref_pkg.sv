// izhi_ref_pkg: reference model of the neuromorphic instructions for the
// core testbenches. ref_npu and ref_dcu compute, with 64-bit integers, the
// results the NPU and DCU are specified to give: one Euler step of the
// Izhikevich equations in fixed point (v, u, c Q7.8; a, b, d Q4.11; I
// Q15.16; 0.04 = 2621/2^16; results floored, then saturated to 16 bits;
// spike when v_new >= 30, then v = c and u = u_new + d/8 in Q7.8), and the
// shift-sum decay of the current.
package izhi_ref_pkg;
  function automatic longint fl(longint num, int sh);  // floor(num / 2^sh)
    longint d = longint'(1) << sh;
    longint q = num / d;
    if (num < 0 && q * d != num) q = q - 1;
    return q;
  endfunction
  function automatic longint sat(longint x);
    return (x > 32767) ? 32767 : (x < -32768) ? -32768 : x;
  endfunction

  // returns {spike, vu_next}
  function automatic logic [32:0] ref_npu(logic [31:0] vu, logic [31:0] isyn, logic [31:0] bal,
                                          logic [31:0] dc, logic h, logic pin);
    longint v = $signed(vu[31:16]), u = $signed(vu[15:0]), i = $signed(isyn);
    longint a = $signed(bal[15:0]), b = $signed(bal[31:16]);
    longint c = $signed(dc[15:0]), d = $signed(dc[31:16]);
    int hs = h ? 3 : 1;
    // dv in units of 2^-32 mV/ms
    longint dv = v * v * 2621 + 5 * v * (longint'(1) << 24) + 140 * (longint'(1) << 32)
               - u * (longint'(1) << 24) + i * (longint'(1) << 16);
    longint du = a * (b * v - u * 2048);      // units of 2^-30
    longint vn = v + fl(dv, 24 + hs);
    longint un = u + fl(du, 22 + hs);
    logic [15:0] vo, uo;
    logic sp = (vn >= 30 * 256);
    if (sp) begin vo = 16'(c); uo = 16'(sat(un + fl(d, 3))); end
    else begin
      vo = (pin && vn < c) ? 16'(c) : 16'(sat(vn));
      uo = 16'(sat(un));
    end
    return {sp, vo, uo};
  endfunction

  function automatic logic [31:0] ref_dcu(logic [31:0] x, logic [31:0] tau, logic h);
    longint s = $signed(x), q;
    case (tau)
      2: q = fl(s, 1);
      3: q = fl(s, 2) + fl(s, 4) + fl(s, 6) + fl(s, 8);
      4: q = fl(s, 2);
      5: q = fl(s, 3) + fl(s, 4) + fl(s, 7) + fl(s, 8);
      6: q = fl(s, 3) + fl(s, 5) + fl(s, 7) + fl(s, 9);
      7: q = fl(s, 3) + fl(s, 6) + fl(s, 9);
      8: q = fl(s, 3);
      default: q = 0;
    endcase
    q = 32'(q);                       // the sum is kept in 32 bits
    return 32'(s - fl(longint'($signed(32'(q))), h ? 3 : 1));
  endfunction
endpackage
