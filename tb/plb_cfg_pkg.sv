// plb_cfg_pkg - configuration words for the PLB, used by the testbenches.
//
// Each function returns a complete plb_cfg_t for one way of programming the PLB
// described in the paper, together with the wire assignment that the
// testbench must follow. Truth tables are computed here from the gate
// equations, independently of the RTL. A 2-input Boolean function is given as
// a 4-bit table tt with f(x,y) = tt[{x,y}].
//
//  cfg_4ph_fb     4-phase, 1-of-2, 2 inputs + acknowledge, LUT self-feedback
//                 (Fig. 3). I' = {y1,y0,x1,x0,ack,ack}; O0 = rail '0',
//                 O1 = rail '1'.
//  cfg_4ph_c      4-phase, 1-of-2, 2 inputs + acknowledge, C-element mode
//                 with the OR gate as return-to-Omega detector (Fig. 5 wiring).
//                 I' = {0,y1,y0,x1,x0,ack}, ack enters the OR inverted.
//  cfg_4ph_mixed  4-phase, binary x + ternary y + acknowledge (6 wires),
//                 C-element mode, z = (x + y) mod 2.
//                 I' = {y2,y1,y0,x1,x0,ack}; O0 = rail '0', O1 = rail '1'.
//  cfg_4ph_fa     4-phase full adder: two independent 3-input gates (sum in the
//                 upper half, carry in the lower half), no acknowledge input.
//                 I' = I'' = {z1,z0,y1,y0,x1,x0}.
//  cfg_4ph_tern   4-phase, 1-of-3, 2 inputs, z = (x + y) mod 3 (Fig. 5).
//                 I' = I'' = {y2,y1,y0,x2,x1,x0}; O0..O2 = rails of z, one
//                 acknowledge over the four outputs.
//  cfg_4ph_quad   4-phase, 2 binary inputs, one 1-of-4 output z = 2x + y.
//                 I' = I'' = {-,-,y1,y0,x1,x0}; O0..O3 = rails of z, one
//                 acknowledge over the four outputs.
//  cfg_ledr_fb    2-phase LEDR, 2 inputs + acknowledge, LUT self-feedback.
//                 I' = {yr,yd,xr,xd,ack,ack}; O0 = Od, O1 = Or.
//  cfg_ledr_rv    2-phase LEDR, 2 inputs + acknowledge, rendez-vous of L0/L2
//                 and L1/L3 in the upper memory point (Fig. 7).
//                 I' = I'' = {0,ack,yr,yd,xr,xd}; O0 = Od, O1 = Or.
//  cfg_edge_2x2   2-phase edge, 2x2 decision wait (Eq. 18-19, Fig. 9).
//                 I' = {A1,A0,B0,B1,-,-}, I'' = {A1,A0,-,-,B0,B1};
//                 O0..O3 = C00, C01, C10, C11.
//  cfg_edge_2x1   2-phase edge, computation and 2x1 decision wait
//                 (Eq. 20-21, Fig. 11). I'[3:0] = {C11,C10,C01,C00},
//                 I''[4] = ack; O0 = output wire '1', O1 = output wire '0'.
package plb_cfg_pkg;
  import afpga_pkg::*;

  function automatic logic f2(input logic [3:0] tt, input logic x, input logic y);
    return tt[{x, y}];
  endfunction

  // 4-phase rail LUT with self-feedback in input fbk and ack in input ackk
  function automatic plb_cfg_t cfg_4ph_fb(input logic [3:0] tt);
    plb_cfg_t c = '0;
    for (int a = 0; a < 64; a++) begin
      logic [5:0] w = 6'(a);
      logic x0 = w[2], x1 = w[3], y0 = w[4], y1 = w[5];
      logic xv = x0 | x1, yv = y0 | y1;
      logic fv = f2(tt, x1, y1);
      // L0: feedback = w[0] (O0), ack = w[1]
      if (xv && yv && !w[1])       c.lut[0][a] = ~fv;
      else if (!xv && !yv && w[1]) c.lut[0][a] = 1'b0;
      else                         c.lut[0][a] = w[0];
      // L1: ack = w[0], feedback = w[1] (O1)
      if (xv && yv && !w[0])       c.lut[1][a] = fv;
      else if (!xv && !yv && w[0]) c.lut[1][a] = 1'b0;
      else                         c.lut[1][a] = w[1];
    end
    c.fb_sel[0] = 4'b0001;
    c.fb_sel[1] = 4'b0010;
    c.mp_bypass = 2'b11;
    return c;
  endfunction

  function automatic plb_cfg_t cfg_4ph_c(input logic [3:0] tt);
    plb_cfg_t c = '0;
    for (int a = 0; a < 64; a++) begin
      logic [5:0] w = 6'(a);
      logic ack = w[0];
      logic xv = w[1] | w[2], yv = w[3] | w[4];
      logic fv = f2(tt, w[2], w[4]);
      c.lut[0][a] = xv && yv && !ack && !fv;
      c.lut[1][a] = xv && yv && !ack &&  fv;
    end
    c.or_inv[0] = 6'b000001;
    return c;
  endfunction

  // 4-phase gate with mixed inputs: binary x, ternary y and an acknowledge
  // (6 wires), C-element mode; binary output z = (x + y) mod 2
  function automatic plb_cfg_t cfg_4ph_mixed();
    plb_cfg_t c = '0;
    for (int a = 0; a < 64; a++) begin
      logic [5:0] w = 6'(a);
      logic ack = w[0];
      logic xv = w[1] | w[2], yv = |w[5:3];
      int   yval = w[4] ? 1 : (w[5] ? 2 : 0);
      logic z = 1'((int'(w[2]) + yval) % 2);
      c.lut[0][a] = xv && yv && !ack && !z;
      c.lut[1][a] = xv && yv && !ack &&  z;
    end
    c.or_inv[0] = 6'b000001;
    return c;
  endfunction

  function automatic plb_cfg_t cfg_4ph_fa();
    plb_cfg_t c = '0;
    for (int a = 0; a < 64; a++) begin
      logic [5:0] w = 6'(a);
      logic v = (w[0] | w[1]) && (w[2] | w[3]) && (w[4] | w[5]);
      logic s  = w[1] ^ w[3] ^ w[5];
      logic co = (w[1] & w[3]) | (w[1] & w[5]) | (w[3] & w[5]);
      c.lut[0][a] = v && !s;
      c.lut[1][a] = v &&  s;
      c.lut[2][a] = v && !co;
      c.lut[3][a] = v &&  co;
    end
    return c;
  endfunction

  function automatic plb_cfg_t cfg_4ph_tern();
    plb_cfg_t c = '0;
    for (int a = 0; a < 64; a++) begin
      logic [5:0] w = 6'(a);
      logic v = (|w[2:0]) && (|w[5:3]);
      int x = w[1] ? 1 : (w[2] ? 2 : 0);
      int y = w[4] ? 1 : (w[5] ? 2 : 0);
      int z = (x + y) % 3;
      c.lut[0][a] = v && (z == 0);
      c.lut[1][a] = v && (z == 1);
      c.lut[2][a] = v && (z == 2);
      c.lut[3][a] = 1'b0;                 // unused LUT filled with 0
    end
    c.tern_ack = 1'b1;
    return c;
  endfunction

  // 4-phase 2-input gate with one 1-of-4 output: z = 2x + y (a decoder)
  function automatic plb_cfg_t cfg_4ph_quad();
    plb_cfg_t c = '0;
    for (int a = 0; a < 64; a++) begin
      logic [5:0] w = 6'(a);
      logic v = (w[0] | w[1]) && (w[2] | w[3]);
      int z = 2 * int'(w[1]) + int'(w[3]);
      for (int l = 0; l < 4; l++) c.lut[l][a] = v && (z == l);
    end
    c.tern_ack = 1'b1;
    return c;
  endfunction

  function automatic plb_cfg_t cfg_ledr_fb(input logic [3:0] tt);
    plb_cfg_t c = '0;
    for (int a = 0; a < 64; a++) begin
      logic [5:0] w = 6'(a);
      logic xd = w[2], xr = w[3], yd = w[4], yr = w[5];
      logic px = xd ^ xr, py = yd ^ yr;
      logic fv = f2(tt, xd, yd);
      // L0 (Od): feedback w[0], ack w[1];  L1 (Or): ack w[0], feedback w[1]
      c.lut[0][a] = (px == py && w[1] != px) ? fv : w[0];
      c.lut[1][a] = (px == py && w[0] != px) ? (px ? ~fv : fv) : w[1];
    end
    c.fb_sel[0] = 4'b0001;
    c.fb_sel[1] = 4'b0010;
    c.mp_bypass = 2'b11;
    return c;
  endfunction

  function automatic plb_cfg_t cfg_ledr_rv(input logic [3:0] tt);
    plb_cfg_t c = '0;
    for (int a = 0; a < 64; a++) begin
      logic [5:0] w = 6'(a);
      logic px = w[0] ^ w[1], py = w[2] ^ w[3], ack = w[4];
      logic rdy = (px == py) && (ack != px);
      logic fv = f2(tt, w[0], w[2]);
      c.lut[0][a] = rdy ? fv : 1'b0;
      c.lut[2][a] = rdy ? fv : 1'b1;
      c.lut[1][a] = rdy ? (px ? ~fv : fv) : 1'b0;
      c.lut[3][a] = rdy ? (px ? ~fv : fv) : 1'b1;
    end
    c.ledr_rv   = 1'b1;
    c.mp_bypass = 2'b10;
    return c;
  endfunction

  // C-element as a LUT with self-feedback: rendez-vous of a and b
  function automatic logic rv(input logic a, input logic b, input logic z);
    return (a == b) ? a : z;
  endfunction

  function automatic plb_cfg_t cfg_edge_2x2();
    plb_cfg_t c = '0;
    for (int a = 0; a < 64; a++) begin
      logic [5:0] w = 6'(a);
      logic a0 = w[4], a1 = w[5];
      // L0 = C00: (C00, C01, C10, B0, A0, A1)
      c.lut[0][a] = rv(a0 ^ w[1], w[3] ^ w[2], w[0]);
      // L1 = C01: (C00, C01, B1, C11, A0, A1)
      c.lut[1][a] = rv(a0 ^ w[0], w[2] ^ w[3], w[1]);
      // L2 = C10: (C00, B0, C10, C11, A0, A1)
      c.lut[2][a] = rv(a1 ^ w[3], w[1] ^ w[0], w[2]);
      // L3 = C11: (B1, C01, C10, C11, A0, A1)
      c.lut[3][a] = rv(a1 ^ w[2], w[0] ^ w[1], w[3]);
    end
    c.fb_sel[0] = 4'b0111;
    c.fb_sel[1] = 4'b1011;
    c.fb_sel[2] = 4'b1101;
    c.fb_sel[3] = 4'b1110;
    c.mp_bypass = 2'b11;
    return c;
  endfunction

  function automatic plb_cfg_t cfg_edge_2x1(input logic [3:0] tt);
    plb_cfg_t c = '0;
    for (int a = 0; a < 64; a++) begin
      logic [5:0] w = 6'(a);
      logic i1 = 1'b0, i0 = 1'b0;
      for (int k = 0; k < 4; k++) begin   // C index k = 2i+j
        if (tt[k]) i1 ^= w[k];
        else       i0 ^= w[k];
      end
      c.lut[0][a] = i1;                    // f1
      c.lut[1][a] = i0;                    // f0
      c.lut[2][a] = ~(w[1] ^ w[4]);        // J1 = not(O0 xor ack), O0 = PLB O1
      c.lut[3][a] = ~(w[0] ^ w[4]);        // J0 = not(O1 xor ack), O1 = PLB O0
    end
    c.fb_sel[2] = 4'b0010;
    c.fb_sel[3] = 4'b0001;
    c.ledr_rv   = 1'b1;
    c.mp_bypass = 2'b10;
    return c;
  endfunction

endpackage
