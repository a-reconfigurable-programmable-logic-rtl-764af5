// memory_point - the "memory point" of the PLB (paper Sec. 3.3, Fig. 4).
//
// Two 2-input C-elements, C1 = C(I1', I1'') and C0 = C(I0', I0''), followed by
// two MUXes that share one programming point: with bypass = 1 the memory point
// is transparent and passes I1', I0' straight through (used by the 2-phase LEDR
// gates and by the 2x2 decision wait), with bypass = 0 the outputs are the
// C-element outputs (rendez-vous of a LUT and the "return to Omega" OR gate
// under 4-phase, or of two LUTs under 2-phase). s_out = O1 xor O0 is the
// acknowledge of the pair. Structure and names follow Fig. 4.
//
// Timing: asynchronous. rst clears both C-elements.
module memory_point (
  input  logic rst,
  input  logic bypass,     // programming point of Fig. 4
  input  logic i1_p,       // I1'
  input  logic i1_pp,      // I1''
  input  logic i0_p,       // I0'
  input  logic i0_pp,      // I0''
  output logic o1,
  output logic o0,
  output logic s_out
);

  logic c1, c0;

  c_element #(.P(2)) u_c1 (.rst(rst), .in({i1_p, i1_pp}), .z(c1));
  c_element #(.P(2)) u_c0 (.rst(rst), .in({i0_p, i0_pp}), .z(c0));

  assign o1    = bypass ? i1_p : c1;
  assign o0    = bypass ? i0_p : c0;
  assign s_out = o1 ^ o0;

endmodule
