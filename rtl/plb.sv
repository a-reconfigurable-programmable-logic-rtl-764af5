// plb - programmable logic block of the multi-style asynchronous FPGA
// (paper Sec. 3 and 4, Fig. 3, 5, 7, 9, 11).
//
// The block has two halves. The upper half holds LUTs L0 and L1, fed by the six
// network wires I'[5:0], a 6-input OR gate over the same wires and the upper
// memory point; the lower half holds L2, L3, the wires I''[5:0], a second OR
// gate and the lower memory point. Outputs: O0 = memory point pair (L0, X0),
// O1 = pair (L1, X1), O2 = pair (L2, OR''), O3 = pair (L3, OR''), where X0/X1
// is the upper OR gate or, when ledr_rv is set, L2/L3 (the two MUXes of
// Fig. 7). Input k (k = 0..3) of every LUT can be replaced by PLB output k, the
// feedback that gives a LUT-only gate its memory ("one input of each LUT can be
// replaced with a feedback signal equal to the output pin"). ack_out[1] is the
// XOR of O2,O3; ack_out[0] is the XOR of O0,O1 or, with tern_ack set, of all
// four outputs (the grey MUX and XOR of Fig. 5).
//
// The same hardware is programmed as:
//  - 4-phase 2-input gate: a LUT pair with self-feedback, memory point bypassed;
//  - 4-phase 3-input or ternary gate: LUTs compute rendez-vous and function,
//    the OR gate detects the return to Omega, the C-elements hold the output;
//  - 2-phase LEDR gate: LUT pair with self-feedback, or the rendez-vous of
//    L0/L2 and L1/L3 in the upper memory point (ledr_rv);
//  - 2-phase edge gate: the 2x2 decision wait (four LUT C-elements coupled by
//    all feedbacks) in one PLB, the 2x1 decision wait in a second one.
//
// Departures / choices of this design: the OR gates have a programmable input
// polarity (or_inv) so that the acknowledge wire can enter them inverted, which
// the 4-phase return-to-Omega condition (acknowledge = 1) requires but the
// paper does not draw; the feedback is taken from the memory point output, as
// drawn in Fig. 11, which equals the LUT output when the memory point is
// transparent; hold (programming in progress) forces all outputs and
// feedbacks to 0 and clears the memory points ("all outputs of PLB are kept at
// 0" during configuration).
//
// Timing: no clock. A programmed gate may contain loops through LUTs (the
// feedback paths); they are the asynchronous state of the gate and are
// expected to show up as combinational loops.
module plb
  import afpga_pkg::*;
(
  input  logic               rst,
  input  logic               hold,
  input  plb_cfg_t           cfg,
  input  logic [LUT_K-1:0]   in_p,     // I'[5:0]  (upper half)
  input  logic [LUT_K-1:0]   in_pp,    // I''[5:0] (lower half)
  output logic [NUM_OUT-1:0] out,      // O0..O3
  output logic [1:0]         ack_out   // S_out of the upper / lower half
);

  logic                     clr;
  logic [NUM_OUT-1:0]       o_int;
  logic [NUM_OUT-1:0]       fb;
  logic [NUM_LUT-1:0]       l;
  logic [NUM_LUT-1:0][LUT_K-1:0] lut_in;
  logic                     or_p, or_pp;
  logic                     x0, x1;
  logic                     s_top, s_bot;

  assign clr = rst | hold;
  assign fb  = clr ? '0 : o_int;

  // LUT input selection: k < 4 may be feedback, 4 and 5 always network wires
  always_comb begin
    for (int li = 0; li < NUM_LUT; li++) begin
      for (int k = 0; k < LUT_K; k++) begin
        lut_in[li][k] = (li < 2) ? in_p[k] : in_pp[k];
        if (k < NUM_FB && cfg.fb_sel[li][k]) lut_in[li][k] = fb[k];
      end
    end
  end

  for (genvar li = 0; li < NUM_LUT; li++) begin : g_lut
    plb_lut #(.K(LUT_K)) u_lut (
      .table_bits (cfg.lut[li]),
      .in         (lut_in[li]),
      .out        (l[li])
    );
  end

  // "return to Omega" detectors
  assign or_p  = |(in_p  ^ cfg.or_inv[0]);
  assign or_pp = |(in_pp ^ cfg.or_inv[1]);

  // 2-phase rendez-vous MUXes of Fig. 7
  assign x0 = cfg.ledr_rv ? l[2] : or_p;
  assign x1 = cfg.ledr_rv ? l[3] : or_p;

  memory_point u_mp_top (
    .rst (clr), .bypass (cfg.mp_bypass[0]),
    .i1_p (l[1]), .i1_pp (x1),
    .i0_p (l[0]), .i0_pp (x0),
    .o1 (o_int[1]), .o0 (o_int[0]), .s_out (s_top)
  );

  memory_point u_mp_bot (
    .rst (clr), .bypass (cfg.mp_bypass[1]),
    .i1_p (l[3]), .i1_pp (or_pp),
    .i0_p (l[2]), .i0_pp (or_pp),
    .o1 (o_int[3]), .o0 (o_int[2]), .s_out (s_bot)
  );

  assign out        = clr ? '0 : o_int;
  assign ack_out[0] = clr ? 1'b0 : (cfg.tern_ack ? (s_top ^ s_bot) : s_top);
  assign ack_out[1] = clr ? 1'b0 : s_bot;

endmodule
