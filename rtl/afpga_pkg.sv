// afpga_pkg - types and constants shared by the programmable logic block (PLB)
// of the asynchronous, side-channel resistant FPGA and by its programming chain.
//
// The PLB has four 6-input look-up tables L0..L3 (the size and count follow the
// paper). L0/L1 read the upper group of six network wires I'[5:0], L2/L3 the
// lower group I''[5:0]. Input k (k = 0..3) of every LUT can be replaced by the
// feedback of PLB output k through a MUX set by one programming point.
//
// The layout of the configuration word (plb_cfg_t, 288 bits) and the order of
// the bits in it are this design's own choice; the paper lists the programming
// points but not how they are ordered in the configuration stream.
package afpga_pkg;

  localparam int unsigned LUT_K      = 6;             // inputs per LUT
  localparam int unsigned LUT_BITS   = 1 << LUT_K;    // 64 programming bits per LUT
  localparam int unsigned NUM_LUT    = 4;             // L0..L3
  localparam int unsigned NUM_FB     = 4;             // LUT inputs 0..3 have a feedback MUX
  localparam int unsigned NUM_OUT    = 4;             // O0..O3

  // One PLB configuration. Field meaning:
  //  lut[l]        truth table of L_l, indexed by {in5,in4,in3,in2,in1,in0}
  //  fb_sel[l][k]  1: input k of L_l is PLB output k (feedback), 0: network wire k
  //  or_inv[h][i]  1: network wire i enters the 6-input OR gate of half h
  //                inverted (needed for the acknowledge wire under 4-phase)
  //  mp_bypass[h]  1: memory point of half h is transparent (C-elements bypassed)
  //  ledr_rv       1: the second inputs of the upper memory point take L2/L3
  //                instead of the upper OR gate (2-phase rendez-vous wiring)
  //  tern_ack      1: acknowledge output 0 is the XOR of all four outputs
  //                (one ternary or quaternary output), 0: XOR of O0,O1 only
  typedef struct packed {
    logic [NUM_LUT-1:0][LUT_BITS-1:0] lut;
    logic [NUM_LUT-1:0][NUM_FB-1:0]   fb_sel;
    logic [1:0][LUT_K-1:0]            or_inv;
    logic [1:0]                       mp_bypass;
    logic                             ledr_rv;
    logic                             tern_ack;
  } plb_cfg_t;

  localparam int unsigned PLB_CFG_BITS = $bits(plb_cfg_t);  // 288

endpackage
