// afpga_block - one separately programmable block of the asynchronous FPGA:
// NUM_PLB programmable logic blocks and the asynchronous FIFO that holds their
// configuration (paper Sec. 5).
//
// The FPGA is divided into square blocks that can be programmed independently.
// The configuration of all PLBs of a block is shifted, one dual-rail bit at a
// time under the 4-phase protocol, into the block's programming FIFO
// (prog_fifo); the FIFO stages themselves are the programming points. PLB p
// takes the configuration word cfg[p*288 +: 288], so the word of the last PLB
// is fed first, MSB first. While prog_mode is high every PLB output is forced
// to 0 and the PLB memory points are cleared ("all outputs of PLB are kept at 0
// to avoid short-circuits" during configuration). The routing network
// (routing channels, connection boxes, switchboxes) is not modelled: the
// paper names it but does not describe it, so the PLB inputs and outputs are
// brought out as ports and the surrounding logic wires them.
//
// NUM_PLB = 4 (a 2 x 2 square) is this design's choice; the paper gives no
// block size. Reset: rst clears every C-element (FIFO empty, PLBs idle).
module afpga_block
  import afpga_pkg::*;
#(
  parameter int unsigned NUM_PLB = 4
) (
  input  logic                                 rst,
  input  logic                                 prog_mode,  // configuration in progress
  // programming chain
  input  logic [1:0]                           prog_d,
  output logic                                 prog_ack,
  input  logic                                 last_ack,
  output logic [1:0]                           last_d,
  // PLB pins (to and from the routing network)
  input  logic [NUM_PLB-1:0][LUT_K-1:0]        plb_in_p,
  input  logic [NUM_PLB-1:0][LUT_K-1:0]        plb_in_pp,
  output logic [NUM_PLB-1:0][NUM_OUT-1:0]      plb_out,
  output logic [NUM_PLB-1:0][1:0]              plb_ack
);

  localparam int unsigned NBITS = NUM_PLB * PLB_CFG_BITS;

  logic [NBITS-1:0] cfg_bits;

  prog_fifo #(.NUM_BITS(NBITS)) u_fifo (
    .rst      (rst),
    .prog_d   (prog_d),
    .prog_ack (prog_ack),
    .last_ack (last_ack),
    .last_d   (last_d),
    .cfg      (cfg_bits)
  );

  for (genvar p = 0; p < NUM_PLB; p++) begin : g_plb
    plb u_plb (
      .rst     (rst),
      .hold    (prog_mode),
      .cfg     (plb_cfg_t'(cfg_bits[p*PLB_CFG_BITS +: PLB_CFG_BITS])),
      .in_p    (plb_in_p[p]),
      .in_pp   (plb_in_pp[p]),
      .out     (plb_out[p]),
      .ack_out (plb_ack[p])
    );
  end

endmodule
