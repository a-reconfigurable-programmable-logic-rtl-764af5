// prog_fifo - asynchronous programming chain of one separately programmable
// block (paper Sec. 5, Fig. 12).
//
// 2*NUM_BITS dual-rail half-buffer stages (prog_fifo_stage) are chained. The
// programmer presents one bit at a time on prog_d (rail 1 = '1', rail 0 = '0')
// and returns to the empty value (Omega) between bits under the 4-phase
// protocol, using prog_ack (high while stage 0 holds a value) as acknowledge.
// The enable of the last stage is the external pin last_ack, inverted: while
// last_ack is held low (as during programming in the paper) the last stage
// never releases its value, so the bits stack up. A half-buffer chain full of
// values holds them in every other stage, separated by Omega, so the
// programming points are the '1' rails of the odd stages (Fig. 12 taps every
// second stage): cfg[k] is rail 1 of stage 2k+1. The first bit fed ends in the
// last stage, i.e. in cfg[NUM_BITS-1], so a word is fed MSB first.
//
// Clearing for partial reconfiguration: the environment acts as a 4-phase
// receiver on last_d/last_ack until the chain is empty, then holds last_ack low.
// After reset all C-elements are 0, i.e. every stage is empty.
//
// Which stages are tapped, the rail that gives the bit and the polarity of
// last_ack are this design's reading of Fig. 12 and the text.
//
// Each stage and its successor form a loop (rail -> next stage -> NOR ->
// enable of this stage): that is the handshake of a self-timed FIFO, and the
// tools report it as a combinational loop through the C-element latches.
module prog_fifo #(
  parameter int unsigned NUM_BITS = afpga_pkg::PLB_CFG_BITS
) (
  input  logic                rst,
  input  logic [1:0]          prog_d,     // dual-rail bit from the programmer
  output logic                prog_ack,   // 4-phase acknowledge to the programmer
  input  logic                last_ack,   // external acknowledge pin of the last stage
  output logic [1:0]          last_d,     // value held in the last stage
  output logic [NUM_BITS-1:0] cfg         // programming points
);

  localparam int unsigned NSTAGE = 2 * NUM_BITS;

  logic [NSTAGE-1:0][1:0] q;
  logic [NSTAGE:0]        en;   // en[i+1] enables stage i; en[NSTAGE] is the pin

  assign en[NSTAGE] = ~last_ack;

  for (genvar i = 0; i < NSTAGE; i++) begin : g_stage
    prog_fifo_stage u_stage (
      .rst    (rst),
      .d_in   (i == 0 ? prog_d : q[(i == 0) ? 0 : i-1]),
      .en_in  (en[i+1]),
      .q      (q[i]),
      .en_out (en[i])
    );
  end

  assign prog_ack = ~en[0];
  assign last_d   = q[NSTAGE-1];

  for (genvar k = 0; k < NUM_BITS; k++) begin : g_tap
    assign cfg[k] = q[2*k+1][1];
  end

endmodule
