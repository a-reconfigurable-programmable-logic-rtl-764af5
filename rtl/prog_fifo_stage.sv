// prog_fifo_stage - one stage of the asynchronous programming FIFO (Fig. 12).
//
// A stage holds one dual-rail signal (rail 1 = value '1', rail 0 = value '0',
// both low = empty / Omega) in two C-elements. Each C-element joins the rail
// coming from the previous stage with the enable coming from the next stage.
// The enable is the NOR of the next stage's two rails, so a stage accepts a new
// value only when its successor is empty, and returns to empty only when its
// successor has taken the value: the weak-condition half buffer of the 4-phase
// protocol. The NOR drawn in Fig. 12 is computed by the receiving stage and
// exported as en_out for the previous stage.
//
// Interface: d_in[1:0] from the previous stage, en_in from the next stage,
// q[1:0] the stored rails, en_out = NOR(q) towards the previous stage.
// An assertion flags the forbidden state (both rails high), which can only
// come from a malfunction or a fault injected from outside.
module prog_fifo_stage (
  input  logic       rst,
  input  logic [1:0] d_in,
  input  logic       en_in,
  output logic [1:0] q,
  output logic       en_out
);

  for (genvar r = 0; r < 2; r++) begin : g_rail
    c_element #(.P(2)) u_c (
      .rst (rst),
      .in  ({d_in[r], en_in}),
      .z   (q[r])
    );
  end

  assign en_out = ~(q[1] | q[0]);

  // a dual-rail value never has both rails high (the forbidden state)
  always_comb begin
    if (!rst) a_rails : assert final (!(q[1] && q[0]))
      else $error("programming FIFO stage in the forbidden state");
  end

endmodule
