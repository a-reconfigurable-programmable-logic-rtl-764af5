// c_element - P-input Muller C-element with an active-high reset to 0.
//
// The output Z goes to 1 when all inputs are 1, to 0 when all inputs are 0, and
// keeps its value otherwise (paper Eq. 1). This is the rendez-vous gate of the
// whole FPGA: the memory points of the PLB and every stage of the programming
// FIFO are built from it. The paper builds it from a MUX that selects an AND of
// the inputs while Z=0 and an OR of the inputs while Z=1, with Z fed back to the
// MUX select (Eq. 2, Fig. 1). Here the same function is written as a level-
// sensitive latch, which is what that feedback structure is, so that the tools
// see a storage element rather than a combinational loop. The reset follows the
// paper: "At RESET time, all C-elements are set to zero by a general RESET wire".
//
// Timing: no clock; the output follows its inputs as soon as they agree.
// The intended latch is the state of the C-element: the output keeps its
// value while the inputs disagree. Verilator's note that it finds no latch in
// the block does not change that; synthesis infers one latch per instance.
module c_element #(
  parameter int unsigned P = 2
) (
  input  logic         rst,
  input  logic [P-1:0] in,
  output logic         z
);

  always_latch begin
    if (rst)          z = 1'b0;
    else if (&in)     z = 1'b1;
    else if (~|in)    z = 1'b0;
  end

endmodule
