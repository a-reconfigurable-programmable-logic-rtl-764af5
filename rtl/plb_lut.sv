// plb_lut - K-input, 1-output look-up table of the PLB (K = 6, 64 programming
// bits, as in the paper).
//
// Purely combinational: the output is bit {in[K-1],...,in[0]} of the truth
// table. The asynchronous "memory effect" of a gate is obtained outside this
// module by feeding a PLB output back to one LUT input (see plb), so in a
// programmed design the LUT may sit inside a loop; that loop is the intended
// state of the gate, as described in the paper. The index order of the truth
// table is this design's choice.
module plb_lut #(
  parameter int unsigned K = afpga_pkg::LUT_K
) (
  input  logic [(1<<K)-1:0] table_bits,
  input  logic [K-1:0]      in,
  output logic              out
);

  assign out = table_bits[in];

endmodule
