// tb_plb_lut - self-checking testbench of the 6-input LUT.
//
// Random 64-bit truth tables are loaded and every input combination is read
// back and compared with the table bit selected by the input word.
module tb_plb_lut;
  int checks = 0, failures = 0;
  logic [63:0] tbl;
  logic [5:0]  in;
  logic        out;

  plb_lut dut (.table_bits(tbl), .in(in), .out(out));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 8; t++) begin
      tbl = {$urandom, $urandom};
      if (t == 0) tbl = 64'h8000_0000_0000_0001;
      for (int a = 0; a < 64; a++) begin
        in = 6'(a);
        #1;
        checks++;
        if (out !== ((tbl >> a) & 64'd1) != 0) begin
          failures++;
          $display("FAIL table %h input %0d: got %b", tbl, a, out);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
