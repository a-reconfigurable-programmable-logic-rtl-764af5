// tb_c_element - self-checking testbench of the P-input C-element.
//
// A 3-input C-element is driven with random input vectors; a reference state
// updated by Eq. 1 of the C-element definition (all ones -> 1, all zeros -> 0,
// otherwise keep) is compared with the output after every change. Reset is
// exercised at the start and in the middle of the run.
module tb_c_element;
  int checks = 0, failures = 0;
  localparam int unsigned P = 3;
  logic         rst;
  logic [P-1:0] in;
  logic         z, zref;

  c_element #(.P(P)) dut (.rst(rst), .in(in), .z(z));

  task automatic check(input string what, input logic got, input logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: in=%b got %b expected %b at %0t", what, in, got, exp, $time);
    end
  endtask

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1'b1; in = '1; zref = 1'b0;
    #1 check("reset", z, 1'b0);
    in = '0;
    #1 rst = 1'b0;
    for (int t = 0; t < 400; t++) begin
      in = P'($urandom);
      if (t % 5 == 0) in = (t % 10 == 0) ? '1 : '0;   // make both transitions frequent
      if (t == 200) begin
        rst = 1'b1; zref = 1'b0;
        #1 check("reset while running", z, 1'b0);
        rst = 1'b0;
      end
      if (&in) zref = 1'b1;
      else if (~|in) zref = 1'b0;
      #1 check("state", z, zref);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
