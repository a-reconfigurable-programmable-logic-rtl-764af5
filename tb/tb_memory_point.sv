// tb_memory_point - self-checking testbench of the PLB memory point.
//
// With bypass = 0 each output must behave as a 2-input C-element of its two
// inputs (reference state kept here), with bypass = 1 the outputs must copy
// I1' and I0'. The acknowledge output must always be O1 xor O0.
module tb_memory_point;
  int checks = 0, failures = 0;
  logic rst, bypass, i1p, i1pp, i0p, i0pp;
  logic o1, o0, s_out;
  logic r1, r0;

  memory_point dut (.rst(rst), .bypass(bypass), .i1_p(i1p), .i1_pp(i1pp),
                    .i0_p(i0p), .i0_pp(i0pp), .o1(o1), .o0(o0), .s_out(s_out));

  task automatic check(input string what, input logic [2:0] got, input logic [2:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %b expected %b at %0t", what, got, exp, $time);
    end
  endtask

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1'b1; bypass = 1'b0; {i1p, i1pp, i0p, i0pp} = 4'b1111;
    r1 = 1'b0; r0 = 1'b0;
    #1 check("reset", {o1, o0, s_out}, 3'b000);
    {i1p, i1pp, i0p, i0pp} = 4'b0000;
    #1 rst = 1'b0;
    for (int t = 0; t < 600; t++) begin
      bypass = (t >= 300);
      {i1p, i1pp, i0p, i0pp} = 4'($urandom);
      if (i1p == i1pp) r1 = i1p;
      if (i0p == i0pp) r0 = i0p;
      #1;
      if (bypass) check("bypass", {o1, o0, s_out}, {i1p, i0p, i1p ^ i0p});
      else        check("C-elements", {o1, o0, s_out}, {r1, r0, r1 ^ r0});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
