// tb_plb - self-checking testbench of the PLB in every programming style.
//
// Two PLBs are instantiated; the second one is used only for the 2-phase edge
// gate, which takes two PLBs (2x2 decision wait, then computation and 2x1
// decision wait). For each style the testbench programs the PLB, acts as the
// sending and receiving neighbours, and checks after every step that the
// outputs equal the value computed here from the gate function, that no output
// moves before the rendez-vous of all inputs (no early evaluation), and that a
// receiver that has not yet acknowledged holds the output back.
module tb_plb;
  import afpga_pkg::*;
  import plb_cfg_pkg::*;

  int checks = 0, failures = 0;

  logic rst, hold;
  plb_cfg_t cfg0, cfg1;
  logic [5:0] in0p, in0pp, in1p_tb, in1pp;
  logic [5:0] in1p;
  logic [3:0] out0, out1;
  logic [1:0] ack0, ack1;
  logic edge_mode;

  plb u0 (.rst(rst), .hold(hold), .cfg(cfg0), .in_p(in0p), .in_pp(in0pp), .out(out0), .ack_out(ack0));
  plb u1 (.rst(rst), .hold(hold), .cfg(cfg1), .in_p(in1p), .in_pp(in1pp), .out(out1), .ack_out(ack1));

  assign in1p = edge_mode ? {2'b00, out0} : in1p_tb;

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h at %0t", what, got, exp, $time);
    end
  endtask

  task automatic load_cfg(input plb_cfg_t c0, input plb_cfg_t c1, input logic em);
    hold = 1'b1;
    in0p = '0; in0pp = '0; in1p_tb = '0; in1pp = '0;
    cfg0 = c0; cfg1 = c1; edge_mode = em;
    #5 hold = 1'b0;
    #5;
    check("outputs 0 after programming", {out0[1:0], out1[1:0]}, 4'b0);
  endtask

  // ---------------- 4-phase, 2 binary inputs + acknowledge ----------------
  // c_mode = 0: LUT self-feedback wiring, 1: C-element / OR wiring
  task automatic run_4ph(input logic [3:0] tt, input bit c_mode, input int n);
    logic x, y, f, ack;
    for (int t = 0; t < n; t++) begin
      x = 1'($urandom); y = 1'($urandom); f = tt[{x, y}]; ack = 1'b0;
      // drive x alone: no output (rendez-vous)
      if (c_mode) in0p = {1'b0, 2'b00, x, ~x, ack};
      else        in0p = {2'b00, x, ~x, ack, ack};
      #3 check("4ph no early evaluation", out0[1:0], 2'b00);
      if (c_mode) in0p = {1'b0, y, ~y, x, ~x, ack};
      else        in0p = {y, ~y, x, ~x, ack, ack};
      #3 check("4ph value", {out0[1:0], ack0[0]}, {f, ~f, 1'b1});
      // sender returns to Omega while the receiver has not acknowledged: hold
      if (c_mode) in0p = {1'b0, 4'b0000, ack};
      else        in0p = {4'b0000, ack, ack};
      #3 check("4ph held until acknowledge", out0[1:0], {f, ~f});
      ack = 1'b1;
      if (c_mode) in0p = {1'b0, 4'b0000, ack};
      else        in0p = {4'b0000, ack, ack};
      #3 check("4ph return to Omega", {out0[1:0], ack0[0]}, 3'b000);
      // next valid data while acknowledge is still high: must not evaluate
      if (c_mode) in0p = {1'b0, y, ~y, x, ~x, ack};
      else        in0p = {y, ~y, x, ~x, ack, ack};
      #3 check("4ph waits for acknowledge low", out0[1:0], 2'b00);
      ack = 1'b0;
      if (c_mode) in0p = {1'b0, y, ~y, x, ~x, ack};
      else        in0p = {y, ~y, x, ~x, ack, ack};
      #3 check("4ph value after acknowledge", out0[1:0], {f, ~f});
      ack = 1'b1;
      in0p = c_mode ? {5'b0, ack} : {4'b0, ack, ack};
      #3 check("4ph Omega", out0[1:0], 2'b00);
      in0p = '0;
      #3;
    end
  endtask

  // ---------------- 4-phase full adder (two 3-input gates) ----------------
  task automatic run_fa(input int n);
    logic x, y, z, s, co;
    for (int t = 0; t < n; t++) begin
      x = 1'($urandom); y = 1'($urandom); z = 1'($urandom);
      s = x ^ y ^ z; co = (x & y) | (x & z) | (y & z);
      in0p = {2'b00, 2'b00, x, ~x}; in0pp = in0p;
      #3 in0p = {2'b00, y, ~y, x, ~x}; in0pp = in0p;
      #3 check("fa no early evaluation", out0, 4'b0000);
      in0p = {z, ~z, y, ~y, x, ~x}; in0pp = in0p;
      #3 check("fa sum/carry", {out0, ack0}, {co, ~co, s, ~s, 2'b11});
      in0p = {z, ~z, y, ~y, 2'b00}; in0pp = in0p;
      #3 check("fa holds until all Omega", out0, {co, ~co, s, ~s});
      in0p = '0; in0pp = '0;
      #3 check("fa Omega", {out0, ack0}, 6'b0);
    end
  endtask

  // ---------------- 4-phase gate with a binary and a ternary input ----------------
  task automatic run_mixed(input int n);
    logic x, z, a;
    int y;
    logic [2:0] yw;
    for (int t = 0; t < n; t++) begin
      x = 1'($urandom); y = $urandom_range(0, 2); z = 1'((int'(x) + y) % 2);
      yw = 3'(1 << y); a = 1'b0;
      in0p = {yw, 2'b00, a};
      #3 check("mixed no early evaluation", out0[1:0], 2'b00);
      in0p = {yw, x, ~x, a};
      #3 check("mixed value", {out0[1:0], ack0[0]}, {z, ~z, 1'b1});
      in0p = {5'b0, a};
      #3 check("mixed held until acknowledge", out0[1:0], {z, ~z});
      a = 1'b1; in0p = {5'b0, a};
      #3 check("mixed Omega", {out0[1:0], ack0[0]}, 3'b000);
      in0p = '0;
      #3;
    end
  endtask

  // ---------------- 4-phase ternary 2-input gate ----------------
  task automatic run_tern(input int n);
    int x, y, z;
    logic [2:0] xw, yw;
    for (int t = 0; t < n; t++) begin
      x = $urandom_range(0, 2); y = $urandom_range(0, 2); z = (x + y) % 3;
      xw = 3'(1 << x); yw = 3'(1 << y);
      in0p = {3'b000, xw}; in0pp = in0p;
      #3 check("tern no early evaluation", out0, 4'b0000);
      in0p = {yw, xw}; in0pp = in0p;
      #3 check("tern value", {out0, ack0[0]}, {1'b0, 3'(1 << z), 1'b1});
      in0p = {yw, 3'b000}; in0pp = in0p;
      #3 check("tern holds", out0, {1'b0, 3'(1 << z)});
      in0p = '0; in0pp = '0;
      #3 check("tern Omega", {out0, ack0[0]}, 5'b0);
    end
  endtask

  // ---------------- 4-phase gate with one quaternary output ----------------
  task automatic run_quad(input int n);
    logic x, y;
    int z;
    for (int t = 0; t < n; t++) begin
      x = 1'($urandom); y = 1'($urandom); z = 2 * int'(x) + int'(y);
      in0p = {4'b0000, x, ~x}; in0pp = in0p;
      #3 check("quad no early evaluation", out0, 4'b0000);
      in0p = {2'b00, y, ~y, x, ~x}; in0pp = in0p;
      #3 check("quad value", {out0, ack0[0]}, {4'(1 << z), 1'b1});
      in0p = {2'b00, y, ~y, 2'b00}; in0pp = in0p;
      #3 check("quad holds", out0, {4'(1 << z)});
      in0p = '0; in0pp = '0;
      #3 check("quad Omega", {out0, ack0[0]}, 5'b0);
    end
  endtask

  // ---------------- 2-phase LEDR 2-input gate ----------------
  task automatic run_ledr(input logic [3:0] tt, input bit rv_mode, input int n);
    logic xd = 0, xr = 0, yd = 0, yr = 0, ack = 0, ph = 0;
    logic od = 0, x, y, f;
    logic [5:0] w;
    for (int t = 0; t < n; t++) begin
      x = 1'($urandom); y = 1'($urandom); f = tt[{x, y}];
      if (x != xd) xd = ~xd; else xr = ~xr;
      w = rv_mode ? {1'b0, ack, yr, yd, xr, xd} : {yr, yd, xr, xd, ack, ack};
      in0p = w; in0pp = w;
      #3 check("ledr no early evaluation", {out0[1:0]}, {ph ^ od, od});
      if (y != yd) yd = ~yd; else yr = ~yr;
      w = rv_mode ? {1'b0, ack, yr, yd, xr, xd} : {yr, yd, xr, xd, ack, ack};
      in0p = w; in0pp = w;
      if (ack != ph) begin
        #3 check("ledr waits for acknowledge", {out0[1:0]}, {ph ^ od, od});
        ack = ph;
        w = rv_mode ? {1'b0, ack, yr, yd, xr, xd} : {yr, yd, xr, xd, ack, ack};
        in0p = w; in0pp = w;
      end
      ph = ~ph; od = f;
      #3 check("ledr value", {out0[1:0], ack0[0]}, {ph ^ od, od, ph});
      // receiver acknowledges every other token immediately
      if (t % 3 != 1) begin
        ack = ph;
        w = rv_mode ? {1'b0, ack, yr, yd, xr, xd} : {yr, yd, xr, xd, ack, ack};
        in0p = w; in0pp = w;
        #3 check("ledr stable after acknowledge", {out0[1:0]}, {ph ^ od, od});
      end
    end
  endtask

  // ---------------- 2-phase edge gate over two PLBs ----------------
  task automatic run_edge(input logic [3:0] tt, input int n);
    logic [1:0] a = '0, b = '0;
    logic [3:0] cexp = '0;
    logic [1:0] oexp = '0;     // {O0 wire, O1 wire} = PLB u1 {out1, out0}
    logic ack = 0, pending = 0;
    int i, j;
    for (int t = 0; t < n; t++) begin
      i = $urandom_range(0, 1); j = $urandom_range(0, 1);
      a[i] = ~a[i];
      in0p  = {a[1], a[0], b[0], b[1], 2'b00};
      in0pp = {a[1], a[0], 2'b00, b[0], b[1]};
      #3 check("2x2-dw waits for both inputs", out0, cexp);
      b[j] = ~b[j];
      in0p  = {a[1], a[0], b[0], b[1], 2'b00};
      in0pp = {a[1], a[0], 2'b00, b[0], b[1]};
      cexp[2*i+j] = ~cexp[2*i+j];
      #3 check("2x2-dw decoded toggle", out0, cexp);
      if (pending) begin
        // previous output not acknowledged yet: synchronizer must hold
        check("2x1-dw holds until acknowledge", {out1[1:0]}, oexp);
        ack = ~ack; in1pp = {1'b0, ack, 4'b0000};
        #3;
      end
      if (tt[2*i+j]) oexp[0] = ~oexp[0]; else oexp[1] = ~oexp[1];
      check("edge output toggle", {out1[1:0], ack1[0]}, {oexp, ^oexp});
      // acknowledge right away on two tokens out of three
      pending = (t % 3 == 2);
      if (!pending) begin
        ack = ~ack; in1pp = {1'b0, ack, 4'b0000};
        #3 check("edge stable after acknowledge", {out1[1:0]}, oexp);
      end
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1'b1; hold = 1'b0; edge_mode = 1'b0;
    cfg0 = '0; cfg1 = '0;
    in0p = '0; in0pp = '0; in1p_tb = '0; in1pp = '0;
    #5 rst = 1'b0;

    load_cfg(cfg_4ph_fb(4'b1000), '0, 1'b0);     // AND
    run_4ph(4'b1000, 1'b0, 12);
    load_cfg(cfg_4ph_fb(4'b0110), '0, 1'b0);     // XOR
    run_4ph(4'b0110, 1'b0, 12);
    load_cfg(cfg_4ph_c(4'b1110), '0, 1'b0);      // OR, C-element mode
    run_4ph(4'b1110, 1'b1, 12);
    load_cfg(cfg_4ph_mixed(), '0, 1'b0);
    run_mixed(16);
    load_cfg(cfg_4ph_fa(), '0, 1'b0);
    run_fa(24);
    load_cfg(cfg_4ph_tern(), '0, 1'b0);
    run_tern(24);
    load_cfg(cfg_4ph_quad(), '0, 1'b0);
    run_quad(16);
    load_cfg(cfg_ledr_fb(4'b0110), '0, 1'b0);    // XOR
    run_ledr(4'b0110, 1'b0, 24);
    load_cfg(cfg_ledr_rv(4'b1000), '0, 1'b0);    // AND
    run_ledr(4'b1000, 1'b1, 24);
    load_cfg(cfg_edge_2x2(), cfg_edge_2x1(4'b1000), 1'b1);  // AND
    run_edge(4'b1000, 24);
    load_cfg(cfg_edge_2x2(), cfg_edge_2x1(4'b0110), 1'b1);  // XOR
    run_edge(4'b0110, 24);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
