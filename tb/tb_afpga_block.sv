// tb_afpga_block - end-to-end testbench of one programmable block at its
// default size (four PLBs, 1152 programming bits).
//
// The testbench plays the programmer, the routing network and the neighbouring
// gates. It shifts a configuration into the block through the asynchronous
// programming FIFO, runs gates in every style, then clears the FIFO for a
// partial reconfiguration, programs a second set of gates and runs those.
//   configuration 1: PLB0 = 2x2 decision wait, PLB1 = 2x1 decision wait
//                    (together a 2-phase edge AND gate), PLB2 = 4-phase AND
//                    with LUT feedback, PLB3 = 2-phase LEDR XOR with feedback
//   configuration 2: PLB0 = 4-phase full adder, PLB1 = 4-phase ternary adder,
//                    PLB2 = 4-phase OR in C-element mode, PLB3 = LEDR AND with
//                    the two-LUT rendez-vous
// Every output is compared with the gate function evaluated here. Each
// mechanism (programming, clearing, outputs held at 0 while programming, the
// seven gate styles, a receiver that stalls a gate) is counted and a failure
// is counted for any that never happened.
module tb_afpga_block;
  import afpga_pkg::*;
  import plb_cfg_pkg::*;

  localparam int unsigned NP = 4;
  localparam int unsigned NB = NP * PLB_CFG_BITS;

  int checks = 0, failures = 0;
  int n_load = 0, n_clear = 0, n_hold = 0, n_4ph_fb = 0, n_4ph_c = 0, n_fa = 0;
  int n_tern = 0, n_ledr_fb = 0, n_ledr_rv = 0, n_edge = 0, n_stall = 0;

  logic rst, prog_mode, prog_ack, last_ack;
  logic [1:0] prog_d, last_d;
  logic [NP-1:0][5:0] in_p, in_pp, in_p_tb;
  logic [NP-1:0][3:0] out;
  logic [NP-1:0][1:0] ack;
  logic edge_wire;

  afpga_block dut (
    .rst(rst), .prog_mode(prog_mode), .prog_d(prog_d), .prog_ack(prog_ack),
    .last_ack(last_ack), .last_d(last_d),
    .plb_in_p(in_p), .plb_in_pp(in_pp), .plb_out(out), .plb_ack(ack)
  );

  // routing: in configuration 1 the decoded outputs of PLB0 drive PLB1
  always_comb begin
    in_p = in_p_tb;
    if (edge_wire) in_p[1] = {2'b00, out[0]};
  end

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h at %0t", what, got, exp, $time);
    end
  endtask

  task automatic load(input logic [NB-1:0] w);
    prog_mode = 1'b1;
    in_p_tb = '0; in_pp = '0;
    for (int i = NB - 1; i >= 0; i--) begin
      prog_d = w[i] ? 2'b10 : 2'b01;
      #1 checks++;
      if (!prog_ack) begin failures++; $display("FAIL no acknowledge for bit %0d", i); end
      prog_d = 2'b00;
      #1;
      if (i % 97 == 0) begin
        check("PLB outputs held at 0 while programming", {out, ack}, '0);
        n_hold++;
      end
    end
    #2 check("programming points loaded", dut.cfg_bits == w, 1);
    prog_mode = 1'b0;
    #2 check("gates idle after programming", {out[0][1:0], out[1][1:0], out[2][1:0], out[3][1:0]}, '0);
    n_load++;
  endtask

  task automatic clear(input logic [NB-1:0] w);
    prog_mode = 1'b1;
    for (int i = NB - 1; i >= 0; i--) begin
      #1 checks++;
      if (last_d !== (w[i] ? 2'b10 : 2'b01)) begin
        failures++; $display("FAIL clear order at bit %0d", i);
      end
      last_ack = 1'b1;
      #1 last_ack = 1'b0;
    end
    #2 check("block cleared", |dut.cfg_bits, 0);
    n_clear++;
  endtask

  // 4-phase 2-input gate + acknowledge on PLB p (c_mode selects the wiring)
  task automatic run_4ph(input int p, input logic [3:0] tt, input bit c_mode, input int n);
    logic x, y, f, a;
    for (int t = 0; t < n; t++) begin
      x = 1'($urandom); y = 1'($urandom); f = tt[{x, y}]; a = 1'b0;
      in_p_tb[p] = c_mode ? {1'b0, 2'b00, x, ~x, a} : {2'b00, x, ~x, a, a};
      #3 check("4ph rendez-vous", out[p][1:0], 2'b00);
      in_p_tb[p] = c_mode ? {1'b0, y, ~y, x, ~x, a} : {y, ~y, x, ~x, a, a};
      #3 check("4ph value", {out[p][1:0], ack[p][0]}, {f, ~f, 1'b1});
      in_p_tb[p] = c_mode ? {5'b0, a} : {4'b0, a, a};
      #3 check("4ph held while not acknowledged", out[p][1:0], {f, ~f});
      n_stall++;
      a = 1'b1;
      in_p_tb[p] = c_mode ? {5'b0, a} : {4'b0, a, a};
      #3 check("4ph Omega", {out[p][1:0], ack[p][0]}, 3'b000);
      in_p_tb[p] = '0;
      #3;
      if (c_mode) n_4ph_c++; else n_4ph_fb++;
    end
  endtask

  task automatic run_fa(input int p, input int n);
    logic x, y, z, s, co;
    for (int t = 0; t < n; t++) begin
      x = 1'($urandom); y = 1'($urandom); z = 1'($urandom);
      s = x ^ y ^ z; co = (x & y) | (x & z) | (y & z);
      in_p_tb[p] = {2'b00, y, ~y, x, ~x}; in_pp[p] = in_p_tb[p];
      #3 check("fa rendez-vous", out[p], 4'b0000);
      in_p_tb[p] = {z, ~z, y, ~y, x, ~x}; in_pp[p] = in_p_tb[p];
      #3 check("fa sum/carry", {out[p], ack[p]}, {co, ~co, s, ~s, 2'b11});
      in_p_tb[p] = '0; in_pp[p] = '0;
      #3 check("fa Omega", {out[p], ack[p]}, 6'b0);
      n_fa++;
    end
  endtask

  task automatic run_tern(input int p, input int n);
    int x, y, z;
    for (int t = 0; t < n; t++) begin
      x = $urandom_range(0, 2); y = $urandom_range(0, 2); z = (x + y) % 3;
      in_p_tb[p] = {3'b000, 3'(1 << x)}; in_pp[p] = in_p_tb[p];
      #3 check("tern rendez-vous", out[p], 4'b0000);
      in_p_tb[p] = {3'(1 << y), 3'(1 << x)}; in_pp[p] = in_p_tb[p];
      #3 check("tern value", {out[p], ack[p][0]}, {1'b0, 3'(1 << z), 1'b1});
      in_p_tb[p] = '0; in_pp[p] = '0;
      #3 check("tern Omega", {out[p], ack[p][0]}, 5'b0);
      n_tern++;
    end
  endtask

  task automatic run_ledr(input int p, input logic [3:0] tt, input bit rv_mode, input int n);
    logic xd = 0, xr = 0, yd = 0, yr = 0, a = 0, ph = 0, od = 0, x, y, f;
    for (int t = 0; t < n; t++) begin
      x = 1'($urandom); y = 1'($urandom); f = tt[{x, y}];
      if (x != xd) xd = ~xd; else xr = ~xr;
      if (y != yd) yd = ~yd; else yr = ~yr;
      in_p_tb[p] = rv_mode ? {1'b0, a, yr, yd, xr, xd} : {yr, yd, xr, xd, a, a};
      in_pp[p] = in_p_tb[p];
      if (a != ph) begin
        #3 check("ledr stalled by receiver", out[p][1:0], {ph ^ od, od});
        n_stall++;
        a = ph;
        in_p_tb[p] = rv_mode ? {1'b0, a, yr, yd, xr, xd} : {yr, yd, xr, xd, a, a};
        in_pp[p] = in_p_tb[p];
      end
      ph = ~ph; od = f;
      #3 check("ledr value", {out[p][1:0], ack[p][0]}, {ph ^ od, od, ph});
      if (t % 3 != 1) begin
        a = ph;
        in_p_tb[p] = rv_mode ? {1'b0, a, yr, yd, xr, xd} : {yr, yd, xr, xd, a, a};
        in_pp[p] = in_p_tb[p];
        #3;
      end
      if (rv_mode) n_ledr_rv++; else n_ledr_fb++;
    end
  endtask

  // edge gate: PLB0 (2x2 decision wait) feeds PLB1 (2x1 decision wait)
  task automatic run_edge(input logic [3:0] tt, input int n);
    logic [1:0] a = '0, b = '0, oexp = '0;
    logic [3:0] cexp = '0;
    logic ak = 0, pending = 0;
    int i, j;
    for (int t = 0; t < n; t++) begin
      i = $urandom_range(0, 1); j = $urandom_range(0, 1);
      a[i] = ~a[i]; b[j] = ~b[j];
      in_p_tb[0] = {a[1], a[0], b[0], b[1], 2'b00};
      in_pp[0]   = {a[1], a[0], 2'b00, b[0], b[1]};
      cexp[2*i+j] = ~cexp[2*i+j];
      #3 check("2x2-dw decoded toggle", out[0], cexp);
      if (pending) begin
        check("2x1-dw stalled by receiver", out[1][1:0], oexp);
        n_stall++;
        ak = ~ak; in_pp[1] = {1'b0, ak, 4'b0000};
        #3;
      end
      if (tt[2*i+j]) oexp[0] = ~oexp[0]; else oexp[1] = ~oexp[1];
      check("edge output", {out[1][1:0], ack[1][0]}, {oexp, ^oexp});
      pending = (t % 3 == 2);
      if (!pending) begin
        ak = ~ak; in_pp[1] = {1'b0, ak, 4'b0000};
        #3;
      end
      n_edge++;
    end
  endtask

  task automatic need(input string what, input int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end else $display("%-28s %0d", what, n);
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [NB-1:0] w1, w2;

  initial begin
    rst = 1'b1; prog_mode = 1'b0; prog_d = '0; last_ack = 1'b0;
    in_p_tb = '0; in_pp = '0; edge_wire = 1'b0;
    w1 = {cfg_ledr_fb(4'b0110), cfg_4ph_fb(4'b1000), cfg_edge_2x1(4'b1000), cfg_edge_2x2()};
    w2 = {cfg_ledr_rv(4'b1000), cfg_4ph_c(4'b1110), cfg_4ph_tern(), cfg_4ph_fa()};
    #5 rst = 1'b0;

    load(w1);
    edge_wire = 1'b1;
    run_edge(4'b1000, 16);
    run_4ph(2, 4'b1000, 1'b0, 16);
    run_ledr(3, 4'b0110, 1'b0, 16);

    edge_wire = 1'b0;
    clear(w1);
    load(w2);
    run_fa(0, 16);
    run_tern(1, 16);
    run_4ph(2, 4'b1110, 1'b1, 16);
    run_ledr(3, 4'b1000, 1'b1, 16);

    need("configurations loaded", n_load);
    need("partial clears", n_clear);
    need("outputs held during load", n_hold);
    need("4-phase feedback tokens", n_4ph_fb);
    need("4-phase C-element tokens", n_4ph_c);
    need("full adder tokens", n_fa);
    need("ternary tokens", n_tern);
    need("LEDR feedback tokens", n_ledr_fb);
    need("LEDR rendez-vous tokens", n_ledr_rv);
    need("edge tokens", n_edge);
    need("receiver stalls", n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
