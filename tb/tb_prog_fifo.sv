// tb_prog_fifo - self-checking testbench of the asynchronous programming FIFO.
//
// At its default size (one PLB, 288 bits) the FIFO is filled with a random
// word, fed MSB first as dual-rail values separated by Omega under the 4-phase
// protocol, while the last-stage acknowledge pin is held low. The testbench
// checks the handshake of every bit, that the programming points then equal
// the word, and that nothing leaves the FIFO while the pin is low. It then
// clears the FIFO by acting as a 4-phase receiver on the last stage, checks
// that the bits come out in the order they went in and that the FIFO is empty
// afterwards, and programs a second word.
module tb_prog_fifo;
  import afpga_pkg::*;
  localparam int unsigned N = PLB_CFG_BITS;

  int checks = 0, failures = 0;
  logic rst, last_ack, prog_ack;
  logic [1:0] prog_d, last_d;
  logic [N-1:0] cfg, word;

  prog_fifo dut (.rst(rst), .prog_d(prog_d), .prog_ack(prog_ack), .last_ack(last_ack),
                 .last_d(last_d), .cfg(cfg));

  task automatic check(input string what, input logic got, input logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic feed(input logic [N-1:0] w);
    for (int i = N - 1; i >= 0; i--) begin
      prog_d = w[i] ? 2'b10 : 2'b01;
      #1 check("bit acknowledged", prog_ack, 1'b1);
      prog_d = 2'b00;
      #1 check("Omega acknowledged", prog_ack, 1'b0);
    end
  endtask

  task automatic drain(input logic [N-1:0] w);
    for (int i = N - 1; i >= 0; i--) begin
      #1 check("last stage holds a value", ^last_d, 1'b1);
      check("drain order", last_d[1], w[i]);
      last_ack = 1'b1;
      #1 check("last stage empties", |last_d, 1'b0);
      last_ack = 1'b0;
    end
    #1 check("FIFO empty", |cfg, 1'b0);
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1'b1; prog_d = 2'b00; last_ack = 1'b0;
    for (int i = 0; i < N; i += 32) word[i +: 32] = $urandom;
    #2 check("empty after reset", |cfg, 1'b0);
    rst = 1'b0;
    feed(word);
    #2 check("programming points", cfg == word, 1'b1);
    check("first bit in last stage", last_d[1], word[N-1]);
    #20 check("nothing released while pin low", cfg == word, 1'b1);
    drain(word);
    word = ~word ^ {N{1'b0}};
    for (int i = 0; i < N; i += 32) word[i +: 32] ^= $urandom;
    feed(word);
    #2 check("programming points, second word", cfg == word, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
