// tb_range_trng: checks the random-source model's interface: a word is
// offered GEN_CYCLES cycles after reset and after each take, it holds while
// not taken, successive words follow the documented xorshift64 sequence from
// SEED (computed here independently), and the low 20 bits of a long run are
// not stuck.
`timescale 1ns/1ps
module tb_range_trng;
  localparam logic [63:0] SEED = 64'h0123_4567_89AB_CDEF;
  localparam int GEN = 3;

  logic clk = 0, rst_n = 0, take = 0;
  logic valid;
  logic [63:0] rnd;
  always #5 clk = ~clk;

  range_trng #(.SEED(SEED), .GEN_CYCLES(GEN)) dut (.clk, .rst_n, .take_i(take), .valid_o(valid), .rnd_o(rnd));

  int checks = 0, failures = 0;
  task automatic check(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  function automatic logic [63:0] nxt(input logic [63:0] x);
    x ^= x << 13; x ^= x >> 7; x ^= x << 17;
    return x;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] exp;
    int waitc;
    logic [19:0] orv, andv;
    exp = SEED;
    orv = '0; andv = '1;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 50; n++) begin
      waitc = 0;
      while (!valid) begin @(posedge clk); #1; waitc++; end
      check(waitc == GEN, $sformatf("word %0d ready after %0d cycles", n, waitc));
      check(rnd == exp, $sformatf("word %0d value", n));
      @(posedge clk); #1;
      check(valid && rnd == exp, "word holds until taken");
      orv |= rnd[19:0]; andv &= rnd[19:0];
      take = 1;
      @(posedge clk); #1;
      take = 0;
      exp = nxt(exp);
    end
    check(orv == '1 && andv == '0, "low bits toggle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
