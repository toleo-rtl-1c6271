// range_trng: BEHAVIOURAL MODEL of the device's DRAM-based true random number
// generator (D-RaNGe). Not synthesizable as a true RNG.
//
// The real generator harvests entropy from DRAM cells read with a shortened
// activation latency; that is an analogue property of the DRAM array and has
// no logic description. This model keeps the interface a controller needs: a
// 64-bit word is offered with valid_o and consumed with take_i; after a take,
// a new word becomes valid GEN_CYCLES cycles later (the real part's
// throughput is limited by its DRAM accesses). The words come from a
// xorshift64 sequence seeded by SEED, so simulations are repeatable.
// The paper names the generator and its role (source of the random initial
// stealth versions and of the reset draw); port names, word width and timing
// are this model's choices.
module range_trng #(
  parameter logic [63:0] SEED       = 64'h9E37_79B9_7F4A_7C15,
  parameter int          GEN_CYCLES = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        take_i,
  output logic        valid_o,
  output logic [63:0] rnd_o
);

  logic [63:0] state;
  logic [7:0]  wait_cnt;

  function automatic logic [63:0] xorshift64(input logic [63:0] x);
    logic [63:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 7);
    y = y ^ (y << 17);
    return y;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= (SEED == '0) ? 64'h1 : SEED;
      wait_cnt <= 8'(GEN_CYCLES);
    end else if (take_i && valid_o) begin
      state    <= xorshift64(state);
      wait_cnt <= 8'(GEN_CYCLES);
    end else if (wait_cnt != '0) begin
      wait_cnt <= wait_cnt - 1'b1;
    end
  end

  assign valid_o = (wait_cnt == '0);
  assign rnd_o   = state;

endmodule
