// xorshift32: uniform pseudo-random number generator producing one full
// 32-bit word per clock, the generator family chosen for the noise stage
// because it gives a whole word per cycle where an LFSR gives one bit.
//
// How it works: state ^= state<<13; state ^= state>>17; state ^= state<<5
// (Marsaglia's triple, this design's choice), all in one combinational step.
// The state is never zero, so `rnd` is never zero, which the Box-Muller
// logarithm relies on.
//
// Interface: `en` advances the generator; `rnd` is the current state and is
// valid from the cycle after reset. Reset loads SEED (a zero seed is replaced
// by 1).
module xorshift32 #(
  parameter logic [31:0] SEED = 32'h2545F491
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic [31:0] rnd
);
  logic [31:0] s, n1, n2, n3;

  always_comb begin
    n1 = s  ^ (s  << 13);
    n2 = n1 ^ (n1 >> 17);
    n3 = n2 ^ (n2 << 5);
  end

  always_ff @(posedge clk) begin
    if (!rst_n)  s <= (SEED == 32'd0) ? 32'd1 : SEED;
    else if (en) s <= n3;
  end

  assign rnd = s;
endmodule
