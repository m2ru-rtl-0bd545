// xorshift32: the 32-bit xorshift generator of the reservoir sampler.
//
// Each 'step' advances the state by x ^= x<<13; x ^= x>>17; x ^= x<<5
// (Marsaglia's xorshift32 triple; the M2RU sampler is specified only as a
// "32-bit xorshift circuit", the triple is this design's choice). The state
// never becomes zero, so rnd ranges over 1 .. 2^32-1 with period 2^32-1.
// Interface: rnd is the current state (registered); it changes one cycle
// after a cycle with step=1. Reset loads SEED (must be non-zero).
module xorshift32 #(
  parameter logic [31:0] SEED = 32'h2545_F491
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        step,
  output logic [31:0] rnd
);
  logic [31:0] s1, s2, s3;

  always_comb begin
    s1 = rnd ^ (rnd << 13);
    s2 = s1 ^ (s1 >> 17);
    s3 = s2 ^ (s2 << 5);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    rnd <= SEED;
    else if (step) rnd <= s3;
  end
endmodule
