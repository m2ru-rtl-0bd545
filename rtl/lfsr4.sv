// lfsr4: 4-bit maximal-length Fibonacci LFSR (x^4 + x^3 + 1), the random
// source of one stochastic-quantizer lane. Advances when 'en' is high; the
// state cycles through 1..15 (period 15). Reset loads SEED (non-zero).
module lfsr4 #(
  parameter logic [3:0] SEED = 4'h1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  output logic [3:0] r
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  r <= (SEED == 4'h0) ? 4'h1 : SEED;
    else if (en) r <= {r[2:0], r[3] ^ r[2]};
  end
endmodule
