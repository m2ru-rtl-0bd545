// miru_tile: one tile of the MiRU hidden layer.
//
// A tile owns TILE MiRU units. Their hidden states h^{t-1} sit in a shift
// register whose head (h_prev) is the unit being updated. For each
// candidate state presented with 'interp', the interpolation circuit
// computes
//     h^t = lambda * h^{t-1} + (1 - lambda) * h_cand
// as h_cand + lambda * (h^{t-1} - h_cand) (one multiplier) and shifts the
// result in at the tail while the head shifts out; after TILE candidates the
// register again holds the units in order, now at time t. Tiles run in
// parallel and each computes one unit per cycle, so a step of the layer
// needs TILE interpolation cycles whatever the layer size.
// 'latch_rh' stores beta * h in the Rh registers that drive the crossbar
// wordlines during the next step (beta and lambda are Q0.8 registers shared
// by all units). 'rotate' recirculates the register (serial-in serial-out)
// and 'clear' zeroes the states at the start of a sequence. h_vec gives all
// states in parallel.
// Timing: every operation takes effect at the clock edge; priority
// clear > interp > rotate. The parallel/serial register follows the paper,
// the interpolation factoring and the number formats are this design's.
module miru_tile
  import m2ru_pkg::*;
#(
  parameter int unsigned TILE_P = m2ru_pkg::TILE
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  logic [7:0]            lambda,
  input  logic [7:0]            beta,
  input  logic                  interp,
  input  act_t                  h_cand,
  input  logic                  rotate,
  input  logic                  latch_rh,
  output act_t [TILE_P-1:0]       h_vec,
  output act_t [TILE_P-1:0]       rh_vec,
  output act_t                  h_prev
);
  act_t h_new;
  logic signed [ACT_W+9:0] diff_l;

  assign h_prev = h_vec[0];

  always_comb begin
    diff_l = (ACT_W + 10)'(h_prev - h_cand) * $signed({2'b00, lambda});
    h_new  = h_cand + ACT_W'(diff_l >>> 8);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_vec  <= '0;
      rh_vec <= '0;
    end else begin
      if (clear) begin
        h_vec <= '0;
      end else if (interp) begin
        for (int i = 0; i < TILE_P - 1; i++) h_vec[i] <= h_vec[i+1];
        h_vec[TILE_P-1] <= h_new;
      end else if (rotate) begin
        for (int i = 0; i < TILE_P - 1; i++) h_vec[i] <= h_vec[i+1];
        h_vec[TILE_P-1] <= h_vec[0];
      end
      if (latch_rh)
        for (int i = 0; i < TILE_P; i++)
          rh_vec[i] <= ACT_W'(((ACT_W + 10)'(h_vec[i]) * $signed({2'b00, beta})) >>> 8);
    end
  end
endmodule
