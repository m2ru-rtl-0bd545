// wbs_streamer: wordline buffers for weighted-bit streaming (WBS).
//
// Each row holds a sign-magnitude word (sign bit S beside the magnitude, as
// in the level-shifter register of M2RU). After 'load', every 'shift' cycle
// presents the next magnitude bit of all rows at once, most significant
// first: a '1' drives its wordline to +Ve (drv_pos) or -Ve (drv_neg)
// according to the sign, a '0' leaves it at 0 V. 'bit_idx' tells the
// integrators which significance the bit on the wordlines carries, so the
// logit circuit can apply the matching gain. MSB-first order is this
// design's choice.
//
// Timing: load in cycle c makes bit NB-1 visible from cycle c+1; each
// shift moves to the next lower bit. After NB shifts all drives are 0.
module wbs_streamer
  import m2ru_pkg::sm_t;
#(
  parameter int unsigned ROWS = 128,
  parameter int unsigned NB   = m2ru_pkg::NB,
  localparam int unsigned BI_W = $clog2(NB)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  sm_t [ROWS-1:0]   din,
  input  logic             shift,
  output logic [ROWS-1:0]  drv_pos,
  output logic [ROWS-1:0]  drv_neg,
  output logic [BI_W-1:0]  bit_idx
);
  logic [ROWS-1:0][NB-1:0] sr;
  logic [ROWS-1:0]         sgn;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr      <= '0;
      sgn     <= '0;
      bit_idx <= BI_W'(NB - 1);
    end else if (load) begin
      for (int r = 0; r < ROWS; r++) begin
        sr[r]  <= din[r].mag;
        sgn[r] <= din[r].sign;
      end
      bit_idx <= BI_W'(NB - 1);
    end else if (shift) begin
      for (int r = 0; r < ROWS; r++) sr[r] <= sr[r] << 1;
      bit_idx <= bit_idx - 1'b1;
    end
  end

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      drv_pos[r] = sr[r][NB-1] & ~sgn[r];
      drv_neg[r] = sr[r][NB-1] &  sgn[r];
    end
  end
endmodule
