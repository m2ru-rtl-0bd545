// stochastic_quantizer: 8-bit to 4-bit stochastic rounding of replay data.
//
// For a feature x in [0,1) held as 8 bits, z = x * 2^4 is obtained by a
// shift: floor(z) = x[7:4] and the fraction f_L = x[3:0] (in 1/16 steps).
// A 4-bit LFSR gives r; the result is floor(z)+1 when r < f_L and
// floor(z) < 15, and floor(z) otherwise, i.e. the stochastic-rounding rule
// of the M2RU replay path built from shift, fraction extraction, LFSR,
// comparator and adder. LANES features (one time step) are quantized per
// cycle, each lane with its own LFSR. A maximal 4-bit LFSR never yields 0,
// so the round-up probability is (f_L-1)/15 rather than f_L/16.
//
// Timing: q is combinational from x and the LFSR state; the LFSRs advance
// on every cycle with en=1.
module stochastic_quantizer #(
  parameter int unsigned LANES = 28,
  parameter int unsigned IN_W  = 8,
  parameter int unsigned NB    = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic [LANES-1:0][IN_W-1:0] x,
  output logic [LANES-1:0][NB-1:0]   q,
  output logic [LANES-1:0]           rounded_up
);
  localparam int unsigned FW = IN_W - NB;   // fraction bits

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [3:0]    r;
    logic [NB-1:0] fl;
    logic [FW-1:0] frac;
    logic [FW-1:0] rr;

    lfsr4 #(.SEED(4'(l % 15 + 1))) u_lfsr (.clk, .rst_n, .en, .r);

    assign fl   = x[l][IN_W-1 -: NB];
    assign frac = x[l][FW-1:0];
    // compare r (scaled to the fraction width) with f_L
    assign rr   = FW'(r) << (FW - 4);
    always_comb begin
      rounded_up[l] = (rr < frac) && (fl != {NB{1'b1}});
      q[l]          = rounded_up[l] ? fl + 1'b1 : fl;
    end
  end
endmodule
