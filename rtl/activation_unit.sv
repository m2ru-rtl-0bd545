// activation_unit: weight scaling and piecewise-linear tanh.
//
// The ADC code of a hidden neuron is first scaled by a left shift ('scale',
// the run-time weight-scaling setting that maps the weight range onto the
// ADC range), giving the pre-activation u in Q.8. A digital piecewise-linear
// tanh then yields the candidate hidden state. Segment breakpoints and
// slopes are this design's choice, chosen so that only shifts and adds are
// needed and the curve is continuous (|x| in units of 1.0):
//     |x| < 0.5         y = |x|
//     0.5 <= |x| < 1    y = 0.5    + (|x| - 0.5) / 2
//     1   <= |x| < 1.5  y = 0.75   + (|x| - 1)   / 4
//     1.5 <= |x| < 2    y = 0.875  + (|x| - 1.5) / 8
//     2   <= |x| < 2.5  y = 0.9375 + (|x| - 2)   / 16
//     |x| >= 2.5        y = 255/256
// and y takes the sign of x. Largest error against tanh is about 0.04.
// Timing: one register stage, valid_out follows valid_in by one cycle.
module activation_unit
  import m2ru_pkg::*;
#(
  parameter int unsigned CODE_W = ADC_BITS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     valid_in,
  input  logic signed [CODE_W-1:0] code,
  input  logic [2:0]               scale,
  output logic                     valid_out,
  output act_t                     h_cand
);
  logic signed [CODE_W+7:0] u;
  logic [CODE_W+7:0]        a;
  logic [CODE_W+7:0]        y;
  act_t                     ys;

  always_comb begin
    u = (CODE_W + 8)'(code) <<< scale;
    a = u[CODE_W+7] ? (CODE_W + 8)'(-u) : (CODE_W + 8)'(u);
    if (a < 128)      y = a;
    else if (a < 256) y = 128 + ((a - 128) >> 1);
    else if (a < 384) y = 192 + ((a - 256) >> 2);
    else if (a < 512) y = 224 + ((a - 384) >> 3);
    else if (a < 640) y = 240 + ((a - 512) >> 4);
    else              y = 255;
    if (y > 255)      y = 255;
    ys = u[CODE_W+7] ? -act_t'(y) : act_t'(y);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_out <= 1'b0;
      h_cand    <= '0;
    end else begin
      valid_out <= valid_in;
      if (valid_in) h_cand <= ys;
    end
  end
endmodule
