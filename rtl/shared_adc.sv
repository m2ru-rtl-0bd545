// shared_adc: behavioural model of the high-speed ADC shared by a crossbar.
//
// One fast ADC scans the held integrator outputs of all bitlines. At its
// sampling rate it completes many conversions per system clock; the model
// converts PORTS channels per clock (ch[p] -> code[p]). A conversion is
// v >>> ADC_SHIFT, saturated to a signed ADC_BITS code; 'sat' flags a
// clipped conversion. Resolution and full scale are this design's choice.
// Timing: code and sat are registered, valid the cycle after ch.
// Behavioural model: stands for a mixed-signal converter.
module shared_adc #(
  parameter int unsigned COLS      = 100,
  parameter int unsigned PORTS     = 7,
  parameter int unsigned ADC_BITS  = m2ru_pkg::ADC_BITS,
  parameter int unsigned ADC_SHIFT = 10,
  parameter int unsigned V_W       = m2ru_pkg::V_W,
  localparam int unsigned C_W = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic                                 clk,
  input  logic [PORTS-1:0][C_W-1:0]            ch,
  input  logic signed [COLS-1:0][V_W-1:0]      v_int,
  output logic signed [PORTS-1:0][ADC_BITS-1:0] code,
  output logic [PORTS-1:0]                      sat
);
  localparam longint CMAX = (64'sd1 <<< (ADC_BITS - 1)) - 1;
  localparam longint CMIN = -(64'sd1 <<< (ADC_BITS - 1));

  always @(posedge clk) begin
    for (int p = 0; p < PORTS; p++) begin
      longint v;
      v = longint'($signed(v_int[(int'(ch[p]) < COLS) ? int'(ch[p]) : 0])) >>> ADC_SHIFT;
      if (v > CMAX)      begin code[p] <= ADC_BITS'(CMAX); sat[p] <= 1'b1; end
      else if (v < CMIN) begin code[p] <= ADC_BITS'(CMIN); sat[p] <= 1'b1; end
      else               begin code[p] <= ADC_BITS'(v);    sat[p] <= 1'b0; end
    end
  end
endmodule
