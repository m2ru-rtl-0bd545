// logit_circuit: behavioural model of the neuron (logit) circuits of a layer.
//
// One per bitline: an inverting amplifier holds the bitline at virtual
// ground, and an integrator accumulates its output. The gain of the stage
// is set by the ratio of two memristors M_f/M_i and is changed for every
// streamed bit, so the bit of significance 2^-k is integrated with gain
// 2^-k (weighted-bit streaming). Here the gain is 2^bit_idx on an integer
// scale (bit_idx = NB-1 for the most significant bit), which after NB bits
// leaves v_int[c] = sum_r value_r * w[r][c] with value_r the full signed
// input word. 'integ' closes the input switch S_i for one bit period;
// 'clr' discharges the capacitor through S_f. With both switches open the
// value is held for the ADC scan; leakage in hold is not modelled.
// Behavioural model: stands for an analog circuit, not for synthesis.
module logit_circuit #(
  parameter int unsigned COLS = 100,
  parameter int unsigned NB   = m2ru_pkg::NB,
  parameter int unsigned I_W  = m2ru_pkg::I_W,
  parameter int unsigned V_W  = m2ru_pkg::V_W,
  localparam int unsigned BI_W = $clog2(NB)
) (
  input  logic                            clk,
  input  logic                            clr,
  input  logic                            integ,
  input  logic [BI_W-1:0]                 bit_idx,
  input  logic signed [COLS-1:0][I_W-1:0] i_col,
  output logic signed [COLS-1:0][V_W-1:0] v_int
);
  always @(posedge clk) begin
    for (int c = 0; c < COLS; c++) begin
      if (clr)        v_int[c] <= '0;
      else if (integ) v_int[c] <= v_int[c] + (V_W'($signed(i_col[c])) <<< bit_idx);
    end
  end
endmodule
