// tanh_deriv: derivative of the hidden activation for DFA.
//
// Given a candidate state h = tanh(u) recomputed during training, returns
// g'(u) = 1 - h^2 as an unsigned Q0.8 value (1.0 = 256, so 0..256).
// Combinational: one squarer and one subtractor.
module tanh_deriv
  import m2ru_pkg::*;
(
  input  act_t       h,
  output logic [8:0] d
);
  logic [ACT_W-1:0]    a;
  logic [2*ACT_W-1:0]  sq;
  logic [2*ACT_W-1:0]  one;

  always_comb begin
    a   = h[ACT_W-1] ? ACT_W'(-h) : ACT_W'(h);
    sq  = (2 * ACT_W)'(a) * (2 * ACT_W)'(a);       // Q.16
    one = (2 * ACT_W)'(1) << 16;
    d   = (sq >= one) ? 9'd0 : 9'((one - sq) >> 8);
  end
endmodule
