// tb_activation_unit: sweeps every ADC code at several scale settings and
// compares the candidate state with the piecewise-linear tanh computed in
// real arithmetic (floored to 1/256), checks odd symmetry, that it stays
// within 0.05 of tanh, and the one-cycle latency.
module tb_activation_unit;
  import m2ru_pkg::*;
  logic clk = 0, rst_n = 0, valid_in = 0, valid_out;
  logic signed [7:0] code = 0;
  logic [2:0] scale = 0;
  act_t h_cand;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  activation_unit dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic int pwl(input int c, input int s);
    real x, y;
    int yi;
    x = real'(c * (1 << s)) / 256.0;
    if (x < 0) x = -x;
    if (x < 0.5)      y = x;
    else if (x < 1.0) y = 0.5 + 0.5 * (x - 0.5);
    else if (x < 1.5) y = 0.75 + 0.25 * (x - 1.0);
    else if (x < 2.0) y = 0.875 + 0.125 * (x - 1.5);
    else if (x < 2.5) y = 0.9375 + 0.0625 * (x - 2.0);
    else              y = 255.0 / 256.0;
    yi = int'($floor(y * 256.0 + 1e-9));
    if (yi > 255) yi = 255;
    return (c < 0) ? -yi : yi;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 6; s++)
      for (int c = -128; c < 128; c++) begin
        @(negedge clk);
        valid_in = 1; code = 8'(c); scale = 3'(s);
        @(negedge clk);
        valid_in = 0;
        chk(valid_out, "valid one cycle later");
        chk(int'(h_cand) == pwl(c, s), $sformatf("code %0d scale %0d: %0d exp %0d", c, s, h_cand, pwl(c, s)));
        if (s == 4) begin
          real d;
          d = real'(h_cand) / 256.0 - $tanh(real'(c * 16) / 256.0);
          chk(d < 0.05 && d > -0.05, $sformatf("close to tanh at code %0d", c));
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
