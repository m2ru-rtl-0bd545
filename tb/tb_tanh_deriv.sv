// tb_tanh_deriv: every candidate value in [-255, 255] against
// floor(256*(1 - (h/256)^2)).
module tb_tanh_deriv;
  import m2ru_pkg::*;
  act_t h;
  logic [8:0] d;
  logic clk = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  tanh_deriv dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -255; v <= 255; v++) begin
      int e;
      h = act_t'(v);
      #1;
      e = int'($floor(256.0 * (1.0 - (real'(v) / 256.0) ** 2) + 1e-9));
      checks++;
      if (int'(d) != e) begin failures++; $display("FAIL: h=%0d d=%0d exp %0d", v, d, e); end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
