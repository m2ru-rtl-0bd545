// tb_stochastic_quantizer: compares the 4-bit outputs of four lanes with a
// reference model (own LFSR x^4+x^3+1 per lane, rounding rule
// q = floor(z)+1 if r < f_L and floor(z) < 15), and checks that the mean of
// many quantizations of one value approaches x/16 (unbiased rounding up to
// the LFSR's 1/15 resolution) and never exceeds 15.
module tb_stochastic_quantizer;
  localparam int L = 4;
  logic clk = 0, rst_n = 0, en = 0;
  logic [L-1:0][7:0] x;
  logic [L-1:0][3:0] q;
  logic [L-1:0]      rounded_up;
  logic [3:0]        r [L];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  stochastic_quantizer #(.LANES(L), .IN_W(8), .NB(4)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < L; l++) r[l] = 4'(l % 15 + 1);
    x = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      for (int l = 0; l < L; l++) x[l] = 8'($urandom);
      if (it % 7 == 0) x[0] = 8'hFF;
      en = ($urandom_range(0, 4) != 0);
      #1;
      for (int l = 0; l < L; l++) begin
        int fl, f, e;
        fl = int'(x[l]) >> 4; f = int'(x[l]) & 15;
        e  = (int'(r[l]) < f && fl < 15) ? fl + 1 : fl;
        chk(int'(q[l]) == e, $sformatf("lane %0d x=%0d r=%0d q=%0d exp %0d", l, x[l], r[l], q[l], e));
      end
      @(posedge clk);
      if (en) for (int l = 0; l < L; l++) r[l] = {r[l][2:0], r[l][3] ^ r[l][2]};
    end
    // unbiasedness: x = 0x38 -> z = 3.5
    begin
      int sum;
      real m;
      sum = 0;
      @(negedge clk);
      en = 1;
      for (int it = 0; it < 1500; it++) begin
        x[1] = 8'h38;
        #1 sum += int'(q[1]);
        @(negedge clk);
      end
      m = real'(sum) / 1500.0;
      $display("mean of q for z=3.5: %f", m);
      chk(m > 3.35 && m < 3.55, "stochastic rounding mean near 3.5");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
