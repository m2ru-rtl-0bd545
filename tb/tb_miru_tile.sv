// tb_miru_tile: runs several time steps through a 4-unit tile with random
// candidates and coefficients and checks every hidden state against
// h = (lambda*h_prev + (256-lambda)*h_cand)/256 (within one LSB, the two
// forms round differently), the Rh registers against beta*h/256, the
// rotate (serial) mode and clear.
module tb_miru_tile;
  import m2ru_pkg::*;
  localparam int T = 4;
  logic clk = 0, rst_n = 0, clear = 0, interp = 0, rotate = 0, latch_rh = 0;
  logic [7:0] lambda, beta;
  act_t h_cand = '0, h_prev;
  act_t [T-1:0] h_vec, rh_vec;
  int h [T];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  miru_tile #(.TILE_P(T)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic int absd(input int a, input int b);
    return (a > b) ? a - b : b - a;
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    lambda = 8'd200; beta = 8'd128;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int seq = 0; seq < 10; seq++) begin
      @(negedge clk);
      clear = 1;
      @(negedge clk);
      clear = 0;
      for (int u = 0; u < T; u++) begin h[u] = 0; chk(h_vec[u] == 0, "clear"); end
      lambda = 8'($urandom); beta = 8'($urandom);
      for (int t = 0; t < 6; t++) begin
        for (int u = 0; u < T; u++) begin
          int c;
          c = $urandom_range(0, 510) - 255;
          h_cand = act_t'(c);
          interp = 1;
          chk(int'(h_prev) == h[u], "head is h^{t-1} of the unit");
          h[u] = (int'(lambda) * h[u] + (256 - int'(lambda)) * c);
          h[u] = (h[u] >= 0) ? h[u] / 256 : -((-h[u] + 255) / 256);
          @(negedge clk);
          interp = 0;
        end
        for (int u = 0; u < T; u++)
          chk(absd(int'(h_vec[u]), h[u]) <= 1, $sformatf("h[%0d]=%0d exp %0d", u, h_vec[u], h[u]));
        for (int u = 0; u < T; u++) h[u] = int'(h_vec[u]);
        latch_rh = 1;
        @(negedge clk);
        latch_rh = 0;
        for (int u = 0; u < T; u++) begin
          int e;
          e = h[u] * int'(beta);
          e = (e >= 0) ? e / 256 : -((-e + 255) / 256);
          chk(int'(rh_vec[u]) == e, $sformatf("rh[%0d]", u));
        end
      end
      // one rotation step moves every state one place towards the head
      rotate = 1;
      @(negedge clk);
      rotate = 0;
      for (int u = 0; u < T; u++) chk(int'(h_vec[u]) == h[(u + 1) % T], "rotate");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
