// tb_kwta: random vectors (with forced ties) into a 12-input, K=4 k-WTA in
// magnitude mode and a K=1 instance in signed mode; the mask is compared
// with a sort-based reference (ties to the lower index) and 'done' must
// come N+1 cycles after start.
module tb_kwta;
  localparam int N = 12, K = 4;
  logic clk = 0, rst_n = 0, start = 0;
  logic signed [N-1:0][9:0] vals = '0;
  logic busy, done, busy1, done1;
  logic [N-1:0] mask, mask1;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  kwta #(.N(N), .K(K), .W(10), .USE_ABS(1'b1)) dut (.clk, .rst_n, .start, .vals, .busy, .done, .mask);
  kwta #(.N(N), .K(1), .W(10), .USE_ABS(1'b0)) dut1 (.clk, .rst_n, .start, .vals, .busy(busy1), .done(done1), .mask(mask1));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [N-1:0] ref_mask(input int v [N], input int k, input bit use_abs);
    logic [N-1:0] m;
    for (int i = 0; i < N; i++) begin
      int beats, ki, kj;
      beats = 0;
      ki = use_abs ? (v[i] < 0 ? -v[i] : v[i]) : v[i];
      for (int j = 0; j < N; j++) begin
        kj = use_abs ? (v[j] < 0 ? -v[j] : v[j]) : v[j];
        if (kj > ki || (kj == ki && j < i)) beats++;
      end
      m[i] = (beats < k);
    end
    return m;
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
    for (int it = 0; it < 200; it++) begin
      int v [N];
      int cyc;
      for (int i = 0; i < N; i++) begin
        v[i] = $urandom_range(0, 1022) - 511;
        if (it % 3 == 0 && i > 0 && $urandom_range(0, 3) == 0) v[i] = -v[i-1];  // ties in magnitude
        if (it % 5 == 0 && i > 0 && $urandom_range(0, 3) == 0) v[i] = v[0];     // exact ties
        vals[i] = 10'(v[i]);
      end
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done && cyc < 100) begin @(negedge clk); cyc++; end
      chk(cyc == N + 1, $sformatf("latency %0d", cyc));
      chk(mask == ref_mask(v, K, 1'b1), $sformatf("magnitude mask %b exp %b", mask, ref_mask(v, K, 1'b1)));
      chk(mask1 == ref_mask(v, 1, 1'b0), $sformatf("signed winner %b exp %b", mask1, ref_mask(v, 1, 1'b0)));
      chk($countones(mask) == K, "exactly K winners");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
