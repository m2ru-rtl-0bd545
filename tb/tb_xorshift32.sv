// tb_xorshift32: checks the xorshift32 sequence against a reference model
// (x ^= x<<13; x ^= x>>17; x ^= x<<5), that the state holds when step is
// low, and that reset reloads the seed.
module tb_xorshift32;
  logic clk = 0, rst_n = 0, step = 0;
  logic [31:0] rnd, ref_x;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  xorshift32 #(.SEED(32'hDEAD_BEEF)) dut (.clk, .rst_n, .step, .rnd);

  function automatic logic [31:0] nxt(input logic [31:0] x);
    x = x ^ (x << 13); x = x ^ (x >> 17); x = x ^ (x << 5);
    return x;
  endfunction

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(rnd == 32'hDEAD_BEEF, "seed after reset");
    ref_x = 32'hDEAD_BEEF;
    for (int i = 0; i < 1000; i++) begin
      step = ($urandom_range(0, 3) != 0);
      @(negedge clk);
      if (step) ref_x = nxt(ref_x);
      chk(rnd == ref_x, $sformatf("state %0d: %h vs %h", i, rnd, ref_x));
      chk(rnd != 0, "state never zero");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
