// tb_cand_fifo: random pushes and pops against a queue model; checks data
// order, empty/full flags and that full stops at DEPTH words.
module tb_cand_fifo;
  localparam int D = 8;
  logic clk = 0, rst_n = 0, push = 0, pop = 0;
  logic [9:0] din = 0, dout;
  logic empty, full;
  logic [9:0] q [$];
  int checks = 0, failures = 0, n_full = 0;
  always #5 clk = ~clk;

  cand_fifo #(.DEPTH(D), .W(10)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      chk(empty == (q.size() == 0), "empty flag");
      chk(full == (q.size() == D), "full flag");
      if (q.size() > 0) chk(dout == q[0], "head data");
      if (full) n_full++;
      push = !full && ($urandom_range(0, 99) < ((it / 300) % 2 == 0 ? 70 : 30));
      pop  = !empty && ($urandom_range(0, 99) < 50);
      din  = 10'($urandom);
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
    end
    chk(n_full > 0, "reached full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
