// tb_reservoir_sampler: presents a stream of examples to a small reservoir
// (K=5) and compares every decision (store / slot) with an independent
// algorithm-R model driven by the same xorshift32 sequence; checks the
// one-cycle decision latency, the counter, the fill count, and that both
// the replace and the drop case occur.
module tb_reservoir_sampler;
  localparam int K = 5;
  logic clk = 0, rst_n = 0, present = 0;
  logic decision_valid, store;
  logic [$clog2(K)-1:0] slot;
  logic [31:0] count;
  logic [$clog2(K):0] filled;
  int checks = 0, failures = 0, n_replace = 0, n_drop = 0;
  logic [31:0] xr;
  always #5 clk = ~clk;

  reservoir_sampler #(.K(K), .SEED(32'h1357_9BDF)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    xr = 32'h1357_9BDF;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 1; i <= 300; i++) begin
      bit e_store;
      int e_slot;
      @(negedge clk);
      present = 1;
      if (i <= K) begin e_store = 1; e_slot = i - 1; end
      else begin
        int j;
        j = int'(xr % i);
        e_store = (j < K);
        e_slot  = j;
      end
      @(negedge clk);
      present = 0;
      chk(decision_valid, "decision one cycle after present");
      chk(store == e_store, $sformatf("example %0d store %0d exp %0d", i, store, e_store));
      if (e_store) chk(int'(slot) == e_slot, $sformatf("example %0d slot %0d exp %0d", i, slot, e_slot));
      chk(count == i, "counter");
      chk(int'(filled) == ((i < K) ? i : K), "filled");
      if (i > K) begin if (e_store) n_replace++; else n_drop++; end
      // advance the reference generator
      xr = xr ^ (xr << 13); xr = xr ^ (xr >> 17); xr = xr ^ (xr << 5);
      @(negedge clk);
      chk(!decision_valid, "decision is a pulse");
    end
    chk(n_replace > 0 && n_drop > 0, "both replace and drop occurred");
    $display("replaced %0d dropped %0d", n_replace, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
