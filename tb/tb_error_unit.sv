// tb_error_unit: every label against one-hot winners (and an empty
// winner set); checks E_j = 255*[win_j] - 255*[label==j] and 'correct'.
module tb_error_unit;
  import m2ru_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  logic [NY-1:0] win = '0;
  logic [3:0] label = 0;
  logic signed [NY-1:0][E_W-1:0] err;
  logic correct;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  error_unit dut (.*);

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
    for (int l = 0; l < NY; l++)
      for (int w = -1; w < NY; w++) begin
        @(negedge clk);
        en = 1; label = 4'(l); win = (w < 0) ? '0 : NY'(1) << w;
        @(negedge clk);
        en = 0;
        for (int j = 0; j < NY; j++)
          chk(int'($signed(err[j])) == (j == w ? 255 : 0) - (j == l ? 255 : 0), $sformatf("E[%0d] label %0d win %0d", j, l, w));
        chk(correct == (w == l), "correct flag");
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
