// tb_logit_circuit: streams NB bit-currents with their significance and
// checks that the integrator holds sum_k 2^k * I_k, that it holds its value
// while integ is low and that clr discharges it.
module tb_logit_circuit;
  localparam int C = 4, NB = 8;
  logic clk = 0, clr = 0, integ = 0;
  logic [2:0] bit_idx = 0;
  logic signed [C-1:0][31:0] i_col = '0;
  logic signed [C-1:0][39:0] v_int;
  longint acc [C];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logit_circuit #(.COLS(C), .NB(NB)) dut (.*);

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
    for (int it = 0; it < 20; it++) begin
      @(negedge clk);
      clr = 1;
      @(negedge clk);
      clr = 0;
      for (int c = 0; c < C; c++) begin chk(v_int[c] == 0, "cleared"); acc[c] = 0; end
      for (int b = NB - 1; b >= 0; b--) begin
        integ = 1; bit_idx = 3'(b);
        for (int c = 0; c < C; c++) begin
          i_col[c] = 32'($urandom_range(0, 4000) - 2000);
          acc[c] += longint'($signed(i_col[c])) * (longint'(1) << b);
        end
        @(negedge clk);
        integ = 0;
        i_col = '0;
        for (int c = 0; c < C; c++) i_col[c] = 32'(1000);   // ignored while S_i is open
        @(negedge clk);
      end
      for (int c = 0; c < C; c++) chk(longint'($signed(v_int[c])) == acc[c], $sformatf("integrated col %0d", c));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
