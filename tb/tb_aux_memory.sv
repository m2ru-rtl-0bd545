// tb_aux_memory: writes NT random input rows and reads them back in random
// order, checking data and the one-cycle read latency.
module tb_aux_memory;
  localparam int NT = 28, NX = 6;
  logic clk = 0, wr_en = 0;
  logic [4:0] wr_t = 0, rd_t = 0;
  logic [NX-1:0][7:0] wr_x = '0, rd_x;
  logic [NX*8-1:0] shadow [NT];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  aux_memory #(.NT(NT), .NX(NX), .PIX_W(8)) dut (.*);

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
    for (int t = 0; t < NT; t++) begin
      @(negedge clk);
      wr_en = 1; wr_t = 5'(t); wr_x = (NX*8)'({$urandom, $urandom});
      shadow[t] = wr_x;
    end
    @(negedge clk);
    wr_en = 0;
    for (int i = 0; i < 100; i++) begin
      int t;
      t = $urandom_range(0, NT - 1);
      rd_t = 5'(t);
      @(negedge clk);
      chk(rd_x == shadow[t], $sformatf("row %0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
