// tb_replay_buffer: writes random rows and labels into a small buffer, then
// reads them back (one-cycle read latency) and compares with a shadow copy.
module tb_replay_buffer;
  localparam int K = 6, NT = 4, NX = 5, QW = 4;
  logic clk = 0;
  logic wr_en = 0, wr_lbl_en = 0;
  logic [2:0] wr_slot = 0, rd_slot = 0;
  logic [1:0] wr_t = 0, rd_t = 0;
  logic [NX-1:0][QW-1:0] wr_row = '0, rd_row;
  logic [3:0] wr_lbl = 0, rd_lbl;
  logic [NX*QW-1:0] shadow [K][NT];
  logic [3:0] slbl [K];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  replay_buffer #(.K(K), .NT(NT), .NX(NX), .QW(QW), .LBL_W(4)) dut (.*);

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
    for (int rep = 0; rep < 3; rep++)
      for (int s = 0; s < K; s++) begin
        for (int t = 0; t < NT; t++) begin
          @(negedge clk);
          wr_en = 1; wr_slot = 3'(s); wr_t = 2'(t); wr_row = (NX*QW)'({$urandom, $urandom});
          wr_lbl_en = (t == 0); wr_lbl = 4'($urandom);
          shadow[s][t] = wr_row;
          if (t == 0) slbl[s] = wr_lbl;
        end
      end
    @(negedge clk);
    wr_en = 0; wr_lbl_en = 0;
    for (int i = 0; i < 100; i++) begin
      int s, t;
      s = $urandom_range(0, K - 1); t = $urandom_range(0, NT - 1);
      rd_slot = 3'(s); rd_t = 2'(t);
      @(negedge clk);
      chk(rd_row == shadow[s][t], $sformatf("row %0d/%0d", s, t));
      chk(rd_lbl == slbl[s], $sformatf("label %0d", s));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
