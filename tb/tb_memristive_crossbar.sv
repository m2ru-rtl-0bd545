// tb_memristive_crossbar: programs every cell, drives random ternary
// wordline patterns and compares the bitline currents with sum(drive*w);
// then applies column write pulses and checks the new codes, including
// saturation at +/-127.
module tb_memristive_crossbar;
  localparam int R = 9, C = 5;
  logic clk = 0;
  logic [R-1:0] drv_pos = '0, drv_neg = '0;
  logic signed [C-1:0][31:0] i_col;
  logic wr_en = 0, prog_en = 0;
  logic [2:0] wr_col = 0, prog_col = 0;
  logic [3:0] prog_row = 0;
  logic signed [R-1:0][3:0] wr_pulse = '0;
  logic signed [7:0] prog_val = 0;
  int w [R][C];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  memristive_crossbar #(.ROWS(R), .COLS(C), .INIT_SEED(7)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic check_currents();
    for (int it = 0; it < 20; it++) begin
      @(negedge clk);
      for (int r = 0; r < R; r++) begin
        int k;
        k = $urandom_range(0, 2);
        drv_pos[r] = (k == 1); drv_neg[r] = (k == 2);
      end
      #1;
      for (int c = 0; c < C; c++) begin
        int s;
        s = 0;
        for (int r = 0; r < R; r++) s += (drv_pos[r] ? w[r][c] : 0) - (drv_neg[r] ? w[r][c] : 0);
        chk(int'($signed(i_col[c])) == s, $sformatf("column %0d current %0d exp %0d", c, i_col[c], s));
      end
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        @(negedge clk);
        prog_en = 1; prog_row = 4'(r); prog_col = 3'(c);
        w[r][c] = (r == 0) ? 120 : (r == 1 ? -120 : $urandom_range(0, 200) - 100);
        prog_val = 8'(w[r][c]);
      end
    @(negedge clk);
    prog_en = 0;
    check_currents();
    for (int it = 0; it < 10; it++) begin
      @(negedge clk);
      wr_en = 1; wr_col = 3'($urandom_range(0, C - 1));
      for (int r = 0; r < R; r++) begin
        int p;
        p = (r == 0) ? 7 : (r == 1 ? -7 : $urandom_range(0, 14) - 7);
        wr_pulse[r] = 4'(p);
        w[r][wr_col] = w[r][wr_col] + p;
        if (w[r][wr_col] > 127) w[r][wr_col] = 127;
        if (w[r][wr_col] < -127) w[r][wr_col] = -127;
      end
    end
    @(negedge clk);
    wr_en = 0;
    check_currents();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
