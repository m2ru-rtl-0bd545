// tb_dfa_trainer: small trainer (NX=3, NH=6, NY=2, K_GRAD=3).
// Output update: every column write is compared with
// pulse = -sign(h*E) * min(7, |h*E| >> lr). Hidden update: delta_j =
// floor(lambda*e_j*g_j / 2^16), the 3 largest |delta| are kept (ties to the
// lower index), each kept column j gets pulses from x_i*delta_j and
// rh_i*delta_j, dropped columns are skipped and counted.
module tb_dfa_trainer;
  import m2ru_pkg::*;
  localparam int X = 3, H = 6, Y = 2, KG = 3;
  logic clk = 0, rst_n = 0, start_out = 0, start_hid = 0;
  logic signed [Y-1:0][E_W-1:0] err;
  act_t [H-1:0] h_last, rh_in;
  logic signed [H-1:0][7:0] e_proj;
  logic [H-1:0][8:0] deriv;
  logic [X-1:0][7:0] x_in;
  logic [7:0] lambda;
  logic [4:0] lr_shift;
  logic wr_en, wr_sel, busy, done;
  logic [2:0] wr_col;
  logic signed [H-1:0][3:0] wr_pulse_o;
  logic signed [X+H-1:0][3:0] wr_pulse_h;
  logic [15:0] skipped;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  dfa_trainer #(.NX_P(X), .NH_P(H), .NY_P(Y), .K_GRAD(KG)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic int rp(input int a, input int b, input int sh);
    int p, m;
    p = a * b;
    m = (p < 0 ? -p : p) >> sh;
    if (m > 7) m = 7;
    return (p > 0) ? -m : m;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nskip_exp;
    nskip_exp = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 40; it++) begin
      int d [H];
      logic [H-1:0] m;
      int nw;
      lambda = 8'($urandom_range(50, 255));
      lr_shift = 5'($urandom_range(8, 12));
      for (int j = 0; j < Y; j++) err[j] = E_W'($urandom_range(0, 2) * 255 - 255);
      for (int i = 0; i < H; i++) begin
        h_last[i] = act_t'($urandom_range(0, 510) - 255);
        rh_in[i]  = act_t'($urandom_range(0, 510) - 255);
        e_proj[i] = 8'($urandom);
        deriv[i]  = 9'($urandom_range(0, 256));
      end
      for (int i = 0; i < X; i++) x_in[i] = 8'($urandom);
      // output layer
      @(negedge clk);
      start_out = 1;
      @(negedge clk);
      start_out = 0;
      for (int j = 0; j < Y; j++) begin
        chk(wr_en && !wr_sel && int'(wr_col) == j, $sformatf("output column %0d strobe", j));
        for (int i = 0; i < H; i++)
          chk(int'($signed(wr_pulse_o[i])) == rp(int'(h_last[i]), int'($signed(err[j])), int'(lr_shift)), $sformatf("dWo[%0d][%0d]", i, j));
        @(negedge clk);
      end
      chk(!wr_en, "output update ends");
      // hidden layer
      for (int j = 0; j < H; j++)
        d[j] = int'($floor(real'(int'(lambda) * int'($signed(e_proj[j])) * int'(deriv[j])) / 65536.0));
      for (int i = 0; i < H; i++) begin
        int b;
        b = 0;
        for (int j = 0; j < H; j++)
          if ((d[j] < 0 ? -d[j] : d[j]) > (d[i] < 0 ? -d[i] : d[i]) ||
              ((d[j] < 0 ? -d[j] : d[j]) == (d[i] < 0 ? -d[i] : d[i]) && j < i)) b++;
        m[i] = (b < KG);
      end
      nskip_exp += H - KG;
      start_hid = 1;
      @(negedge clk);
      start_hid = 0;
      nw = 0;
      for (int c = 0; c < 40 && !done; c++) begin
        if (wr_en) begin
          int j;
          j = int'(wr_col);
          nw++;
          chk(wr_sel && m[j], $sformatf("hidden column %0d written only if kept", j));
          for (int i = 0; i < X; i++)
            chk(int'($signed(wr_pulse_h[i])) == rp(int'(x_in[i]), d[j], int'(lr_shift)), $sformatf("dWh[%0d][%0d]", i, j));
          for (int i = 0; i < H; i++)
            chk(int'($signed(wr_pulse_h[X+i])) == rp(int'(rh_in[i]), d[j], int'(lr_shift)), $sformatf("dUh[%0d][%0d]", i, j));
        end
        @(negedge clk);
      end
      chk(nw == KG, $sformatf("%0d columns written, exp %0d", nw, KG));
      chk(int'(skipped) == nskip_exp, "skipped count");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
