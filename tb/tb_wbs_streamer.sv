// tb_wbs_streamer: loads random sign-magnitude words and checks that each
// shift presents the next bit, MSB first, as +/- drive according to the
// sign, with bit_idx counting down from NB-1; all drives are 0 afterwards.
module tb_wbs_streamer;
  import m2ru_pkg::*;
  localparam int R = 7;
  logic clk = 0, rst_n = 0, load = 0, shift = 0;
  sm_t [R-1:0] din;
  logic [R-1:0] drv_pos, drv_neg;
  logic [2:0] bit_idx;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  wbs_streamer #(.ROWS(R), .NB(NB)) dut (.*);

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
    din = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 40; it++) begin
      sm_t [R-1:0] w;
      @(negedge clk);
      for (int r = 0; r < R; r++) begin w[r].sign = 1'($urandom); w[r].mag = 8'($urandom); end
      din = w; load = 1;
      @(negedge clk);
      load = 0; din = '0;
      for (int b = NB - 1; b >= 0; b--) begin
        chk(int'(bit_idx) == b, "bit index");
        for (int r = 0; r < R; r++) begin
          chk(drv_pos[r] == (w[r].mag[b] && !w[r].sign), $sformatf("pos row %0d bit %0d", r, b));
          chk(drv_neg[r] == (w[r].mag[b] &&  w[r].sign), $sformatf("neg row %0d bit %0d", r, b));
        end
        shift = 1;
        @(negedge clk);
        shift = 0;
        if ($urandom_range(0, 1) == 1) @(negedge clk);   // idle cycles hold the bit
      end
      chk(drv_pos == '0 && drv_neg == '0, "idle after NB bits");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
