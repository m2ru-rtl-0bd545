// tb_shared_adc: converts random held values on two ports and checks
// code = v >>> ADC_SHIFT saturated to 8 bits signed, the saturation flag,
// and the one-cycle latency.
module tb_shared_adc;
  localparam int C = 6, P = 2, SH = 4;
  logic clk = 0;
  logic [P-1:0][2:0] ch = '0;
  logic signed [C-1:0][39:0] v_int = '0;
  logic signed [P-1:0][7:0] code;
  logic [P-1:0] sat;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  shared_adc #(.COLS(C), .PORTS(P), .ADC_BITS(8), .ADC_SHIFT(SH)) dut (.*);

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
    for (int it = 0; it < 200; it++) begin
      longint e [P];
      bit es [P];
      @(negedge clk);
      for (int c = 0; c < C; c++) v_int[c] = 40'($urandom_range(0, 6000) - 3000);
      for (int p = 0; p < P; p++) begin
        ch[p] = 3'($urandom_range(0, C - 1));
        e[p] = longint'($signed(v_int[ch[p]])) >>> SH;
        es[p] = (e[p] > 127 || e[p] < -128);
        if (e[p] > 127) e[p] = 127;
        if (e[p] < -128) e[p] = -128;
      end
      @(negedge clk);
      for (int p = 0; p < P; p++) begin
        chk(longint'($signed(code[p])) == e[p], $sformatf("port %0d code %0d exp %0d", p, code[p], e[p]));
        chk(sat[p] == es[p], "saturation flag");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
