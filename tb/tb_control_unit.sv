// tb_control_unit: drives the central control unit with a small datapath
// stand-in (scan, winner and update completions after fixed delays) and
// counts every strobe of INFER, TRAIN and REPLAY commands against the
// numbers the sequence must produce (NT beats, NT*NB integrations, NT*TILE
// conversions, one output update, NT hidden updates, ...). Also checks the
// cycle count of one inference time step: NB + TILE + 4 with the
// stand-in's one-cycle scan completion.
module tb_control_unit;
  import m2ru_pkg::*;
  localparam int NT_T = 5;
  logic clk = 0, rst_n = 0;
  stat_t st;
  ctl_t ctl;
  cmd_e mode;
  logic busy;
  int checks = 0, failures = 0;
  int n [string];
  int last_load, step_len;
  always #5 clk = ~clk;

  control_unit #(.NT_P(NT_T), .NB_P(NB), .TILE_P(TILE)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // datapath stand-in
  int cyc = 0, scan_end = -10, kw_at = -10, dfa_at = -10;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (ctl.scan && int'(ctl.unit) == TILE - 1) scan_end <= cyc;
    if (ctl.o_kw_start) kw_at <= cyc;
    if (ctl.dfa_out || ctl.dfa_hid) dfa_at <= cyc;
    if (ctl.h_load) begin
      if (last_load > 0) step_len <= cyc - last_load;
      last_load <= cyc;
    end
    if (ctl.present) n["present"]++;
    if (ctl.beat) n["beat"]++;
    if (ctl.rb_rd) n["rb_rd"]++;
    if (ctl.h_integ) n["h_integ"]++;
    if (ctl.scan) n["scan"]++;
    if (ctl.latch_rh) n["latch_rh"]++;
    if (ctl.o_integ) n["o_integ"]++;
    if (ctl.o_kw_start) n["okw"]++;
    if (ctl.err_en) n["err"]++;
    if (ctl.dfa_out) n["dfa_out"]++;
    if (ctl.dfa_hid) n["dfa_hid"]++;
    if (ctl.p_integ) n["p_integ"]++;
    if (ctl.p_scan) n["p_scan"]++;
    if (ctl.done) n["done"]++;
  end
  always_comb begin
    st.scan_done = (cyc > scan_end) && (scan_end >= 0);
    st.okw_done  = (cyc == kw_at + 3);
    st.dfa_done  = (cyc == dfa_at + 5);
  end

  task automatic run(input cmd_e c);
    int guard;
    n.delete();
    @(negedge clk);
    st.cmd_valid = 1; st.cmd = c;
    @(negedge clk);
    st.cmd_valid = 0;
    guard = 0;
    while (!ctl.done && guard < 20000) begin
      st.in_valid = ($urandom_range(0, 2) != 0);
      @(negedge clk);
      guard++;
    end
    st.in_valid = 0;
    @(negedge clk);
    chk(!busy, "idle after done");
  endtask

  function automatic int g(input string k);
    return n.exists(k) ? n[k] : 0;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    st = '0;
    last_load = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(CMD_INFER);
    chk(g("present") == 1 && g("beat") == NT_T, "infer: one example, NT beats");
    chk(g("h_integ") == NT_T * NB && g("scan") == NT_T * TILE, "infer: NT steps of NB bits and TILE conversions");
    chk(g("latch_rh") == NT_T + 1 && g("o_integ") == NB && g("okw") == 1, "infer: readout");
    chk(g("dfa_out") == 0 && g("dfa_hid") == 0 && g("done") == 1, "infer: no training");
    chk(step_len == NB + TILE + 4, $sformatf("step length %0d", step_len));
    run(CMD_TRAIN);
    chk(g("present") == 1 && g("beat") == NT_T, "train: load");
    chk(g("h_integ") == 2 * NT_T * NB && g("scan") == 2 * NT_T * TILE, "train: forward and recompute");
    chk(g("err") == 1 && g("dfa_out") == 1 && g("dfa_hid") == NT_T, "train: updates");
    chk(g("p_integ") == NB && g("p_scan") == TILE, "train: projection");
    run(CMD_REPLAY);
    chk(g("present") == 0 && g("beat") == 0 && g("rb_rd") == NT_T, "replay: read from buffer");
    chk(g("dfa_out") == 1 && g("dfa_hid") == NT_T && g("done") == 1, "replay: trains");
    chk(mode == CMD_REPLAY, "mode");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
