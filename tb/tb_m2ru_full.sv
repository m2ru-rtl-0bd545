// tb_m2ru_full: the M2RU accelerator at its default, paper-sized
// parameters (28 inputs per step, 100 hidden units in 7 tiles, 10 classes,
// 28 time steps, replay buffer of 1875 examples, 43 hidden deltas kept).
// The top is instantiated without parameter overrides. A few TRAIN and
// INFER commands with random 8-bit inputs are sent, plus one REPLAY. An
// independent reference model of the forward pass (crossbar dot products
// from the current conductance codes, ADC, scaled piecewise-linear tanh,
// interpolation, beta scaling, readout, arg-max) must match the class of
// every command and all 100 hidden states after INFER. The test also
// checks the stochastic-rounding bounds of stored examples, the replayed
// label, the time-step length (NB+TILE+7 clocks) and that training writes
// reach both trained crossbars, and that after a wrongly predicted TRAIN
// the label's readout value gains on the wrong winner's at least once.
// The buffer cannot overflow in a few examples, so replacement and
// dropping are covered by the reduced-size top test only.
module tb_m2ru_full;
  import m2ru_pkg::*;
  localparam int X = NX, H = NH, Y = NY, T = NT, KR = 1875;
  localparam int HSH = 10, OSH = 10;
  localparam int NTIL = (H + TILE - 1) / TILE;
  localparam int N_EX = 6;

  logic clk = 0, rst_n = 0;
  logic [7:0] cfg_lambda = 8'd96, cfg_beta = 8'd200;
  logic [2:0] cfg_scale = 3'd3;
  logic [4:0] cfg_lr_shift = 5'd9;
  logic cmd_valid = 0, cmd_ready, in_valid = 0, in_ready, done, correct, sample_stored, adc_clipped;
  cmd_e cmd;
  logic [3:0] cmd_label = 0, pred;
  logic [$clog2(KR)-1:0] cmd_slot = 0, sample_slot;
  logic [$clog2(KR):0] replay_filled;
  logic [X-1:0][7:0] in_x = '0;
  logic [31:0] examples_seen;
  logic [15:0] cols_skipped;

  int checks = 0, failures = 0;
  int n_fill = 0, n_replace = 0, n_drop = 0, n_roundup = 0, n_replay = 0, n_train = 0,
      n_infer = 0, n_clip = 0, n_wo_changed = 0, n_wh_changed = 0;
  int slot_ex [KR];
  int cur_e = 0;
  int n_wrong = 0, n_improved = 0;
  int step_len = 0, last_load = -1, cyc = 0;
  always #5 clk = ~clk;

  m2ru_top dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------------------------------------------------- reference model
  int wh [X+H][H];
  int wo [H][Y];
  int mh [H];   // model hidden state
  longint mv [Y]; // model readout integrator values

  task automatic snap_weights();
    for (int r = 0; r < X + H; r++) for (int c = 0; c < H; c++) wh[r][c] = int'(dut.u_xh.w[r][c]);
    for (int r = 0; r < H; r++) for (int c = 0; c < Y; c++) wo[r][c] = int'(dut.u_xo.w[r][c]);
  endtask

  function automatic int fl_div(input int a, input int b);   // floor(a/b), b > 0
    return (a >= 0) ? a / b : -((-a + b - 1) / b);
  endfunction

  function automatic int clip(input longint v, input int sh);
    longint c;
    c = v >>> sh;
    if (c > 127) c = 127;
    if (c < -128) c = -128;
    return int'(c);
  endfunction

  function automatic int pwl(input int c, input int s);
    real x, y;
    int yi;
    x = real'(c * (1 << s)) / 256.0;
    if (x < 0) x = -x;
    if (x < 0.5)      y = x;
    else if (x < 1.0) y = 0.5 + 0.5 * (x - 0.5);
    else if (x < 1.5) y = 0.75 + 0.25 * (x - 1.0);
    else if (x < 2.0) y = 0.875 + 0.125 * (x - 1.5);
    else if (x < 2.5) y = 0.9375 + 0.0625 * (x - 2.0);
    else              y = 255.0 / 256.0;
    yi = int'($floor(y * 256.0 + 1e-9));
    if (yi > 255) yi = 255;
    return (c < 0) ? -yi : yi;
  endfunction

  function automatic int smv(input int a);   // value seen on a wordline
    if (a > 255) return 255;
    if (a < -255) return -255;
    return a;
  endfunction

  // forward pass; returns the predicted class, leaves h in mh
  function automatic int model(input int xs [T][X]);
    int rh [H];
    longint v;
    int best, bi;
    for (int c = 0; c < H; c++) begin mh[c] = 0; rh[c] = 0; end
    for (int t = 0; t < T; t++) begin
      int cand [H];
      for (int c = 0; c < H; c++) begin
        v = 0;
        for (int i = 0; i < X; i++) v += longint'(xs[t][i] * wh[i][c]);
        for (int k = 0; k < H; k++) v += longint'(smv(rh[k]) * wh[X+k][c]);
        cand[c] = pwl(clip(v, HSH), int'(cfg_scale));
      end
      for (int c = 0; c < H; c++) mh[c] = cand[c] + fl_div(int'(cfg_lambda) * (mh[c] - cand[c]), 256);
      for (int c = 0; c < H; c++) rh[c] = fl_div(mh[c] * int'(cfg_beta), 256);
    end
    best = -1000; bi = 0;
    for (int j = 0; j < Y; j++) begin
      int code;
      v = 0;
      for (int i = 0; i < H; i++) v += longint'(smv(mh[i]) * wo[i][j]);
      mv[j] = v;
      code = clip(v, OSH);
      if (code > best) begin best = code; bi = j; end
    end
    return bi;
  endfunction

  // ------------------------------------------------------------- monitors
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dut.ctl.h_load && !dut.ctl.recompute && dut.ctl.t != 0) step_len <= cyc - last_load;
    if (dut.ctl.h_load) last_load <= cyc;
    if (adc_clipped) n_clip++;
    if (dut.ctl.beat && sample_stored) n_roundup += $countones(dut.q_up);
    if (dut.dfa_wr_en && !dut.dfa_wr_sel && dut.dfa_pulse_o != '0) n_wo_changed++;
    if (dut.dfa_wr_en &&  dut.dfa_wr_sel && dut.dfa_pulse_h != '0) n_wh_changed++;
  end

  // sampler decision for the current example, sampled away from the edge
  always @(negedge clk)
    if (dut.rs_valid) begin
      if (sample_stored) begin
        if (cur_e < KR) n_fill++; else n_replace++;
        slot_ex[sample_slot] = cur_e;
      end else n_drop++;
    end

  // -------------------------------------------------------------- stimulus
  int ex [N_EX][T][X];
  int exl [N_EX];

  task automatic send(input cmd_e c, input int e, input int slot);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd = c; cmd_label = 4'(e >= 0 ? exl[e] : 0); cmd_slot = ($clog2(KR))'(slot);
    @(negedge clk);
    cmd_valid = 0;
    in_valid = 0;
    if (c != CMD_REPLAY)
      for (int t = 0; t < T; t++) begin
        in_valid = 1;
        for (int i = 0; i < X; i++) in_x[i] = 8'(ex[e][t][i]);
        while (!in_ready) @(negedge clk);
        @(posedge clk);
        #1;
        in_valid = 0;
        @(negedge clk);
        if ($urandom_range(0, 1) == 1) @(negedge clk);
      end
  endtask

  task automatic wait_done();
    int g;
    g = 0;
    while (!done && g < 200000) begin @(posedge clk); g++; end
    chk(done, "command finished");
    #1;
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired (state %0d)", dut.u_cu.state);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < N_EX; e++) begin
      exl[e] = $urandom_range(0, Y - 1);
      for (int t = 0; t < T; t++)
        for (int i = 0; i < X; i++) ex[e][t][i] = (e % 5 == 0) ? 255 : $urandom_range(0, 255);
    end
    for (int s = 0; s < KR; s++) slot_ex[s] = -1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < N_EX; e++) begin
      int mp;
      cmd_e c;
      c = (e % 3 == 2) ? CMD_INFER : CMD_TRAIN;
      snap_weights();
      mp = model(ex[e]);
      cur_e = e;
      send(c, e, 0);
      wait_done();
      chk(int'(pred) == mp, $sformatf("example %0d: class %0d, model %0d", e, pred, mp));
      if (c == CMD_INFER) begin
        n_infer++;
        for (int u = 0; u < H; u++)
          chk(int'(dut.h_all[u]) == mh[u], $sformatf("example %0d h[%0d]=%0d model %0d", e, u, dut.h_all[u], mh[u]));
      end else begin
        n_train++;
        chk(correct == (int'(pred) == exl[e]), "correct flag");
        // a wrong prediction: the update should move the readout towards
        // the label (margin of the label over the wrong winner grows)
        if (mp != exl[e]) begin
          longint m0;
          m0 = mv[exl[e]] - mv[mp];
          snap_weights();
          void'(model(ex[e]));
          n_wrong++;
          if (mv[exl[e]] - mv[mp] > m0) n_improved++;
        end
      end
      // replay a stored example after every fourth one
      if (e % 4 == 3) begin
        int s, xe;
        int xs [T][X];
        s = $urandom_range(0, int'(replay_filled) - 1);
        xe = slot_ex[s];
        for (int t = 0; t < T; t++)
          for (int i = 0; i < X; i++) begin
            int q;
            q = int'(dut.u_rb.mem[s*T + t][i*QW +: QW]);
            chk(q == ex[xe][t][i] / 16 || q == ex[xe][t][i] / 16 + 1, "stored value is a rounding of x/16");
            xs[t][i] = q * 16;
          end
        snap_weights();
        mp = model(xs);
        send(CMD_REPLAY, -1, s);
        wait_done();
        n_replay++;
        chk(int'(pred) == mp, $sformatf("replay of slot %0d: class %0d, model %0d", s, pred, mp));
        chk(correct == (int'(pred) == exl[xe]), "replayed label");
      end
    end
    chk(step_len == NB + TILE + 7, $sformatf("time step takes %0d clocks", step_len));
    $display("step=%0d fill=%0d replace=%0d drop=%0d roundup=%0d replay=%0d train=%0d infer=%0d clip=%0d wo_writes=%0d wh_writes=%0d skipped=%0d",
             step_len, n_fill, n_replace, n_drop, n_roundup, n_replay, n_train, n_infer, n_clip, n_wo_changed, n_wh_changed, cols_skipped);
    chk(n_fill > 0, "reservoir fill happened");
    chk(n_roundup > 0, "stochastic round-up happened");
    chk(n_replay > 0, "replay happened");
    chk(n_train > 0 && n_infer > 0, "train and infer happened");
    chk(n_wo_changed > 0, "output weights written");
    chk(n_wh_changed > 0, "hidden weights written");
    chk(examples_seen == N_EX, "examples counted");
    $display("wrong predictions trained=%0d, margin improved=%0d", n_wrong, n_improved);
    chk(n_wrong == 0 || n_improved > 0, "training moves the readout towards the label");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
