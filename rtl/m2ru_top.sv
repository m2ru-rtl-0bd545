// m2ru_top: M2RU, a memristive Minion Recurrent Unit (MiRU) accelerator
// with on-chip continual learning.
//
// Data preparation: every new example is offered to a reservoir sampler
// (xorshift32 + counter + modulus + index check); if chosen, its NT input
// rows are stochastically quantized to 4 bits and written to the replay
// buffer as they stream in. All examples also go to the auxiliary memory,
// from which the network reads x^t.
// MiRU network: the hidden crossbar has NX+NH rows (x^t and beta*h^{t-1})
// and NH bitlines. Inputs are streamed bit-serially (weighted-bit
// streaming); the logit circuits integrate each bit with its significance,
// a shared ADC converts one unit per tile per clock, an activation unit per
// tile applies scaling and tanh, and candidates pass through a FIFO to the
// tile's interpolation circuit, which forms h^t = lambda h^{t-1} +
// (1-lambda) h~^t. After NT steps h^{NT} is streamed into the readout
// crossbar (NH x NY); a winner-take-all gives the class.
// Training (DFA): the error E = yhat - y updates the readout weights,
// is streamed through a fixed random projection crossbar Psi (NY x NH), and
// the sequence is recomputed from the auxiliary memory while the hidden
// weights of every step receive sparsified updates.
// Interface: a command (cmd_valid/cmd_ready, cmd, label, replay slot), then
// for INFER/TRAIN NT input beats of NX 8-bit features (in_valid/in_ready).
// 'done' pulses at the end with 'pred' and 'correct' valid.
// Timing: see control_unit; an inference step takes NB+TILE+7 clocks.
// The crossbars, logit circuits and ADCs are behavioural models of analog
// parts; everything else is synthesizable logic.
// Left open on purpose: the tile's h_prev tap, the busy flags of the
// readout k-WTA and the trainer, the sampler's decision_valid strobe, the
// quantizer's round-up flags, the FIFO full flags (a FIFO never holds more
// than one tile's candidates) and the o_adc strobe (the readout ADC
// converts every cycle). They exist for the block-level tests.
module m2ru_top
  import m2ru_pkg::*;
#(
  parameter int unsigned NX_P      = m2ru_pkg::NX,
  parameter int unsigned NH_P      = m2ru_pkg::NH,
  parameter int unsigned NY_P      = m2ru_pkg::NY,
  parameter int unsigned NT_P      = m2ru_pkg::NT,
  parameter int unsigned K_REPLAY  = 1875,
  parameter int unsigned K_GRAD    = 43,
  parameter int unsigned H_ADC_SH  = 10,   // hidden ADC full scale
  parameter int unsigned O_ADC_SH  = 10,   // readout ADC full scale
  parameter int unsigned P_ADC_SH  = 6,    // projection ADC full scale
  localparam int unsigned NTILES   = (NH_P + TILE - 1) / TILE,
  localparam int unsigned ROWS_H   = NX_P + NH_P,
  localparam int unsigned SLOT_W   = $clog2(K_REPLAY)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // configuration registers (shared by all units)
  input  logic [7:0]               cfg_lambda,
  input  logic [7:0]               cfg_beta,
  input  logic [2:0]               cfg_scale,
  input  logic [4:0]               cfg_lr_shift,
  // command
  input  logic                     cmd_valid,
  output logic                     cmd_ready,
  input  cmd_e                     cmd,
  input  logic [LBL_W-1:0]         cmd_label,
  input  logic [SLOT_W-1:0]        cmd_slot,
  // input stream: one time step per beat
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [NX_P-1:0][PIX_W-1:0] in_x,
  // result
  output logic                     done,
  output logic [LBL_W-1:0]         pred,
  output logic                     correct,
  output logic                     sample_stored,
  output logic [SLOT_W-1:0]        sample_slot,
  output logic [SLOT_W:0]          replay_filled,
  // activity counters' sources
  output logic [31:0]              examples_seen,
  output logic [15:0]              cols_skipped,
  output logic                     adc_clipped
);
  // ------------------------------------------------------------------ control
  ctl_t  ctl;
  stat_t st;
  cmd_e  mode;
  logic  cu_busy;

  logic scan_done, okw_done, dfa_done;

  assign st.cmd_valid = cmd_valid;
  assign st.cmd       = cmd;
  assign st.in_valid  = in_valid;
  assign st.scan_done = scan_done;
  assign st.okw_done  = okw_done;
  assign st.dfa_done  = dfa_done;

  control_unit #(.NT_P(NT_P), .NB_P(NB), .TILE_P(TILE)) u_cu (
    .clk, .rst_n, .st, .ctl, .mode, .busy(cu_busy));

  assign cmd_ready = !cu_busy;
  assign in_ready  = ctl.in_ready;
  assign done      = ctl.done;

  logic [LBL_W-1:0]  label_q;
  logic [SLOT_W-1:0] rslot_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      label_q <= '0;
      rslot_q <= '0;
    end else if (cmd_valid && cmd_ready) begin
      label_q <= cmd_label;
      rslot_q <= cmd_slot;
    end
  end

  // ------------------------------------------------------- data preparation
  logic rs_valid, rs_store;
  logic [SLOT_W-1:0] rs_slot;

  reservoir_sampler #(.K(K_REPLAY)) u_rs (
    .clk, .rst_n, .present(ctl.present), .decision_valid(rs_valid), .store(rs_store),
    .slot(rs_slot), .count(examples_seen), .filled(replay_filled));

  assign sample_stored = rs_store;
  assign sample_slot   = rs_slot;

  logic [NX_P-1:0][QW-1:0] q_row;
  logic [NX_P-1:0]         q_up;
  stochastic_quantizer #(.LANES(NX_P), .IN_W(PIX_W), .NB(QW)) u_sq (
    .clk, .rst_n, .en(ctl.beat && rs_store), .x(in_x), .q(q_row), .rounded_up(q_up));

  // time-step index at the width of the per-sequence memories
  localparam int unsigned TM_W = (NT_P > 1) ? $clog2(NT_P) : 1;
  logic [TM_W-1:0] t_mem;
  assign t_mem = TM_W'(ctl.t);

  logic [NX_P-1:0][QW-1:0] rb_row;
  logic [LBL_W-1:0]        rb_lbl;
  replay_buffer #(.K(K_REPLAY), .NT(NT_P), .NX(NX_P), .QW(QW), .LBL_W(LBL_W)) u_rb (
    .clk,
    .wr_en(ctl.beat && rs_store), .wr_slot(rs_slot), .wr_t(t_mem), .wr_row(q_row),
    .wr_lbl_en(ctl.rb_lbl_wr && rs_store), .wr_lbl(label_q),
    .rd_slot(rslot_q), .rd_t(t_mem), .rd_row(rb_row), .rd_lbl(rb_lbl));

  // replay rows reach the auxiliary memory one cycle after they are read
  logic           rl_wr;
  logic [TM_W-1:0] rl_t;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rl_wr <= 1'b0;
      rl_t  <= '0;
    end else begin
      rl_wr <= ctl.rb_rd;
      rl_t  <= t_mem;
    end
  end

  logic [NX_P-1:0][PIX_W-1:0] deq_row, aux_wx, x_t;
  always_comb
    for (int i = 0; i < NX_P; i++) deq_row[i] = {rb_row[i], {(PIX_W - QW){1'b0}}};
  assign aux_wx = rl_wr ? deq_row : in_x;

  aux_memory #(.NT(NT_P), .NX(NX_P), .PIX_W(PIX_W)) u_aux (
    .clk, .wr_en(ctl.beat || rl_wr), .wr_t(rl_wr ? rl_t : t_mem), .wr_x(aux_wx),
    .rd_t(t_mem), .rd_x(x_t));

  logic [LBL_W-1:0] label_eff;
  assign label_eff = (mode == CMD_REPLAY) ? rb_lbl : label_q;

  // ------------------------------------------------------------ hidden layer
  act_t [NTILES*TILE-1:0] h_all, rh_all;
  sm_t  [ROWS_H-1:0]      h_din;
  always_comb begin
    for (int i = 0; i < NX_P; i++) h_din[i] = pix_to_sm(x_t[i]);
    for (int i = 0; i < NH_P; i++) h_din[NX_P + i] = act_to_sm(rh_all[i]);
  end

  logic [ROWS_H-1:0] h_pos, h_neg;
  logic [$clog2(NB)-1:0] h_bit;
  wbs_streamer #(.ROWS(ROWS_H), .NB(NB)) u_hs (
    .clk, .rst_n, .load(ctl.h_load), .din(h_din), .shift(ctl.h_integ),
    .drv_pos(h_pos), .drv_neg(h_neg), .bit_idx(h_bit));

  logic dfa_wr_en, dfa_wr_sel;
  logic [$clog2(NH_P > NY_P ? NH_P : NY_P)-1:0] dfa_col;
  logic signed [NH_P-1:0][P_W-1:0]   dfa_pulse_o;
  logic signed [ROWS_H-1:0][P_W-1:0] dfa_pulse_h;

  logic signed [NH_P-1:0][I_W-1:0] h_icol;
  memristive_crossbar #(.ROWS(ROWS_H), .COLS(NH_P), .INIT_SEED(1)) u_xh (
    .clk, .drv_pos(h_pos), .drv_neg(h_neg), .i_col(h_icol),
    .wr_en(dfa_wr_en && dfa_wr_sel), .wr_col($clog2(NH_P)'(dfa_col)), .wr_pulse(dfa_pulse_h),
    .prog_en(1'b0), .prog_row('0), .prog_col('0), .prog_val('0));

  logic signed [NH_P-1:0][V_W-1:0] h_vint;
  logit_circuit #(.COLS(NH_P), .NB(NB)) u_lh (
    .clk, .clr(ctl.h_clr), .integ(ctl.h_integ), .bit_idx(h_bit), .i_col(h_icol), .v_int(h_vint));

  logic [NTILES-1:0][$clog2(NH_P)-1:0]      h_ch;
  logic signed [NTILES-1:0][ADC_BITS-1:0]   h_code;
  logic [NTILES-1:0]                        h_sat;
  always_comb
    for (int p = 0; p < NTILES; p++) h_ch[p] = $clog2(NH_P)'(p * TILE + int'(ctl.unit));
  shared_adc #(.COLS(NH_P), .PORTS(NTILES), .ADC_SHIFT(H_ADC_SH)) u_ah (
    .clk, .ch(h_ch), .v_int(h_vint), .code(h_code), .sat(h_sat));

  // scan pipeline: channel issued (c), code (c+1), candidate (c+2) -> FIFO
  logic           scan_d1;
  logic [U_W-1:0] unit_d1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scan_d1 <= 1'b0;
      unit_d1 <= '0;
    end else begin
      scan_d1 <= ctl.scan;
      unit_d1 <= ctl.unit;
    end
  end

  logic [NTILES-1:0] tile_full;
  logic [NH_P-1:0][8:0] deriv;

  for (genvar p = 0; p < NTILES; p++) begin : g_tile
    logic                   act_v;
    act_t                   cand;
    logic signed [ADC_BITS-1:0] code_m;
    logic                   f_empty, f_full;
    act_t                   f_dout;
    logic [U_W:0]           pops;
    logic [8:0]             d_unit;

    // units past NH (padding of the last tile) see a zero code
    assign code_m = (p * TILE + int'(unit_d1) < NH_P) ? h_code[p] : '0;

    activation_unit u_act (
      .clk, .rst_n, .valid_in(scan_d1), .code(code_m), .scale(cfg_scale),
      .valid_out(act_v), .h_cand(cand));

    cand_fifo #(.DEPTH(TILE), .W(ACT_W)) u_fifo (
      .clk, .rst_n, .push(act_v), .din(cand), .pop(!f_empty), .dout(f_dout),
      .empty(f_empty), .full(f_full));

    miru_tile #(.TILE_P(TILE)) u_tile (
      .clk, .rst_n, .clear(ctl.tile_clear), .lambda(cfg_lambda), .beta(cfg_beta),
      .interp(!f_empty), .h_cand(f_dout), .rotate(1'b0), .latch_rh(ctl.latch_rh),
      .h_vec(h_all[p*TILE +: TILE]), .rh_vec(rh_all[p*TILE +: TILE]), .h_prev());

    tanh_deriv u_deriv (.h(f_dout), .d(d_unit));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) pops <= '0;
      else if (ctl.h_load) pops <= '0;
      else if (!f_empty) pops <= pops + 1'b1;
    end
    assign tile_full[p] = (pops == (U_W + 1)'(TILE));

    for (genvar u = 0; u < TILE; u++) begin : g_d
      if (p * TILE + u < NH_P) begin : g_real
        always_ff @(posedge clk or negedge rst_n) begin
          if (!rst_n) deriv[p*TILE+u] <= '0;
          else if (ctl.recompute && !f_empty && pops == (U_W + 1)'(u)) deriv[p*TILE+u] <= d_unit;
        end
      end
    end
  end

  assign scan_done = &tile_full;

  // ----------------------------------------------------------- readout layer
  sm_t [NH_P-1:0] o_din;
  always_comb for (int i = 0; i < NH_P; i++) o_din[i] = act_to_sm(h_all[i]);

  logic [NH_P-1:0] o_pos, o_neg;
  logic [$clog2(NB)-1:0] o_bit;
  wbs_streamer #(.ROWS(NH_P), .NB(NB)) u_os (
    .clk, .rst_n, .load(ctl.o_load), .din(o_din), .shift(ctl.o_integ),
    .drv_pos(o_pos), .drv_neg(o_neg), .bit_idx(o_bit));

  logic signed [NY_P-1:0][I_W-1:0] o_icol;
  memristive_crossbar #(.ROWS(NH_P), .COLS(NY_P), .INIT_SEED(2)) u_xo (
    .clk, .drv_pos(o_pos), .drv_neg(o_neg), .i_col(o_icol),
    .wr_en(dfa_wr_en && !dfa_wr_sel), .wr_col($clog2(NY_P)'(dfa_col)), .wr_pulse(dfa_pulse_o),
    .prog_en(1'b0), .prog_row('0), .prog_col('0), .prog_val('0));

  logic signed [NY_P-1:0][V_W-1:0] o_vint;
  logit_circuit #(.COLS(NY_P), .NB(NB)) u_lo (
    .clk, .clr(ctl.o_clr), .integ(ctl.o_integ), .bit_idx(o_bit), .i_col(o_icol), .v_int(o_vint));

  logic [NY_P-1:0][$clog2(NY_P)-1:0]    o_ch;
  logic signed [NY_P-1:0][ADC_BITS-1:0] o_code;
  logic [NY_P-1:0]                      o_sat;
  always_comb for (int j = 0; j < NY_P; j++) o_ch[j] = $clog2(NY_P)'(j);
  shared_adc #(.COLS(NY_P), .PORTS(NY_P), .ADC_SHIFT(O_ADC_SH)) u_ao (
    .clk, .ch(o_ch), .v_int(o_vint), .code(o_code), .sat(o_sat));

  logic [NY_P-1:0] o_win;
  kwta #(.N(NY_P), .K(1), .W(ADC_BITS), .USE_ABS(1'b0)) u_owta (
    .clk, .rst_n, .start(ctl.o_kw_start), .vals(o_code), .busy(), .done(okw_done), .mask(o_win));

  always_comb begin
    pred = '0;
    for (int j = NY_P - 1; j >= 0; j--) if (o_win[j]) pred = LBL_W'(j);
  end

  logic signed [NY_P-1:0][E_W-1:0] err;
  error_unit #(.NY_P(NY_P)) u_err (
    .clk, .rst_n, .en(ctl.err_en), .win(o_win), .label(label_eff), .err(err), .correct(correct));

  // ------------------------------------------------- error projection (Psi)
  sm_t [NY_P-1:0] p_din;
  always_comb for (int j = 0; j < NY_P; j++) p_din[j] = act_to_sm(ACT_W'($signed(err[j])));

  logic [NY_P-1:0] p_pos, p_neg;
  logic [$clog2(NB)-1:0] p_bit;
  wbs_streamer #(.ROWS(NY_P), .NB(NB)) u_ps (
    .clk, .rst_n, .load(ctl.p_load), .din(p_din), .shift(ctl.p_integ),
    .drv_pos(p_pos), .drv_neg(p_neg), .bit_idx(p_bit));

  logic signed [NH_P-1:0][I_W-1:0] p_icol;
  memristive_crossbar #(.ROWS(NY_P), .COLS(NH_P), .INIT_SEED(3)) u_xp (
    .clk, .drv_pos(p_pos), .drv_neg(p_neg), .i_col(p_icol),
    .wr_en(1'b0), .wr_col('0), .wr_pulse('0),
    .prog_en(1'b0), .prog_row('0), .prog_col('0), .prog_val('0));

  logic signed [NH_P-1:0][V_W-1:0] p_vint;
  logit_circuit #(.COLS(NH_P), .NB(NB)) u_lp (
    .clk, .clr(ctl.p_clr), .integ(ctl.p_integ), .bit_idx(p_bit), .i_col(p_icol), .v_int(p_vint));

  logic signed [NTILES-1:0][ADC_BITS-1:0] p_code;
  logic [NTILES-1:0]                      p_sat;
  shared_adc #(.COLS(NH_P), .PORTS(NTILES), .ADC_SHIFT(P_ADC_SH)) u_ap (
    .clk, .ch(h_ch), .v_int(p_vint), .code(p_code), .sat(p_sat));

  logic pscan_d1;
  // codes (and their clip flags) are valid the cycle after the request
  assign adc_clipped = (scan_d1 && |h_sat) || (ctl.o_kw_start && |o_sat) || (pscan_d1 && |p_sat);

  // delta-h buffer: projected error of every hidden unit
  logic signed [NH_P-1:0][ADC_BITS-1:0] e_proj;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pscan_d1 <= 1'b0;
      e_proj   <= '0;
    end else begin
      pscan_d1 <= ctl.p_scan;
      if (pscan_d1)
        for (int p = 0; p < NTILES; p++)
          if (p * TILE + int'(unit_d1) < NH_P) e_proj[p*TILE + int'(unit_d1)] <= p_code[p];
    end
  end

  // ------------------------------------------------------------ DFA training
  dfa_trainer #(.NX_P(NX_P), .NH_P(NH_P), .NY_P(NY_P), .K_GRAD(K_GRAD)) u_dfa (
    .clk, .rst_n, .start_out(ctl.dfa_out), .start_hid(ctl.dfa_hid),
    .err(err), .h_last(h_all[NH_P-1:0]), .e_proj(e_proj), .deriv(deriv),
    .x_in(x_t), .rh_in(rh_all[NH_P-1:0]), .lambda(cfg_lambda), .lr_shift(cfg_lr_shift),
    .wr_en(dfa_wr_en), .wr_sel(dfa_wr_sel), .wr_col(dfa_col),
    .wr_pulse_o(dfa_pulse_o), .wr_pulse_h(dfa_pulse_h),
    .busy(), .done(dfa_done), .skipped(cols_skipped));
endmodule
