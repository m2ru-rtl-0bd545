// dfa_trainer: direct-feedback-alignment weight-update datapath.
//
// Output layer ('start_out'): for each output column j the write pulses are
//     dW_o[i][j] = -lr * h_i^{nT} * E_j,
// only the last hidden state being used, one column per cycle (NY cycles).
// Hidden layer ('start_hid', once per recomputed time step): the projected
// error e = E * Psi (held in the delta-h buffer, e_proj) is turned into
//     delta_j = lambda * e_j * g'_j
// (g' = 1 - h_cand^2 from the recomputed step), the NH deltas are
// sparsified by a k-WTA that keeps the K_GRAD largest magnitudes, and for
// each kept column j the pulses
//     dW_h[i][j] = -lr * x_i^t * delta_j           (rows 0 .. NX-1)
//     dU_h[i][j] = -lr * (beta h^{t-1})_i * delta_j (rows NX .. NX+NH-1)
// are written to the hidden crossbar, one column per cycle; columns the
// k-WTA dropped are skipped and counted in 'skipped'.
// Learning rate: a pulse count is sign(-a*b) * (|a*b| >> lr_shift),
// saturated to +/-(2^(P_W-1)-1). Updates are written per time step rather
// than accumulated over the sequence (no gradient storage); scaling and
// pulse encoding are this design's choice, the update rules follow the
// MiRU DFA algorithm.
// Timing: start_out -> NY write cycles -> done. start_hid -> NH+1 cycles of
// ranking -> NH column cycles -> done. Inputs must stay stable meanwhile.
module dfa_trainer
  import m2ru_pkg::*;
#(
  parameter int unsigned NX_P   = m2ru_pkg::NX,
  parameter int unsigned NH_P   = m2ru_pkg::NH,
  parameter int unsigned NY_P   = m2ru_pkg::NY,
  parameter int unsigned K_GRAD = 43,
  localparam int unsigned ROWS_H = NX_P + NH_P,
  localparam int unsigned COL_W  = $clog2(NH_P > NY_P ? NH_P : NY_P)
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   start_out,
  input  logic                                   start_hid,
  input  logic signed [NY_P-1:0][E_W-1:0]        err,
  input  act_t [NH_P-1:0]                        h_last,
  input  logic signed [NH_P-1:0][ADC_BITS-1:0]   e_proj,
  input  logic [NH_P-1:0][8:0]                   deriv,
  input  logic [NX_P-1:0][PIX_W-1:0]             x_in,
  input  act_t [NH_P-1:0]                        rh_in,
  input  logic [7:0]                             lambda,
  input  logic [4:0]                             lr_shift,
  output logic                                   wr_en,
  output logic                                   wr_sel,     // 0 output crossbar, 1 hidden crossbar
  output logic [COL_W-1:0]                       wr_col,
  output logic signed [NH_P-1:0][P_W-1:0]        wr_pulse_o,
  output logic signed [ROWS_H-1:0][P_W-1:0]      wr_pulse_h,
  output logic                                   busy,
  output logic                                   done,
  output logic [15:0]                            skipped
);
  localparam int PMAX = (1 << (P_W - 1)) - 1;
  localparam int DW   = 10;   // delta width

  typedef enum logic [1:0] {S_IDLE, S_OUT, S_RANK, S_HID} state_e;
  state_e state;

  logic [COL_W-1:0] col;
  logic signed [NH_P-1:0][DW-1:0] delta;
  logic kw_start, kw_busy, kw_done;
  logic [NH_P-1:0] kw_mask;

  function automatic logic signed [P_W-1:0] pulse(input int a, input int b, input logic [4:0] sh);
    int p, m;
    p = a * b;
    m = ((p < 0) ? -p : p) >>> sh;
    if (m > PMAX) m = PMAX;
    return (p > 0) ? P_W'(-m) : P_W'(m);
  endfunction

  // delta_j = lambda * e_j * g'_j, scaled back by 2^16
  always_comb begin
    for (int j = 0; j < NH_P; j++) begin
      int d;
      d = (int'(lambda) * int'($signed(e_proj[j])) * int'(deriv[j])) >>> 16;
      delta[j] = DW'(d);
    end
  end

  kwta #(.N(NH_P), .K(K_GRAD), .W(DW), .USE_ABS(1'b1)) u_sparse (
    .clk, .rst_n, .start(kw_start), .vals(delta), .busy(kw_busy), .done(kw_done), .mask(kw_mask));

  assign kw_start = (state == S_IDLE) && start_hid;

  // pulses of the current column
  always_comb begin
    for (int i = 0; i < NH_P; i++)
      wr_pulse_o[i] = pulse(int'(h_last[i]), int'($signed(err[(int'(col) < NY_P) ? int'(col) : 0])), lr_shift);
    for (int i = 0; i < NX_P; i++)
      wr_pulse_h[i] = pulse(int'(x_in[i]), int'($signed(delta[col])), lr_shift);
    for (int i = 0; i < NH_P; i++)
      wr_pulse_h[NX_P + i] = pulse(int'(rh_in[i]), int'($signed(delta[col])), lr_shift);
  end

  assign wr_col = col;
  assign wr_sel = (state == S_HID);
  assign wr_en  = (state == S_OUT) || (state == S_HID && kw_mask[col]);
  assign busy   = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      col     <= '0;
      done    <= 1'b0;
      skipped <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: begin
          col <= '0;
          if (start_out)      state <= S_OUT;
          else if (start_hid) state <= S_RANK;
        end
        S_OUT: begin
          if (col == COL_W'(NY_P - 1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else col <= col + 1'b1;
        end
        S_RANK: if (kw_done) state <= S_HID;
        S_HID: begin
          if (!kw_mask[col]) skipped <= skipped + 1'b1;
          if (col == COL_W'(NH_P - 1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else col <= col + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
