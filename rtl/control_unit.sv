// control_unit: central control unit of the M2RU accelerator.
//
// Sequences one command at a time:
//   CMD_INFER   load a new example (NT input beats), run NT forward steps,
//               read out the class.
//   CMD_TRAIN   as INFER, then compute the error, write the output-layer
//               update, project the error through the fixed random
//               feedback matrix, and recompute the NT steps while writing
//               the hidden-layer update of each step (DFA).
//   CMD_REPLAY  as TRAIN, but the example comes from the replay buffer.
// A new example is also offered to the reservoir sampler, which may copy it
// (quantized) into the replay buffer while it streams in.
// One forward step of the hidden layer is:
//   RD    read x^t from the auxiliary memory (1 cycle)
//   LD    load x^t and beta*h^{t-1} into the wordline buffers, clear
//         integrators (1 cycle)
//   ST    stream NB bits, one per cycle, integrating each (NB cycles)
//   SCAN  convert unit u of every tile, u = 0..TILE-1 (TILE cycles), then
//   SWAIT wait until every tile has interpolated its TILE units
//   HUPD  (recompute only) write the hidden-layer update of step t
//   RH    latch beta*h^t for the next step (1 cycle)
// so an inference step takes NB + TILE + 4 cycles plus the time SWAIT
// waits after the last scan; with the ADC, activation and FIFO pipeline of
// the top that is 3 cycles, giving NB + TILE + 7 = 31 clocks per step at
// the default sizes (measured by the top-level test). The state sequence is
// this design's own; the unit it controls follows the M2RU datapath.
// Interface: 'st' carries command and datapath status, 'ctl' the control
// word (see m2ru_pkg::ctl_t); 'mode' and 'busy' are exposed for the top.
module control_unit
  import m2ru_pkg::*;
#(
  parameter int unsigned NT_P   = m2ru_pkg::NT,
  parameter int unsigned NB_P   = m2ru_pkg::NB,
  parameter int unsigned TILE_P = m2ru_pkg::TILE
) (
  input  logic  clk,
  input  logic  rst_n,
  input  stat_t st,
  output ctl_t  ctl,
  output cmd_e  mode,
  output logic  busy
);
  typedef enum logic [4:0] {
    S_IDLE, S_DECIDE, S_LOAD, S_RLOAD, S_RLAST, S_CLR, S_RH0,
    S_RD, S_LD, S_ST, S_SCAN, S_SWAIT, S_HUPD, S_HWAIT, S_RH,
    S_OLD, S_OST, S_OADC, S_OKW, S_OKWAIT, S_ERR, S_WO, S_WOWAIT,
    S_PLD, S_PST, S_PSCAN, S_PWAIT, S_DONE
  } state_e;

  state_e         state;
  logic [T_W-1:0] t;
  logic [U_W:0]   cnt;       // bit / unit counter
  logic           recomp;    // second (training) pass over the sequence

  assign busy = (state != S_IDLE);

  always_comb begin
    ctl            = '0;
    ctl.t          = t;
    ctl.unit       = U_W'(cnt);
    ctl.recompute  = recomp;
    case (state)
      S_IDLE:   ctl.present    = st.cmd_valid && (st.cmd != CMD_REPLAY);
      S_DECIDE: ctl.rb_lbl_wr  = 1'b1;
      S_LOAD: begin
        ctl.in_ready = 1'b1;
        ctl.beat     = st.in_valid;
      end
      S_RLOAD:  ctl.rb_rd      = 1'b1;
      S_CLR:    ctl.tile_clear = 1'b1;
      S_RH0:    ctl.latch_rh   = 1'b1;
      S_LD: begin
        ctl.h_load = 1'b1;
        ctl.h_clr  = 1'b1;
      end
      S_ST:     ctl.h_integ    = 1'b1;
      S_SCAN:   ctl.scan       = 1'b1;
      S_HUPD:   ctl.dfa_hid    = 1'b1;
      S_RH:     ctl.latch_rh   = 1'b1;
      S_OLD: begin
        ctl.o_load = 1'b1;
        ctl.o_clr  = 1'b1;
      end
      S_OST:    ctl.o_integ    = 1'b1;
      S_OADC:   ctl.o_adc      = 1'b1;
      S_OKW:    ctl.o_kw_start = 1'b1;
      S_ERR:    ctl.err_en     = 1'b1;
      S_WO:     ctl.dfa_out    = 1'b1;
      S_PLD: begin
        ctl.p_load = 1'b1;
        ctl.p_clr  = 1'b1;
      end
      S_PST:    ctl.p_integ    = 1'b1;
      S_PSCAN:  ctl.p_scan     = 1'b1;
      S_DONE:   ctl.done       = 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      mode   <= CMD_INFER;
      t      <= '0;
      cnt    <= '0;
      recomp <= 1'b0;
    end else begin
      case (state)
        S_IDLE: if (st.cmd_valid) begin
          mode   <= st.cmd;
          t      <= '0;
          cnt    <= '0;
          recomp <= 1'b0;
          state  <= (st.cmd == CMD_REPLAY) ? S_RLOAD : S_DECIDE;
        end
        S_DECIDE: state <= S_LOAD;
        S_LOAD: if (st.in_valid) begin
          if (t == T_W'(NT_P - 1)) begin
            t     <= '0;
            state <= S_CLR;
          end else t <= t + 1'b1;
        end
        S_RLOAD: begin
          if (t == T_W'(NT_P - 1)) begin
            t     <= '0;
            state <= S_RLAST;
          end else t <= t + 1'b1;
        end
        S_RLAST: state <= S_CLR;
        S_CLR:   state <= S_RH0;
        S_RH0:   state <= S_RD;
        S_RD:    state <= S_LD;
        S_LD: begin
          cnt   <= '0;
          state <= S_ST;
        end
        S_ST: begin
          if (cnt == (U_W + 1)'(NB_P - 1)) begin
            cnt   <= '0;
            state <= S_SCAN;
          end else cnt <= cnt + 1'b1;
        end
        S_SCAN: begin
          if (cnt == (U_W + 1)'(TILE_P - 1)) begin
            cnt   <= '0;
            state <= S_SWAIT;
          end else cnt <= cnt + 1'b1;
        end
        S_SWAIT: if (st.scan_done) state <= recomp ? S_HUPD : S_RH;
        S_HUPD:  state <= S_HWAIT;
        S_HWAIT: if (st.dfa_done) state <= S_RH;
        S_RH: begin
          if (t == T_W'(NT_P - 1)) begin
            t     <= '0;
            state <= recomp ? S_DONE : S_OLD;
          end else begin
            t     <= t + 1'b1;
            state <= S_RD;
          end
        end
        S_OLD: begin
          cnt   <= '0;
          state <= S_OST;
        end
        S_OST: begin
          if (cnt == (U_W + 1)'(NB_P - 1)) begin
            cnt   <= '0;
            state <= S_OADC;
          end else cnt <= cnt + 1'b1;
        end
        S_OADC:   state <= S_OKW;
        S_OKW:    state <= S_OKWAIT;
        S_OKWAIT: if (st.okw_done) state <= (mode == CMD_INFER) ? S_DONE : S_ERR;
        S_ERR:    state <= S_WO;
        S_WO:     state <= S_WOWAIT;
        S_WOWAIT: if (st.dfa_done) state <= S_PLD;
        S_PLD: begin
          cnt   <= '0;
          state <= S_PST;
        end
        S_PST: begin
          if (cnt == (U_W + 1)'(NB_P - 1)) begin
            cnt   <= '0;
            state <= S_PSCAN;
          end else cnt <= cnt + 1'b1;
        end
        S_PSCAN: begin
          if (cnt == (U_W + 1)'(TILE_P - 1)) begin
            cnt   <= '0;
            state <= S_PWAIT;
          end else cnt <= cnt + 1'b1;
        end
        S_PWAIT: begin
          recomp <= 1'b1;
          t      <= '0;
          state  <= S_CLR;
        end
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
