// m2ru_pkg: sizes, number formats and shared types of the M2RU accelerator.
//
// Network size follows the main configuration of the design (28 inputs per
// time step, 100 MiRU units, 10 outputs, 28 time steps per sequence, 8-bit
// inputs streamed bit-serially, 16 MiRU units per tile). Number formats are
// this design's own choice:
//   act_t   signed two's complement, 8 fraction bits (1.0 = 256); hidden
//           states and candidate states live in [-255/256, 255/256].
//   sm_t    sign-magnitude word as held in the wordline buffers: a sign bit
//           and NB magnitude bits, the magnitude being value*256.
//   weights signed G_W-bit conductance-difference codes, 1.0 = 64.
package m2ru_pkg;

  localparam int NX    = 28;    // input features per time step
  localparam int NH    = 100;   // MiRU units
  localparam int NY    = 10;    // output classes
  localparam int NT    = 28;    // time steps per sequence
  localparam int NB    = 8;     // streamed magnitude bits
  localparam int TILE  = 16;    // MiRU units per tile
  localparam int PIX_W = 8;     // raw feature width
  localparam int QW    = 4;     // replay-buffer feature width
  localparam int ACT_W = 10;    // activation width (Q2.8)
  localparam int G_W   = 8;     // weight code width
  localparam int P_W   = 4;     // write pulse count width (signed)
  localparam int ADC_BITS = 8;  // ADC code width (signed)
  localparam int V_W   = 40;    // integrator value width
  localparam int I_W   = 32;    // bitline current width
  localparam int LBL_W = 4;     // class label width
  localparam int E_W   = 9;     // error width, Q0.8 (+/-255)

  localparam int T_W   = $clog2(NT);    // time-step index width
  localparam int U_W   = $clog2(TILE);  // unit-within-tile index width

  typedef logic signed [ACT_W-1:0] act_t;

  typedef struct packed {
    logic          sign;
    logic [NB-1:0] mag;
  } sm_t;

  typedef enum logic [1:0] {
    CMD_INFER  = 2'd0,  // new example, forward pass only
    CMD_TRAIN  = 2'd1,  // new example, forward pass then DFA update
    CMD_REPLAY = 2'd2   // replay a stored example, forward pass then DFA update
  } cmd_e;

  // Control word from the central control unit to the datapath, one field
  // per datapath action; all fields are single-cycle strobes unless noted.
  typedef struct packed {
    logic           in_ready;     // accept an input beat (level)
    logic           present;      // new example presented to the sampler
    logic           rb_lbl_wr;    // write label of the sampled example
    logic           beat;         // input beat taken: aux and replay writes
    logic           rb_rd;        // read replay row t (data next cycle)
    logic [T_W-1:0] t;            // current time step (level)
    logic           tile_clear;   // zero all hidden states
    logic           latch_rh;     // Rh := beta * h
    logic           h_load;       // load hidden wordline buffers
    logic           h_clr;        // clear hidden integrators
    logic           h_integ;      // integrate one bit and shift
    logic           scan;         // convert unit 'unit' of every tile
    logic [U_W-1:0] unit;         // unit within tile (level)
    logic           recompute;    // capture derivatives (level)
    logic           o_load;       // load readout wordline buffers
    logic           o_clr;        // clear readout integrators
    logic           o_integ;      // integrate one readout bit
    logic           o_adc;        // convert all readout channels
    logic           o_kw_start;   // start readout winner-take-all
    logic           err_en;       // compute the error
    logic           p_load;       // load projection wordline buffers
    logic           p_clr;        // clear projection integrators
    logic           p_integ;      // integrate one projection bit
    logic           p_scan;       // convert projection unit 'unit'
    logic           dfa_out;      // start output-layer update
    logic           dfa_hid;      // start hidden-layer update of step t
    logic           done;         // command finished
  } ctl_t;

  typedef struct packed {
    logic cmd_valid;
    cmd_e cmd;
    logic in_valid;
    logic scan_done;              // every tile interpolated TILE units
    logic okw_done;               // readout winner known
    logic dfa_done;               // update finished
  } stat_t;

  // Two's complement activation to sign-magnitude, magnitude saturated.
  function automatic sm_t act_to_sm(input act_t a);
    sm_t s;
    logic [ACT_W-1:0] m;
    s.sign = a[ACT_W-1];
    m = a[ACT_W-1] ? ACT_W'(-a) : ACT_W'(a);
    s.mag = (m > ACT_W'((1 << NB) - 1)) ? NB'((1 << NB) - 1) : m[NB-1:0];
    return s;
  endfunction

  // Unsigned feature to a non-negative sign-magnitude word.
  function automatic sm_t pix_to_sm(input logic [PIX_W-1:0] p);
    sm_t s;
    s.sign = 1'b0;
    s.mag  = p;
    return s;
  endfunction

endpackage
