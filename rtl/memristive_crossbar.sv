// memristive_crossbar: behavioural model of a memristor crossbar (analog part).
//
// Each cell pairs a tunable memristor with a fixed reference memristor set
// to mid-window; the difference of their conductances is a bipolar weight,
// modelled as a signed G_W-bit code w[r][c]. A wordline carries +Ve, 0 or
// -Ve (drv_pos / drv_neg); by Kirchhoff's current law bitline c carries
// i_col[c] = sum_r (drv_pos[r] - drv_neg[r]) * w[r][c], in units of one
// conductance step times the input amplitude. This is combinational, like
// the analog array.
//
// Weight updates: wr_en applies a signed pulse count wr_pulse[r] to every
// cell of column wr_col (one column per cycle), each pulse moving the code
// by one step, saturating at +/-(2^(G_W-1)-1). prog_en writes one cell
// directly. The write-driver scheme itself is not modelled. Initial codes
// are pseudo-random in +/-15, from INIT_SEED (this design's choice), which
// stands for the conductance spread of freshly formed devices.
// Behavioural model: stands for an analog array, not for synthesis. At
// the full 128 x 100 size some synthesis front ends stop at the unroll
// limit of the column-sum loop; simulators and linters accept it.
module memristive_crossbar #(
  parameter int unsigned ROWS      = 128,
  parameter int unsigned COLS      = 100,
  parameter int unsigned G_W       = m2ru_pkg::G_W,
  parameter int unsigned P_W       = m2ru_pkg::P_W,
  parameter int unsigned I_W       = m2ru_pkg::I_W,
  parameter int unsigned INIT_SEED = 1,
  localparam int unsigned R_W = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned C_W = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic                                clk,
  input  logic [ROWS-1:0]                     drv_pos,
  input  logic [ROWS-1:0]                     drv_neg,
  output logic signed [COLS-1:0][I_W-1:0]     i_col,
  input  logic                                wr_en,
  input  logic [C_W-1:0]                      wr_col,
  input  logic signed [ROWS-1:0][P_W-1:0]     wr_pulse,
  input  logic                                prog_en,
  input  logic [R_W-1:0]                      prog_row,
  input  logic [C_W-1:0]                      prog_col,
  input  logic signed [G_W-1:0]               prog_val
);
  localparam int GMAX = (1 << (G_W - 1)) - 1;

  logic signed [G_W-1:0] w [ROWS][COLS];

  function automatic logic signed [G_W-1:0] sat_add(input logic signed [G_W-1:0] a,
                                                    input logic signed [P_W-1:0] p);
    int s;
    s = int'(a) + int'(p);
    if (s > GMAX)  s = GMAX;
    if (s < -GMAX) s = -GMAX;
    return G_W'(s);
  endfunction

  // initial device state
  initial begin
    int unsigned h;
    h = INIT_SEED * 32'h9E37_79B9 + 32'h1234_5678;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        h = h ^ (h << 13);
        h = h ^ (h >> 17);
        h = h ^ (h << 5);
        w[r][c] = G_W'(int'(h % 31) - 15);
      end
  end

  always @(posedge clk) begin
    if (wr_en)
      for (int r = 0; r < ROWS; r++) w[r][wr_col] <= sat_add(w[r][wr_col], wr_pulse[r]);
    if (prog_en) w[prog_row][prog_col] <= prog_val;
  end

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      i_col[c] = '0;
      for (int r = 0; r < ROWS; r++)
        if (drv_pos[r])      i_col[c] = i_col[c] + I_W'(w[r][c]);
        else if (drv_neg[r]) i_col[c] = i_col[c] - I_W'(w[r][c]);
    end
  end
endmodule
