// error_unit: error computing unit of the readout layer.
//
// Compares the readout k-WTA result with the ground-truth label and forms
// the prediction error E_j = yhat_j - y_j, yhat being 1.0 for a winning
// output and 0 otherwise, y the one-hot label. 1.0 is encoded as 255 (Q0.8),
// so E_j is in {-255, 0, +255}. 'correct' is high when the label is among
// the winners. The winner-as-one-hot reading of the soft-max approximation
// is this design's choice.
// Timing: registered, err/correct valid the cycle after en.
module error_unit
  import m2ru_pkg::*;
#(
  parameter int unsigned NY_P = m2ru_pkg::NY
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           en,
  input  logic [NY_P-1:0]                win,
  input  logic [LBL_W-1:0]               label,
  output logic signed [NY_P-1:0][E_W-1:0] err,
  output logic                           correct
);
  localparam int unsigned IX_W = (NY_P > 1) ? $clog2(NY_P) : 1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      err     <= '0;
      correct <= 1'b0;
    end else if (en) begin
      for (int j = 0; j < NY_P; j++)
        err[j] <= E_W'(win[j] ? 255 : 0) - E_W'((LBL_W'(j) == label) ? 255 : 0);
      correct <= (int'(label) < NY_P) ? win[IX_W'(label)] : 1'b0;
    end
  end
endmodule
