// kwta: digital k-winner-take-all.
//
// Marks the K largest of N values. With USE_ABS=1 values are ranked by
// magnitude (gradient sparsification: only the K strongest deltas are
// written to the memristors); with USE_ABS=0 by signed value (readout
// winner, K=1). 'start' latches the vector; then one element per cycle is
// ranked against all others (N comparators): element i wins when fewer than
// K elements beat it, an element j beating i when its key is larger, or
// equal with j < i. So exactly min(K,N) winners result, ties going to the
// lower index. The ranking is serial, this design's digital stand-in for
// the analog k-WTA circuit of M2RU.
// Timing: 'busy' for N cycles after start; 'done' pulses with the final
// mask, N+1 cycles after start. mask holds until the next start.
module kwta #(
  parameter int unsigned N       = 100,
  parameter int unsigned K       = 43,
  parameter int unsigned W       = m2ru_pkg::ACT_W,
  parameter bit          USE_ABS = 1'b1,
  localparam int unsigned I_W    = $clog2(N + 1)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic signed [N-1:0][W-1:0] vals,
  output logic                      busy,
  output logic                      done,
  output logic [N-1:0]              mask
);
  logic [N-1:0][W:0] key;     // W+1 bits: magnitude of -2^(W-1) fits
  logic [I_W-1:0]    idx;
  logic [I_W-1:0]    beats;

  always_comb begin
    beats = '0;
    for (int j = 0; j < N; j++) begin
      if (key[j] > key[idx] || (key[j] == key[idx] && I_W'(j) < idx))
        beats = beats + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      key  <= '0;
      idx  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
      mask <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        for (int j = 0; j < N; j++) begin
          if (USE_ABS) key[j] <= vals[j][W-1] ? (W + 1)'(-$signed({vals[j][W-1], vals[j]})) : {1'b0, vals[j]};
          // signed order mapped to unsigned by flipping the sign bit
          else         key[j] <= {1'b0, ~vals[j][W-1], vals[j][W-2:0]};
        end
        idx  <= '0;
        busy <= 1'b1;
        mask <= '0;
      end else if (busy) begin
        mask[idx] <= (beats < I_W'(K));
        if (idx == I_W'(N - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          idx <= idx + 1'b1;
        end
      end
    end
  end
endmodule
