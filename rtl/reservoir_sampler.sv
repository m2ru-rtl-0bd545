// reservoir_sampler: picks which presented examples enter the replay buffer.
//
// Reservoir sampling over a stream of unknown length, built as the M2RU data
// preparation unit describes it: a counter (CNT) of presented examples, a
// 32-bit xorshift generator (XR), a modulus unit computing XR % CNT and an
// index checker. The first K examples fill slots 0..K-1 in order. For the
// i-th example after that (i > K) the remainder j = XR % i lies in 0..i-1;
// if j < K the example replaces slot j, otherwise it is dropped. Every
// example seen so far thus stays in the buffer with equal probability K/i.
// The modulus is a single-cycle '%' operator (this design's choice).
//
// Timing: assert 'present' for one cycle per example; 'decision_valid'
// pulses the next cycle with 'store' and 'slot'. The generator advances on
// every presented example.
module reservoir_sampler #(
  parameter int unsigned K     = 1875,
  parameter int unsigned CNT_W = 32,
  parameter logic [31:0] SEED  = 32'h2545_F491,
  localparam int unsigned SLOT_W = $clog2(K)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              present,
  output logic              decision_valid,
  output logic              store,
  output logic [SLOT_W-1:0] slot,
  output logic [CNT_W-1:0]  count,
  output logic [SLOT_W:0]   filled
);
  logic [31:0]      xr;
  logic [CNT_W-1:0] cnt_next;
  logic [CNT_W-1:0] rem;

  xorshift32 #(.SEED(SEED)) u_xs (.clk, .rst_n, .step(present), .rnd(xr));

  assign cnt_next = count + 1'b1;
  // XR % CNT with CNT the 1-based index of the example being presented
  assign rem = CNT_W'(xr % cnt_next);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count          <= '0;
      filled         <= '0;
      decision_valid <= 1'b0;
      store          <= 1'b0;
      slot           <= '0;
    end else begin
      decision_valid <= present;
      if (present) begin
        count <= cnt_next;
        if (count < CNT_W'(K)) begin          // fill phase
          store  <= 1'b1;
          slot   <= SLOT_W'(count);
          filled <= filled + 1'b1;
        end else if (rem < CNT_W'(K)) begin   // index check: replace slot j
          store <= 1'b1;
          slot  <= SLOT_W'(rem);
        end else begin
          store <= 1'b0;
        end
      end
    end
  end
endmodule
