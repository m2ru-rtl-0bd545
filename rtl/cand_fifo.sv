// cand_fifo: FIFO of candidate hidden states between the activation unit
// and a tile's interpolation circuit.
//
// Circular buffer of DEPTH words with first-word fall-through: dout shows
// the oldest word whenever empty is low; pop removes it. A push into a full
// FIFO or a pop from an empty one is ignored (and flagged by assertions).
// Push and pop may happen in the same cycle.
module cand_fifo #(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned W     = m2ru_pkg::ACT_W,
  localparam int unsigned A_W  = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         empty,
  output logic         full
);
  logic [W-1:0] mem [DEPTH];
  logic [A_W-1:0] wp, rp;
  logic [A_W:0]   cnt;
  logic do_push, do_pop;

  assign empty   = (cnt == 0);
  assign full    = (cnt == (A_W + 1)'(DEPTH));
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign dout    = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (do_push) wp <= (wp == A_W'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == A_W'(DEPTH - 1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (A_W + 1)'(do_push) - (A_W + 1)'(do_pop);
    end
  end

  always_ff @(posedge clk) if (do_push) mem[wp] <= din;

  a_no_overflow:  assert property (@(posedge clk) !(push && full));
  a_no_underflow: assert property (@(posedge clk) !(pop && empty));
endmodule
