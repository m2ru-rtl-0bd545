// aux_memory: auxiliary input memory of the hidden-layer training path.
//
// Stores the NT input vectors of the sequence being processed so that the
// hidden layer can be recomputed, step by step, while the DFA update is
// applied (hidden states are recomputed rather than stored). One NX-feature
// row per time step; synchronous write, synchronous read with one cycle of
// latency.
module aux_memory #(
  parameter int unsigned NT    = 28,
  parameter int unsigned NX    = 28,
  parameter int unsigned PIX_W = 8,
  localparam int unsigned T_W  = $clog2(NT)
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [T_W-1:0]           wr_t,
  input  logic [NX-1:0][PIX_W-1:0] wr_x,
  input  logic [T_W-1:0]           rd_t,
  output logic [NX-1:0][PIX_W-1:0] rd_x
);
  logic [NX*PIX_W-1:0] mem [NT];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_t] <= wr_x;
    rd_x <= mem[rd_t];
  end
endmodule
