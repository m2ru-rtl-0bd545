// replay_buffer: continual-learning replay memory of the M2RU accelerator.
//
// Holds K examples chosen by the reservoir sampler, each as NT rows (one per
// time step) of NX features quantized to QW bits, plus a class label per
// example. Rows are written one per cycle as the example streams in and read
// back one per cycle when it is replayed. Organisation and label storage are
// this design's choices; the buffer size K follows the permuted-MNIST setup.
//
// Timing: synchronous write; synchronous read with one cycle latency
// (rd_row / rd_lbl valid the cycle after rd_slot / rd_t are applied).
module replay_buffer #(
  parameter int unsigned K     = 1875,
  parameter int unsigned NT    = 28,
  parameter int unsigned NX    = 28,
  parameter int unsigned QW    = 4,
  parameter int unsigned LBL_W = 4,
  localparam int unsigned SLOT_W = $clog2(K),
  localparam int unsigned T_W    = $clog2(NT)
) (
  input  logic                    clk,
  input  logic                    wr_en,
  input  logic [SLOT_W-1:0]       wr_slot,
  input  logic [T_W-1:0]          wr_t,
  input  logic [NX-1:0][QW-1:0]   wr_row,
  input  logic                    wr_lbl_en,
  input  logic [LBL_W-1:0]        wr_lbl,
  input  logic [SLOT_W-1:0]       rd_slot,
  input  logic [T_W-1:0]          rd_t,
  output logic [NX-1:0][QW-1:0]   rd_row,
  output logic [LBL_W-1:0]        rd_lbl
);
  localparam int unsigned DEPTH = K * NT;

  logic [NX*QW-1:0] mem [DEPTH];
  logic [LBL_W-1:0] lbl [K];

  function automatic int unsigned addr(input logic [SLOT_W-1:0] s, input logic [T_W-1:0] t);
    return int'(s) * NT + int'(t);
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en)     mem[addr(wr_slot, wr_t)] <= wr_row;
    if (wr_lbl_en) lbl[wr_slot] <= wr_lbl;
    rd_row <= mem[addr(rd_slot, rd_t)];
    rd_lbl <= lbl[rd_slot];
  end
endmodule
