// weight_buffer: the PE's Weights Buffer (WB).
//
// Holds the bit planes of M_BUS weights: plane b of a slot is one 32-bit word
// fetched from DRAM that carries bit b of 32 different kernels' weights for
// the same input. WB_SLOTS = 2 slots make it double-buffered: the PE
// controller fills one slot from DRAM while the decoder reads the other.
// 2 slots x 8 planes x 32 bits = 64 bytes, the paper's WB size.
//
// Write port: `wr_en`, `wr_slot`, `wr_plane`, `wr_data` (one plane per cycle,
// written at the clock edge). Read port: `rd_slot` selects a slot, `rd_planes`
// shows all its planes combinationally. Only the planes the exponent needs are
// ever written; the decoder ignores the others, so the array needs no reset.
// Slot count and plane granularity follow from the paper's sizes; the port
// structure is this design's own.
module weight_buffer
  import qeihan_pkg::*;
#(
  parameter int unsigned SLOTS = WB_SLOTS,
  parameter int unsigned M     = M_BUS,
  parameter int unsigned WB    = W_BITS
) (
  input  logic                          clk,
  input  logic                          wr_en,
  input  logic [$clog2(SLOTS)-1:0]      wr_slot,
  input  logic [$clog2(WB)-1:0]         wr_plane,
  input  logic [M-1:0]                  wr_data,
  input  logic [$clog2(SLOTS)-1:0]      rd_slot,
  output logic [WB-1:0][M-1:0]          rd_planes
);
  logic [WB-1:0][M-1:0] mem [SLOTS];

  always_ff @(posedge clk)
    if (wr_en) mem[wr_slot][wr_plane] <= wr_data;

  assign rd_planes = mem[rd_slot];
endmodule
