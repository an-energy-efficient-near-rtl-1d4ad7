// pe: datapath of one Processing Element.
//
// Holds the PE's buffers and arithmetic: the input buffer (IB) and output
// buffer (OB) of the I/O buffer, the weights buffer (WB), the LOG2-Quant unit,
// the weight decoder & shifter (D&S) and the ADD array of D adders. The PE
// controller (pe_controller) sequences it; this module only moves data.
//
//  * IB write side takes activation words returned by the vault controller.
//  * The IB head goes through LOG2-Quant; its result `head_q` tells the
//    controller the exponent, the sign and whether the input is pruned.
//  * WB write side takes weight bit-plane words returned by the vault.
//  * One compute step (`cmp_en`): D&S reads WB slot `cmp_slot`, rebuilds batch
//    `cmp_batch` (D of the M weights) and shifts it by `cmp_exp`; the ADD array
//    adds or subtracts (by `cmp_sign`) the D results to OB row `cmp_row`, which
//    is read and written back in the same cycle. One step per cycle.
//  * OB port B (`drain_row`, `drain_data`) lets the controller read the
//    partial outputs at the end of the layer; `ob_clr` empties the OB.
// The organisation follows the paper's PE figure; the SFU of the figure is
// instantiated only in the central tile, where the post-processing happens.
module pe
  import qeihan_pkg::*;
(
  input  logic                            clk,
  input  logic                            rst_n,
  // IB fill
  input  logic                            ib_wr_valid,
  output logic                            ib_wr_ready,
  input  logic [31:0]                     ib_wr_word,
  input  logic                            ib_wr_two,
  input  logic                            ib_wr_last,
  // IB head and its quantization
  output logic                            head_valid,
  output lq_t                             head_q,
  input  logic                            head_pop,
  output logic                            ib_half_done,
  // WB fill
  input  logic                            wb_we,
  input  logic [$clog2(WB_SLOTS)-1:0]     wb_slot,
  input  logic [$clog2(W_BITS)-1:0]       wb_plane,
  input  logic [M_BUS-1:0]                wb_data,
  // compute step
  input  logic                            cmp_en,
  input  logic [$clog2(WB_SLOTS)-1:0]     cmp_slot,
  input  exp_t                            cmp_exp,
  input  logic                            cmp_sign,
  input  logic [$clog2(BATCHES)-1:0]      cmp_batch,
  input  logic [$clog2(OB_ROWS)-1:0]      cmp_row,
  // OB control and drain
  input  logic                            ob_clr,
  input  logic [$clog2(OB_ROWS)-1:0]      drain_row,
  output logic signed [D_ADD-1:0][ACC_W-1:0] drain_data
);
  fp16_t                             head_x;
  logic [W_BITS-1:0][M_BUS-1:0]      planes;
  logic signed [D_ADD-1:0][ACC_W-1:0] prod, partial, sum;

  input_buffer u_ib (
    .clk, .rst_n,
    .wr_valid(ib_wr_valid), .wr_ready(ib_wr_ready), .wr_word(ib_wr_word),
    .wr_two(ib_wr_two), .wr_last(ib_wr_last),
    .rd_valid(head_valid), .rd_data(head_x), .rd_pop(head_pop),
    .rd_half_done(ib_half_done)
  );

  log2_quant u_lq (.x(head_x), .q(head_q));

  weight_buffer u_wb (
    .clk, .wr_en(wb_we), .wr_slot(wb_slot), .wr_plane(wb_plane), .wr_data(wb_data),
    .rd_slot(cmp_slot), .rd_planes(planes)
  );

  decoder_shifter u_ds (.planes(planes), .exp(cmp_exp), .batch(cmp_batch), .prod(prod));

  add_array u_add (.partial(partial), .prod(prod), .sub(cmp_sign), .sum(sum));

  output_buffer u_ob (
    .clk, .rst_n, .clr(ob_clr),
    .a_row(cmp_row), .a_rdata(partial), .a_we(cmp_en), .a_wdata(sum),
    .b_row(drain_row), .b_rdata(drain_data)
  );
endmodule
