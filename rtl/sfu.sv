// sfu: Special Function Unit of the central PE.
//
// Post-processes the final 16-bit integer outputs of a layer, one per cycle:
//   1. de-quantization: the integer is converted to FP16 and scaled by
//      2^scale_exp (the product of the weight and activation scales is taken
//      as a power of two, so the scaling is an exponent add);
//   2. activation: none, ReLU, or a 64-entry look-up table of FP16 values
//      indexed by floor(4*y) clipped to [-32, 31] (y in [-8, 8) in steps of
//      0.25); the table is written through `lut_we/lut_addr/lut_data`, so any
//      non-linear function (sigmoid, tanh, ...) can be loaded;
//   3. max pooling over 2^pool_log2 consecutive outputs (1 = no pooling).
// Interface: valid/ready input (`in_data`, `in_idx`), valid/ready output
// (`out_data`, `out_idx` = in_idx >> pool_log2) held in one output register.
// Latency: one cycle from the last input of a pooling window to `out_valid`.
// Follows the paper: de-quantize to FP16 before the functions, LUT-based
// non-linear functions, pooling. Own choices: power-of-two scale, truncating
// int-to-FP16 conversion (exact for |x| < 2048), flush of results below the
// FP16 normal range to zero, saturation to the largest finite FP16, LUT size
// and indexing. Normalization is not built.
module sfu
  import qeihan_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic signed [5:0] scale_exp,
  input  logic [1:0]        act_mode,
  input  logic [1:0]        pool_log2,
  input  logic              lut_we,
  input  logic [5:0]        lut_addr,
  input  fp16_t             lut_data,
  input  logic              in_valid,
  output logic              in_ready,
  input  acc_t              in_data,
  input  logic [9:0]        in_idx,
  output logic              out_valid,
  input  logic              out_ready,
  output fp16_t             out_data,
  output logic [9:0]        out_idx
);
  fp16_t lut [64];
  always_ff @(posedge clk)
    if (lut_we) lut[lut_addr] <= lut_data;

  // ---- 1. integer to FP16 with 2^scale_exp ----
  fp16_t             deq;
  logic [15:0]       mag;
  logic [3:0]        lead;
  logic signed [7:0] bexp;
  logic [15:0]       norm;
  always_comb begin
    mag  = in_data[15] ? 16'(-in_data) : 16'(in_data);
    lead = '0;
    for (int b = 0; b < 16; b++) if (mag[b]) lead = 4'(b);
    norm = mag << (4'd15 - lead);
    bexp = 8'(lead) + 8'(scale_exp) + 8'sd15;
    if (mag == '0 || bexp <= 0) deq = '0;
    else if (bexp >= 31)        deq = {in_data[15], 15'h7BFF};
    else                        deq = {in_data[15], bexp[4:0], norm[14:5]};
  end

  // ---- 2. activation function ----
  logic signed [6:0] fl;      // floor(4*y), clipped to [-32, 31]
  logic [10:0]       sig;
  logic signed [5:0] sh;      // exponent of 4*y
  logic [10:0]       ip, fr;
  fp16_t             act;
  always_comb begin
    sig = {1'b1, deq[9:0]};
    sh  = 6'($signed({1'b0, deq[14:10]}) - 6'sd13);
    ip  = '0; fr = '0;
    if (deq[14:10] == 5'd0) begin
      fl = 7'sd0;
    end else if (sh < 0) begin
      fl = deq[15] ? -7'sd1 : 7'sd0;
    end else if (sh >= 6'sd5) begin
      fl = deq[15] ? -7'sd32 : 7'sd31;
    end else begin
      ip = sig >> (4'd10 - 4'(sh));
      fr = sig & ((11'd1 << (4'd10 - 4'(sh))) - 11'd1);
      if (deq[15]) fl = -7'(ip) - ((fr != 0) ? 7'sd1 : 7'sd0);
      else         fl = 7'(ip);
      if (fl < -7'sd32) fl = -7'sd32;
      if (fl > 7'sd31)  fl = 7'sd31;
    end
    case (act_mode)
      2'd1:    act = deq[15] ? '0 : deq;
      2'd2:    act = lut[6'(fl + 7'sd32)];
      default: act = deq;
    endcase
  end

  // ---- 3. max pooling ----
  function automatic logic [15:0] fkey(input fp16_t v);
    return v[15] ? ~v : {1'b1, v[14:0]};
  endfunction

  fp16_t      pmax;
  logic [2:0] pcnt;
  fp16_t      cand;
  logic       last;
  assign cand     = (pcnt == '0 || fkey(act) > fkey(pmax)) ? act : pmax;
  assign last     = (pcnt + 3'd1) >= (3'd1 << pool_log2);
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0; pcnt <= '0; pmax <= '0; out_data <= '0; out_idx <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (last) begin
          out_valid <= 1'b1;
          out_data  <= cand;
          out_idx   <= in_idx >> pool_log2;
          pcnt      <= '0;
        end else begin
          pmax <= cand;
          pcnt <= pcnt + 3'd1;
        end
      end
    end
  end
endmodule
