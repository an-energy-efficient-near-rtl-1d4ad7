// decoder_shifter: Weight Decoder & Shifter (D&S) unit.
//
// Turns the stored bit planes of the weights into the products w * 2^x~.
// Lane j of batch `batch` takes weight number batch*D + j of the 32 weights in
// the plane words: its bit b is `planes[b][batch*D + j]`. For a non-negative
// exponent all 8 planes were fetched and the INT8 weight is sign-extended to
// 16 bits and shifted left by x~ (at most 127*2^7, so 16 bits suffice). For a
// negative exponent only the 8-|x~| most significant planes were fetched; the
// unit uses only those (the lower planes are masked, whatever the buffer holds)
// and shifts right arithmetically, which is exactly floor(w * 2^x~).
//
// Combinational. Interface: `planes` from the WB, `exp` from the quantizer,
// `batch` selects which D of the M weights go to the ADD array; `prod` is D
// signed 16-bit values. Follows the paper: MSB-only use for negative
// exponents, 16-bit outputs, batches of d. Own choice: two's complement INT8
// weights, rounding toward minus infinity for right shifts.
module decoder_shifter
  import qeihan_pkg::*;
#(
  parameter int unsigned D  = D_ADD,
  parameter int unsigned M  = M_BUS,
  parameter int unsigned WB = W_BITS
) (
  input  logic [WB-1:0][M-1:0]            planes,
  input  exp_t                            exp,
  input  logic [$clog2(M/D)-1:0]          batch,
  output logic signed [D-1:0][ACC_W-1:0]  prod
);
  always_comb begin
    for (int j = 0; j < D; j++) begin
      logic [WB-1:0]           w;
      logic signed [ACC_W-1:0] w16;
      logic [3:0]              k;
      for (int b = 0; b < WB; b++) w[b] = planes[b][int'(batch) * D + j];
      k = exp[EXP_BITS-1] ? 4'(-exp) : 4'd0;                    // right-shift amount
      for (int b = 0; b < WB; b++) if (b < int'(k)) w[b] = 1'b0; // planes never fetched
      w16 = ACC_W'($signed(w));
      prod[j] = exp[EXP_BITS-1] ? (w16 >>> k) : (w16 <<< exp[EXP_BITS-2:0]);
    end
  end
endmodule
