// log2_quant: LOG2 quantizer of one FP16 activation.
//
// Computes x~ = Clip(Round(log2|x|), -8, 7) with the paper's shortcut: for an
// FP16 value with biased exponent e and mantissa 1.f, Round(log2|x|) equals
// (e - 15) plus one when 1.f >= sqrt(2), and zero otherwise. The sqrt(2) test
// is a single comparator on the 10 fraction bits (1.f >= sqrt(2) exactly when
// f >= 425, since 424/1024 < sqrt(2)-1 < 425/1024); a 0/1 mux and one adder
// finish the rounding, as in the paper's figure. The result is clipped to the
// 4-bit range [-8, 7]. -8 doubles as the code for a zero activation, so zero,
// subnormal and all values that clip to -8 set `q.prune`: the PE then skips
// the input with no weight fetch and no additions.
//
// Purely combinational. Interface: `x` FP16 in, `q` = {sign, exp, prune} out.
// Follows the paper: the comparator/mux/adder structure, the clip range, and
// the pruning of -8. Own choices: Inf/NaN inputs clip to +7, subnormals prune.
module log2_quant
  import qeihan_pkg::*;
(
  input  fp16_t x,
  output lq_t   q
);
  localparam logic [9:0] SQRT2_FRAC = 10'd425;  // ceil((sqrt(2)-1)*1024)

  logic [4:0]        e;
  logic [9:0]        f;
  logic              round_up;   // comparator + 0/1 mux
  logic signed [6:0] r;          // e - 15 + round_up, range [-15, 17]

  always_comb begin
    e        = x[14:10];
    f        = x[9:0];
    round_up = (f >= SQRT2_FRAC);
    r        = $signed({2'b00, e}) - 7'sd15 + $signed({6'b0, round_up});

    q.sign  = x[15];
    q.prune = 1'b0;
    if (e == 5'd0) begin                 // zero or subnormal: far below 2^-8
      q.exp   = exp_t'(EXP_MIN);
      q.prune = 1'b1;
    end else if (e == 5'd31 || r >= 7'(EXP_MAX)) begin
      q.exp   = exp_t'(EXP_MAX);
    end else if (r <= 7'(EXP_MIN)) begin
      q.exp   = exp_t'(EXP_MIN);
      q.prune = 1'b1;
    end else begin
      q.exp   = r[EXP_BITS-1:0];
    end
  end
endmodule
