// add_array: the PE's ADD array, D independent adders.
//
// Every adder accumulates one shifted weight into one partial output: the
// result is partial + prod when the activation is positive and partial - prod
// when it is negative (the sign of the activation, not of its exponent,
// decides). All D lanes work on the same input activation and D different
// kernels. No multipliers are needed because the LOG2 quantization turned the
// product into a shift done upstream.
//
// Combinational; the PE writes `sum` back to the output buffer in the same
// cycle. Interface: `partial` (from the OB), `prod` (from D&S), `sub`
// (activation sign), `sum`. Follows the paper: d adders, add/subtract by sign,
// 16-bit values. Own choice: results saturate at the 16-bit limits.
module add_array
  import qeihan_pkg::*;
#(
  parameter int unsigned D = D_ADD
) (
  input  logic signed [D-1:0][ACC_W-1:0] partial,
  input  logic signed [D-1:0][ACC_W-1:0] prod,
  input  logic                           sub,
  output logic signed [D-1:0][ACC_W-1:0] sum
);
  always_comb
    for (int j = 0; j < D; j++)
      sum[j] = sat_add(partial[j], sub ? -prod[j] : prod[j]);
endmodule
