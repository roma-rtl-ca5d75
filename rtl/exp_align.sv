// exp_align: the shared exponent-matching unit at the input of an L-Unit.
//
// It turns a group of N FP16 activations into N signed 12-bit integers that
// share one exponent, so the compute cells can run a plain integer dot product
// against the 2-bit weights. Following the architecture:
//   vconv_k = (-1)^sign * {1, mantissa}   for a normal number
//           = (-1)^sign * {mantissa, 0}   for a denormal (exponent field 0)
//   max_exp = max_k exp_k                 (raw 5-bit exponent fields)
//   value_k = vconv_k >> (max_exp - exp_k)
//   vsum    = sum_k value_k               (needed later for the zero-point term)
// With these definitions activation_k ~= value_k * 2^(max_exp - 25).
// The right shift is arithmetic on the two's-complement vconv (the formula
// gives no rounding, so bits shifted out are dropped, rounding towards minus
// infinity); that choice is this design's. Exponent 31 (Inf/NaN) is handled
// as an ordinary exponent.
//
// Interface: purely combinational; act is N x FP16 packed (element k at
// [16k+15:16k]); value is N x S12, vsum is S19 (for N = 128), max_exp is U5.
// The L-Unit registers the outputs, so this block adds no cycle of its own.
module exp_align
  import roma_pkg::*;
#(
  parameter int unsigned N = GROUP
) (
  input  logic [N*FP16_W-1:0]              act,
  output logic signed [VAL_W-1:0]          value [N],
  output logic signed [VAL_W+$clog2(N)-1:0] vsum,
  output logic [EXP_W-1:0]                 max_exp
);

  logic [EXP_W-1:0]        expf  [N];
  logic signed [VAL_W-1:0] vconv [N];

  always_comb begin
    for (int k = 0; k < N; k++) begin
      logic [11:0] mag;
      expf[k] = act[k*16+10 +: 5];
      mag     = (expf[k] != '0) ? {1'b0, 1'b1, act[k*16 +: 10]} : {1'b0, act[k*16 +: 10], 1'b0};
      vconv[k] = act[k*16+15] ? -$signed(mag) : $signed(mag);
    end
  end

  always_comb begin
    max_exp = '0;
    for (int k = 0; k < N; k++)
      if (expf[k] > max_exp) max_exp = expf[k];
  end

  always_comb begin
    vsum = '0;
    for (int k = 0; k < N; k++) begin
      value[k] = vconv[k] >>> (max_exp - expf[k]);
      vsum     = vsum + (VAL_W+$clog2(N))'(value[k]);
    end
  end

endmodule
