// lp_cell: low-precision compute cell of the L-Unit.
//
// It finishes one quantization group: with aligned activations value_k (S12),
// their sum vsum (S19) and shared exponent max_exp (U5) from exp_align, and the
// group's 2-bit weights w_k, 2-bit zero point z and FP16 scale s from its B-ROM
// cell, it computes
//   res = (sum_k value_k * w_k  -  vsum * z) * s * 2^(max_exp - 25)
// which equals sum_k value_k * (w_k - z) * s * 2^(max_exp - 25), the dot
// product of the aligned activations with the dequantized weights (w - z) * s.
// The datapath is the one drawn for the cell: an integer dot product, a
// multiplier for vsum * z, a subtractor, and a scale stage. The constant 25 is
// this design's reading of the architecture's "Bias" (FP16 bias 15 plus the 10
// fraction bits, since value carries the significand as an integer). The
// scale stage forms the exact product and rounds once to FP16 (nearest even).
//
// Interface: combinational. w is N x U2 packed (w_k at [2k+1:2k]).
module lp_cell
  import roma_pkg::*;
#(
  parameter int unsigned N = GROUP
) (
  input  logic signed [VAL_W-1:0]           value [N],
  input  logic signed [VAL_W+$clog2(N)-1:0] vsum,
  input  logic [EXP_W-1:0]                  max_exp,
  input  logic [N*WQ_W-1:0]                 w,
  input  logic [ZP_W-1:0]                   z,
  input  fp16_t                             s,
  output fp16_t                             res
);
  localparam int unsigned DW = VAL_W + $clog2(N) + 4;   // dot product / difference width

  logic signed [DW-1:0] dot, zterm, diff;
  logic [DW-1:0]        diff_mag;
  logic [DW+10:0]       prod;

  // integer dot product
  always_comb begin
    dot = '0;
    for (int k = 0; k < N; k++)
      dot = dot + DW'(value[k]) * $signed({1'b0, w[k*2 +: 2]});
  end

  assign zterm    = DW'(vsum) * $signed({1'b0, z});
  assign diff     = dot - zterm;
  assign diff_mag = diff[DW-1] ? DW'(-diff) : DW'(diff);
  assign prod     = (DW+11)'(diff_mag) * (DW+11)'(fp16_sig(s));

  // scale: value = prod * 2^((max_exp - 25) + (exp_eff(s) - 25))
  assign res = fp16_pack(diff[DW-1] ^ s[15], ACC_W'(prod),
                         int'(max_exp) - LU_BIAS + int'(fp16_exp_eff(s)) - 25);
endmodule
