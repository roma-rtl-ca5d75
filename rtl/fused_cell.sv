// fused_cell: one B-ROM cell and the low-precision compute cell it feeds.
//
// In the physical design the two are placed in the same area, the wiring-heavy
// B-ROM mostly in the metal layers above the transistor-heavy compute logic.
// That fusion is a layout property; logically the cell is a B-ROM read whose
// word (128 weights, zero point, scale) goes straight into an lp_cell.
//
// Interface: combinational from addr and the shared alignment outputs to res.
// ROM word layout: [255:0] weights, [257:256] zero point, [273:258] FP16 scale.
module fused_cell
  import roma_pkg::*;
#(
  parameter int unsigned N     = GROUP,
  parameter int unsigned DEPTH = 16,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  parameter int unsigned RW    = N * WQ_W + ZP_W + FP16_W
) (
  input  logic [AW-1:0]                     addr,
  input  logic [RW-1:0]                     mask [DEPTH],
  input  logic signed [VAL_W-1:0]           value [N],
  input  logic signed [VAL_W+$clog2(N)-1:0] vsum,
  input  logic [EXP_W-1:0]                  max_exp,
  output fp16_t                             res
);
  logic [RW-1:0] word;

  brom #(.DEPTH(DEPTH), .W(RW), .AW(AW)) u_brom (.addr(addr), .mask(mask), .data(word));

  lp_cell #(.N(N)) u_cell (
    .value(value), .vsum(vsum), .max_exp(max_exp),
    .w(word[N*WQ_W-1:0]), .z(word[N*WQ_W +: ZP_W]), .s(word[N*WQ_W+ZP_W +: FP16_W]),
    .res(res)
  );
endmodule
