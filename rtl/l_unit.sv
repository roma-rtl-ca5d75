// l_unit: the ROM-based low-precision half of a matrix unit.
//
// It holds this tile's share of the quantized base model in N_CELLS fused
// cells (B-ROM + low-precision compute cell) and computes, for one group of
// 128 FP16 activations and one group address, N_CELLS dot products with the
// dequantized 2-bit weights of that group, one per cell (each cell stores a
// different output row). The exponent-matching unit is shared by all cells,
// as in the architecture.
//
// Pipeline (register stages are this design's choice):
//   stage 1: exp_align on the input group; value / vsum / max_exp and the
//            group address are registered.
//   stage 2: every cell reads its B-ROM word and finishes its group; the FP16
//            results are registered.
// A new group can enter every cycle; results appear 2 cycles after in_valid.
//
// ROM image: cell c of tile `tile_id` holds roma_pkg::rom_word(tile_id, c, a)
// at address a. tile_id is a strap tied to a constant by the array, so the
// image is constant; it stands in for the trained model's weights.
module l_unit
  import roma_pkg::*;
#(
  parameter int unsigned N_CELLS = 16,
  parameter int unsigned DEPTH   = 16,
  parameter int unsigned AW      = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [15:0]    tile_id,
  input  logic           in_valid,
  input  vec_t           act,
  input  logic [AW-1:0]  addr,
  output logic           out_valid,
  output fp16_t          res [N_CELLS]
);
  localparam int unsigned SW = VAL_W + $clog2(GROUP);

  logic signed [VAL_W-1:0] value_c [GROUP];
  logic signed [SW-1:0]    vsum_c;
  logic [EXP_W-1:0]        mexp_c;

  logic signed [VAL_W-1:0] value_q [GROUP];
  logic signed [SW-1:0]    vsum_q;
  logic [EXP_W-1:0]        mexp_q;
  logic [AW-1:0]           addr_q;
  logic                    v1_q;

  logic [ROM_W-1:0]        image [N_CELLS][DEPTH];
  fp16_t                   res_c [N_CELLS];

  exp_align #(.N(GROUP)) u_align (.act(act), .value(value_c), .vsum(vsum_c), .max_exp(mexp_c));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1_q      <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1_q      <= in_valid;
      out_valid <= v1_q;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      value_q <= value_c;
      vsum_q  <= vsum_c;
      mexp_q  <= mexp_c;
      addr_q  <= addr;
    end
    if (v1_q) res <= res_c;
  end

  always_comb
    for (int c = 0; c < int'(N_CELLS); c++)
      for (int a = 0; a < int'(DEPTH); a++)
        image[c][a] = rom_word(tile_id, 16'(c), 16'(a));

  for (genvar c = 0; c < N_CELLS; c++) begin : g_cell
    fused_cell #(.N(GROUP), .DEPTH(DEPTH), .AW(AW)) u_fc (
      .addr(addr_q), .mask(image[c]), .value(value_q), .vsum(vsum_q), .max_exp(mexp_q),
      .res(res_c[c])
    );
  end
endmodule
