// roma_pkg: types, constants and arithmetic helpers shared by the ROMA accelerator.
//
// What is here:
//  * Sizes that come from the architecture: groups of 128 activations in FP16,
//    2-bit weights and zero-points, FP16 scales, the S12/S19/U5 widths of the
//    exponent-matching outputs, and the 17 x 16 unit array.
//  * FP16 helpers. Every floating-point result in the design is formed by first
//    building the exact value as sign/magnitude times a power of two and then
//    rounding once to FP16 (round to nearest, ties to even; overflow gives
//    infinity, small values become subnormal). Exponent 31 (Inf/NaN) is not
//    treated specially anywhere; it is read as an ordinary large exponent.
//    This once-only rounding is a choice of this implementation.
//  * The network flit that travels between the units' routers, and the
//    operation codes the units understand (this packet format is this design's
//    own; the architecture only says units exchange inputs and results with
//    their neighbours).
//  * rom_word(): the content of the mask-programmed weight ROM. Real silicon
//    would hold a trained model; here a fixed hash of (tile, cell, address)
//    stands in for it so that the ROM image needs no data file.
package roma_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned GROUP     = 128;  // activations / weights per quantization group
  localparam int unsigned FP16_W    = 16;
  localparam int unsigned VAL_W     = 12;   // aligned activation, S12
  localparam int unsigned VSUM_W    = 19;   // sum of aligned activations, S19
  localparam int unsigned EXP_W     = 5;    // shared exponent, U5
  localparam int unsigned WQ_W      = 2;    // quantized weight, UInt2
  localparam int unsigned ZP_W      = 2;    // zero point, UInt2
  // One B-ROM word: 128 x U2 weights, one U2 zero point, one FP16 scale.
  localparam int unsigned ROM_W     = GROUP * WQ_W + ZP_W + FP16_W;  // 274
  localparam int unsigned VEC_BITS  = GROUP * FP16_W;                // 2048
  // Exponent offset of an aligned activation: value * 2^(max_exp - LU_BIAS).
  // 15 is the FP16 exponent bias, 10 the fraction width.
  localparam int          LU_BIAS   = 25;

  localparam int unsigned ACC_W     = 128;  // width handed to fp16_pack

  typedef logic [FP16_W-1:0] fp16_t;
  typedef logic [VEC_BITS-1:0] vec_t;        // 128 x FP16, element i at [16i+15:16i]

  // ---------------------------------------------------------------- network
  localparam int unsigned XW = 4;   // up to 16 columns
  localparam int unsigned YW = 5;   // up to 32 rows

  typedef enum logic [3:0] {
    OP_LDOT   = 4'd0,   // matrix unit: L-unit group dot product, reply with N_LCELLS FP16 results
    OP_HWRITE = 4'd1,   // matrix unit: write one H-unit SRAM word
    OP_HDOT   = 4'd2,   // matrix unit: H-unit dot product with one SRAM word (accumulating)
    OP_HREAD  = 4'd3,   // matrix unit: read one H-unit SRAM word
    OP_VSTORE = 4'd4,   // vector unit: scratch[addr] = data
    OP_VADD   = 4'd5,   // vector unit: scratch[addr] = scratch[a] + scratch[b]
    OP_VMUL   = 4'd6,   // vector unit: scratch[addr] = scratch[a] * scratch[b]
    OP_VMAX   = 4'd7,   // vector unit: scratch[addr] = max(scratch[a], scratch[b])
    OP_VRSUM  = 4'd8,   // vector unit: scratch[addr][0] = sum of scratch[a]
    OP_VRMAX  = 4'd9,   // vector unit: scratch[addr][0] = max of scratch[a]
    OP_VPERM  = 4'd10,  // vector unit: scratch[addr][i] = scratch[a][data index i]
    OP_VREAD  = 4'd11,  // vector unit: reply with scratch[addr]
    OP_RESULT = 4'd12   // reply flit (delivered to the host, or stored by a vector unit)
  } op_e;

  // HDOT flag bits carried in flit.b
  localparam int unsigned HF_FIRST = 0;  // clear the accumulator before adding
  localparam int unsigned HF_LAST  = 1;  // reply with the rounded accumulator
  localparam int unsigned HF_FP8   = 2;  // SRAM word holds 256 FP8 (E4M3) weights
  localparam int unsigned HF_HALF  = 3;  // FP8 mode: use the upper 128 weights

  typedef struct packed {
    logic [XW-1:0] dst_x;
    logic [YW-1:0] dst_y;
    logic          dst_host;   // deliver to the host port (west side of the host row)
    logic [XW-1:0] rep_x;      // where the reply goes
    logic [YW-1:0] rep_y;
    logic          rep_host;
    logic [15:0]   rep_addr;   // address carried by the reply (vector-unit scratch address)
    op_e           op;
    logic [15:0]   addr;
    logic [15:0]   a;
    logic [15:0]   b;
    vec_t          data;
  } flit_t;

  // ---------------------------------------------------------------- FP16 helpers
  function automatic logic [4:0] fp16_exp_eff(input fp16_t h);
    return (h[14:10] == 5'd0) ? 5'd1 : h[14:10];
  endfunction

  // significand with hidden bit (0 for subnormals): value = sig * 2^(exp_eff - 25)
  function automatic logic [10:0] fp16_sig(input fp16_t h);
    return {(h[14:10] != 5'd0), h[9:0]};
  endfunction

  // Exact value * 2^24 as a signed integer.
  function automatic logic signed [42:0] fp16_to_fix(input fp16_t h);
    logic [42:0] mag;
    mag = 43'(fp16_sig(h)) << (fp16_exp_eff(h) - 5'd1);
    return h[15] ? -$signed(mag) : $signed(mag);
  endfunction

  // Round sign * mag * 2^scale to FP16 (nearest, ties to even).
  function automatic fp16_t fp16_pack(input logic sign, input logic [ACC_W-1:0] mag,
                                      input int scale);
    int p, e, sh, biased;
    logic [ACC_W-1:0] kept, rmask;
    logic guard, sticky, rnd;
    logic [14:0] res;
    if (mag == '0) return {sign, 15'd0};
    p = 0;
    for (int i = 0; i < ACC_W; i++) if (mag[i]) p = i;
    e = p + scale;
    if (e > 15) return {sign, 5'h1f, 10'd0};
    if (e >= -14) begin
      sh = p - 10;
      biased = e + 15;
    end else begin
      sh = -(scale + 24);
      biased = 0;
    end
    if (sh > int'(ACC_W)) return {sign, 15'd0};
    if (sh <= 0) begin
      kept = mag << (-sh);
      rnd  = 1'b0;
    end else begin
      kept   = mag >> sh;
      guard  = mag[sh-1];
      rmask  = (sh == 1) ? '0 : ({ACC_W{1'b1}} >> (ACC_W - (sh - 1)));
      sticky = |(mag & rmask);
      rnd    = guard & (sticky | kept[0]);
    end
    res = {biased[4:0], kept[9:0]} + {14'd0, rnd};
    return {sign, res};
  endfunction

  // FP8 E4M3 (bias 7, no infinities) to FP16; exact for every finite E4M3 value.
  function automatic fp16_t fp8_to_fp16(input logic [7:0] q);
    logic [3:0] e;
    logic [2:0] m;
    logic [4:0] ne;
    logic [9:0] nm;
    e = q[6:3];
    m = q[2:0];
    if (e != 4'd0) begin
      ne = 5'(e) + 5'd8;          // 15 - 7
      nm = {m, 7'd0};
    end else if (m == 3'd0) begin
      ne = 5'd0;
      nm = 10'd0;
    end else begin                 // subnormal: m * 2^-9, normal in FP16
      if (m[2]) begin ne = 5'd8; nm = {m[1:0], 8'd0}; end
      else if (m[1]) begin ne = 5'd7; nm = {m[0], 9'd0}; end
      else begin ne = 5'd6; nm = 10'd0; end
    end
    return {q[7], ne, nm};
  endfunction

  function automatic fp16_t vec_get(input vec_t v, input int i);
    return v[i*16 +: 16];
  endfunction

  // ---------------------------------------------------------------- ROM image
  function automatic logic [31:0] mix32(input logic [31:0] x);
    logic [31:0] h;
    h = x;
    h = h ^ (h >> 16);
    h = h * 32'h7feb352d;
    h = h ^ (h >> 15);
    h = h * 32'h846ca68b;
    h = h ^ (h >> 16);
    return h;
  endfunction

  // Word `addr` of B-ROM cell `cell` in tile `tile`. Layout:
  // [255:0] weights (w_k at [2k+1:2k]), [257:256] zero point, [273:258] FP16 scale.
  // The scale's exponent field is forced into 8..15 (scales 2^-7 .. ~1).
  function automatic logic [ROM_W-1:0] rom_word(input logic [15:0] tile, input logic [15:0] cidx,
                                                input logic [15:0] addr);
    logic [287:0] w;
    logic [31:0] seed;
    seed = {tile, 16'd0} ^ {cidx[7:0], addr[15:0], 8'd0} ^ 32'h9e3779b9;
    for (int c = 0; c < 9; c++) w[c*32 +: 32] = mix32(seed + 32'(c) * 32'h61c88647);
    w[272:271] = 2'b01;   // scale exponent = 01xxx
    return w[ROM_W-1:0];
  endfunction

endpackage
