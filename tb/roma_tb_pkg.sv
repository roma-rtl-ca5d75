// roma_tb_pkg: reference arithmetic for the testbenches, written independently
// of the RTL helpers. FP16 values are converted through `real` (IEEE double);
// real_to_fp16 rounds to nearest, ties to even, and is exact as long as the
// value it is given is exact in double precision, which the testbenches keep
// true by the ranges of the data they generate.
package roma_tb_pkg;

  function automatic real pow2(input int n);
    real r;
    r = 1.0;
    if (n >= 0) for (int i = 0; i < n; i++) r = r * 2.0;
    else for (int i = 0; i < -n; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real fp16_to_real(input logic [15:0] h);
    int e;
    real m;
    e = int'(h[14:10]);
    m = real'(h[9:0]);
    if (e == 0) fp16_to_real = m * pow2(-24);
    else        fp16_to_real = (1024.0 + m) * pow2(e - 25);
    if (h[15]) fp16_to_real = -fp16_to_real;
  endfunction

  function automatic logic [15:0] real_to_fp16(input real r);
    logic sgn;
    real a, q, fr;
    int e;
    longint n;
    logic [15:0] bits;
    sgn = (r < 0.0);
    a = sgn ? -r : r;
    if (a == 0.0) return {sgn, 15'd0};
    e = 0;
    while (a >= pow2(e + 1)) e++;
    while (a < pow2(e)) e--;
    if (e > 15) return {sgn, 5'h1f, 10'd0};
    if (e < -14) q = a * pow2(24);
    else         q = a * pow2(10 - e);
    n  = longint'($floor(q));
    fr = q - real'(n);
    if (fr > 0.5 || (fr == 0.5 && n[0])) n++;
    if (e < -14) bits = 16'(n);
    else         bits = 16'((e + 15) * 1024 + (n - 1024));
    if (bits[14:0] >= 15'h7c00) bits = 16'h7c00;
    return {sgn, bits[14:0]};
  endfunction

  // random finite FP16 with exponent field in [lo, hi]
  function automatic logic [15:0] rand_fp16(input int lo, input int hi);
    logic [4:0] e;
    e = 5'(lo + int'($urandom % 32'(hi - lo + 1)));
    return {1'($urandom), e, 10'($urandom)};
  endfunction

  // reference ROM image (same documented hash as the design's ROM content)
  function automatic logic [31:0] ref_mix(input logic [31:0] x);
    logic [31:0] h;
    h = x ^ (x >> 16);
    h = h * 32'h7feb352d;
    h = h ^ (h >> 15);
    h = h * 32'h846ca68b;
    return h ^ (h >> 16);
  endfunction

  function automatic logic [273:0] ref_rom_word(input int tile, input int cidx, input int addr);
    logic [287:0] w;
    logic [31:0] seed;
    seed = (32'(tile) << 16) ^ ((32'(cidx) & 32'hff) << 24) ^ ((32'(addr) & 32'hffff) << 8) ^ 32'h9e3779b9;
    for (int c = 0; c < 9; c++) w[c*32 +: 32] = ref_mix(seed + 32'(c) * 32'h61c88647);
    w[272:271] = 2'b01;
    return w[273:0];
  endfunction

  // Exponent matching, written from the formulas: returns value_k, vsum, max_exp.
  function automatic void ref_align(input logic [2047:0] act, output int value[128],
                                    output int vsum, output int mexp);
    int e, v;
    mexp = 0;
    for (int k = 0; k < 128; k++) if (int'(act[k*16+10 +: 5]) > mexp) mexp = int'(act[k*16+10 +: 5]);
    vsum = 0;
    for (int k = 0; k < 128; k++) begin
      e = int'(act[k*16+10 +: 5]);
      v = (e != 0) ? (1024 + int'(act[k*16 +: 10])) : 2 * int'(act[k*16 +: 10]);
      if (act[k*16+15]) v = -v;
      value[k] = v >>> (mexp - e);
      vsum += value[k];
    end
  endfunction

  // One quantization group through the compute cell formula, rounded to FP16.
  function automatic logic [15:0] ref_group(input int value[128], input int mexp,
                                            input logic [273:0] word);
    longint acc;
    int z;
    z = int'(word[257:256]);
    acc = 0;
    for (int k = 0; k < 128; k++) acc += longint'(value[k]) * longint'(int'(word[2*k +: 2]) - z);
    if (acc == 0) return {word[273], 15'd0};
    return real_to_fp16(real'(acc) * fp16_to_real(word[273:258]) * pow2(mexp - 25));
  endfunction

endpackage
