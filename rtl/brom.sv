// brom: B-ROM, the area-reduced block ROM that holds the quantized base-model
// weights of one fused cell.
//
// A conventional mask ROM decodes the address into one-hot word lines A_i and
// forms each output bit as R_j = OR_i (A_i & M[i][j]), one transistor per bit.
// B-ROM groups the word lines in blocks of four. Per block a candidate
// generator (CGen) forms all 16 possible outputs of that block,
//   C_k = OR_{i=0..3} (A_{4b+i} & bit i of k),   k = 0..15,
// and output column j of the block simply taps candidate C_k where k is the
// 4-bit nibble the block stores in that column (M[4b+3][j] .. M[4b][j]). The
// outputs of all blocks are ORed. Storage thus becomes wiring: one tap per
// block and column instead of four transistors.
//
// The stored pattern arrives on the `mask` input. In silicon it is the metal
// programming of the taps and is a constant; with `mask` tied to constants,
// synthesis turns every 16:1 tap selection below into a plain wire. Passing it
// as a port (rather than a parameter) lets one module serve every cell; this is
// a choice of this implementation.
//
// Interface: combinational read, addr -> data. DEPTH must be a multiple of 4.
module brom #(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned W     = 274,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic [AW-1:0] addr,
  input  logic [W-1:0]  mask [DEPTH],
  output logic [W-1:0]  data
);
  localparam int unsigned NBLK = DEPTH / 4;

  logic [DEPTH-1:0] a_line;             // ADec: one-hot word lines
  logic [15:0]      cand [NBLK];        // CGen outputs C0..C15 per block
  logic [W-1:0]     blk_out [NBLK];

  always_comb begin
    a_line = '0;
    a_line[addr] = 1'b1;
  end

  always_comb
    for (int b = 0; b < int'(NBLK); b++) begin
      // CGen: candidate k is the block output when the block stores k
      for (int k = 0; k < 16; k++) begin
        logic [3:0] kb;
        kb = 4'(k);
        cand[b][k] = (a_line[4*b+0] & kb[0]) | (a_line[4*b+1] & kb[1]) |
                     (a_line[4*b+2] & kb[2]) | (a_line[4*b+3] & kb[3]);
      end
      // one tap per column: column j takes the candidate named by its stored nibble
      for (int j = 0; j < int'(W); j++)
        blk_out[b][j] = cand[b][{mask[4*b+3][j], mask[4*b+2][j], mask[4*b+1][j], mask[4*b][j]}];
    end

  always_comb begin
    data = '0;
    for (int b = 0; b < NBLK; b++) data = data | blk_out[b];
  end

  initial assert (DEPTH % 4 == 0) else $error("brom: DEPTH must be a multiple of 4");
endmodule
