// h_unit: the SRAM-based high-precision half of a matrix unit.
//
// It stores the tile's share of the LoRA adapter weights and of the KV cache
// in an SRAM and computes dot products of a 128-element FP16 activation vector
// with one SRAM word per request. The architecture gives the H-Unit's role
// (high-precision LoRA / KV storage and compute) but not its insides; what
// follows is this design's simplest realisation of it:
//   * SRAM of DEPTH words x 2048 bits. A word is either 128 FP16 values
//     (KV cache, FP16) or 256 FP8 E4M3 values (LoRA weights, FP8); in FP8 mode
//     a request selects the lower or upper 128 of them.
//   * High-precision compute cells: 128 exact FP16 x FP16 multipliers (FP8 is
//     widened to FP16 exactly) feeding an exact fixed-point accumulator
//     (2^-48 resolution, 96 bits), so a long dot product split over several
//     requests (FIRST clears, LAST reads out) is rounded to FP16 only once.
//
// Requests (req_op): H_WRITE stores req_data at req_addr; H_DOT multiplies
// req_data (activations) with word req_addr, flags as in roma_pkg (HF_*);
// H_READ returns word req_addr. One request per cycle, no stalls.
// Timing: SRAM read in the accept cycle (synchronous), multiply/accumulate in
// the next; resp_valid rises 2 cycles after the request for H_READ and for
// H_DOT with LAST; other requests give no response.
module h_unit
  import roma_pkg::*;
#(
  parameter int unsigned DEPTH = 4608,   // 1.125 MB per tile: 288 MB over 256 matrix units
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid,
  input  logic [1:0]    req_op,
  input  logic [AW-1:0] req_addr,
  input  logic [3:0]    req_flags,
  input  vec_t          req_data,
  output logic          resp_valid,
  output vec_t          resp_data
);
  localparam logic [1:0] H_WRITE = 2'd0, H_DOT = 2'd1, H_READ = 2'd2;
  localparam int unsigned AACC = 96;

  vec_t mem [DEPTH];

  vec_t                    rd_q, act_q;
  logic [3:0]              flags_q;
  logic [1:0]              op_q;
  logic                    v1_q;
  logic signed [AACC-1:0]  acc_q, acc_d, sum_c;
  logic [AACC-1:0]         acc_mag;

  // stage 0: SRAM access
  always_ff @(posedge clk) begin
    if (req_valid && req_op == H_WRITE) mem[req_addr] <= req_data;
    if (req_valid) begin
      rd_q    <= mem[req_addr];
      act_q   <= req_data;
      flags_q <= req_flags;
      op_q    <= req_op;
    end
  end

  // stage 1: high-precision compute cells
  always_comb begin
    sum_c = '0;
    for (int k = 0; k < int'(GROUP); k++) begin
      fp16_t a, w;
      logic [21:0] pm;
      logic [AACC-1:0] pv;
      a  = act_q[k*16 +: 16];
      w  = flags_q[HF_FP8] ? fp8_to_fp16(rd_q[(flags_q[HF_HALF] ? 1024 : 0) + k*8 +: 8])
                           : rd_q[k*16 +: 16];
      pm = fp16_sig(a) * fp16_sig(w);
      pv = AACC'(pm) << (int'(fp16_exp_eff(a)) + int'(fp16_exp_eff(w)) - 2);
      if (a[15] ^ w[15]) sum_c = sum_c - $signed(pv);
      else               sum_c = sum_c + $signed(pv);
    end
    acc_d   = (flags_q[HF_FIRST] ? '0 : acc_q) + sum_c;
    acc_mag = acc_d[AACC-1] ? AACC'(-acc_d) : AACC'(acc_d);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1_q       <= 1'b0;
      resp_valid <= 1'b0;
      acc_q      <= '0;
    end else begin
      v1_q       <= req_valid && (req_op != H_WRITE);
      resp_valid <= v1_q && (op_q == H_READ || (op_q == H_DOT && flags_q[HF_LAST]));
      if (v1_q && op_q == H_DOT) acc_q <= acc_d;
    end
  end

  always_ff @(posedge clk)
    if (v1_q) resp_data <= (op_q == H_READ) ? rd_q
                         : {{(VEC_BITS-16){1'b0}}, fp16_pack(acc_d[AACC-1], ACC_W'(acc_mag), -48)};

  // Only the three request codes exist.
  assert property (@(posedge clk) disable iff (!rst_n) req_valid |-> req_op != 2'd3);
endmodule
