// vector_unit: one of the 16 vector units in the middle row of the array.
//
// The vector units perform the non-matrix work (element-wise operations,
// reductions and permutations) and keep intermediate results in their own
// SRAM; the architecture names these duties and the SRAM, not the insides.
// This design's vector unit works on 128-lane FP16 vectors held in a scratch
// SRAM of DEPTH words (4096 x 2048 bits = 1 MB; 16 MB over the 16 units):
//   OP_VSTORE / OP_RESULT  scratch[addr] = data  (results sent by matrix units
//                          land here directly)
//   OP_VADD / OP_VMUL / OP_VMAX   scratch[addr] = scratch[a] op scratch[b], per lane
//   OP_VRSUM / OP_VRMAX    scratch[addr] = {0.., reduce(scratch[a])} (lane 0)
//   OP_VPERM               scratch[addr][i] = scratch[a][data lane i, low 7 bits]
//   OP_VREAD               reply with scratch[addr] to (rep_x, rep_y) or host
// Arithmetic is exact before one rounding to FP16 (nearest even); the sum of
// a reduction is also rounded only once. MAX compares the exact values.
// Timing: an operation is taken in one cycle (both operands read from the
// SRAM at that edge) and executed in the next, so one operation every 2 cycles;
// a VREAD reply is offered 2 cycles after the request and held until taken.
module vector_unit
  import roma_pkg::*;
#(
  parameter int unsigned DEPTH = 4096
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  flit_t in_flit,
  output logic  in_ready,
  output logic  out_valid,
  output flit_t out_flit,
  input  logic  out_ready
);
  localparam int unsigned AW = $clog2(DEPTH);

  typedef enum logic [1:0] {S_IDLE, S_EXEC, S_REPLY} state_e;
  state_e state;

  vec_t  mem [DEPTH];
  vec_t  ra, rb, result;
  flit_t req_q;
  logic  take, wr;

  assign in_ready = (state == S_IDLE);
  assign take     = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (take) begin
      req_q <= in_flit;
      ra    <= mem[(in_flit.op == OP_VREAD) ? in_flit.addr[AW-1:0] : in_flit.a[AW-1:0]];
      rb    <= mem[in_flit.b[AW-1:0]];
    end
    if (wr) mem[req_q.addr[AW-1:0]] <= result;
  end

  assign wr = (state == S_EXEC) && (req_q.op != OP_VREAD);

  // execute
  always_comb begin
    logic signed [49:0] rsum;
    logic signed [42:0] fa, fb, best;
    logic signed [43:0] s2;
    logic [21:0]        pm;
    result = '0;
    rsum   = '0;
    best   = fp16_to_fix(ra[15:0]);
    for (int k = 0; k < int'(GROUP); k++) begin
      fp16_t x, y;
      x  = ra[k*16 +: 16];
      y  = rb[k*16 +: 16];
      fa = fp16_to_fix(x);
      fb = fp16_to_fix(y);
      s2 = 44'(fa) + 44'(fb);
      pm = fp16_sig(x) * fp16_sig(y);
      rsum = rsum + 50'(fa);
      if (fa > best) best = fa;
      case (req_q.op)
        OP_VSTORE, OP_RESULT: result[k*16 +: 16] = req_q.data[k*16 +: 16];
        OP_VADD:  result[k*16 +: 16] = fp16_pack(s2[43], ACC_W'(s2[43] ? -s2 : s2), -24);
        OP_VMUL:  result[k*16 +: 16] = fp16_pack(x[15] ^ y[15], ACC_W'(pm),
                                                 int'(fp16_exp_eff(x)) + int'(fp16_exp_eff(y)) - 50);
        OP_VMAX:  result[k*16 +: 16] = (fb > fa) ? y : x;
        OP_VPERM: result[k*16 +: 16] = ra[int'(req_q.data[k*16 +: 7])*16 +: 16];
        default:  result[k*16 +: 16] = '0;
      endcase
    end
    if (req_q.op == OP_VRSUM) result[15:0] = fp16_pack(rsum[49], ACC_W'(rsum[49] ? -rsum : rsum), -24);
    if (req_q.op == OP_VRMAX) begin
      result[15:0] = ra[15:0];
      for (int k = 0; k < int'(GROUP); k++)
        if (fp16_to_fix(ra[k*16 +: 16]) == best) result[15:0] = ra[k*16 +: 16];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      out_valid <= 1'b0;
    end else begin
      case (state)
        S_IDLE:  if (take) state <= S_EXEC;
        S_EXEC:  if (req_q.op == OP_VREAD) begin state <= S_REPLY; out_valid <= 1'b1; end
                 else state <= S_IDLE;
        S_REPLY: if (out_ready) begin state <= S_IDLE; out_valid <= 1'b0; end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk)
    if (state == S_EXEC && req_q.op == OP_VREAD) begin
      out_flit          <= '0;
      out_flit.dst_x    <= req_q.rep_x;
      out_flit.dst_y    <= req_q.rep_y;
      out_flit.dst_host <= req_q.rep_host;
      out_flit.op       <= OP_RESULT;
      out_flit.addr     <= req_q.rep_addr;
      out_flit.data     <= ra;
    end

  // A vector unit only receives vector-unit operations and results.
  assert property (@(posedge clk) disable iff (!rst_n)
    take |-> in_flit.op inside {OP_VSTORE, OP_VADD, OP_VMUL, OP_VMAX, OP_VRSUM, OP_VRMAX,
                                OP_VPERM, OP_VREAD, OP_RESULT});
endmodule
