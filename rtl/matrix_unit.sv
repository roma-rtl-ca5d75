// matrix_unit: one tile of the two 8 x 16 matrix arrays.
//
// A matrix unit pairs a ROM-based L-Unit (quantized base-model weights and
// their low-precision compute cells) with an SRAM-based H-Unit (LoRA weights,
// KV cache and high-precision compute cells), as in the architecture. Both see
// the FP16 activations that arrive through the unit's router; this module is
// the small controller between the router's local port and the two units,
// which the architecture does not detail:
//   OP_LDOT   data = 128 FP16 activations, addr = group address. Replies with
//             one OP_RESULT flit holding the N_LCELLS FP16 results in lanes
//             0..N_LCELLS-1.
//   OP_HWRITE writes data into H-Unit word addr. No reply.
//   OP_HDOT   H-Unit dot product with word addr; flags in field b (HF_*).
//             Replies (result in lane 0) only when HF_LAST is set.
//   OP_HREAD  replies with H-Unit word addr.
// Replies go to (rep_x, rep_y) or to the host (rep_host) and carry rep_addr in
// their addr field, so a vector unit can store them directly.
// Timing: requests without a reply are taken one per cycle. A request with a
// reply blocks the port until the reply has been handed to the router:
// LDOT and HDOT/HREAD replies are offered 2 cycles after the request is taken
// (the L-Unit and H-Unit latencies) and held while the router stalls them.
module matrix_unit
  import roma_pkg::*;
#(
  parameter int unsigned N_LCELLS = 16,
  parameter int unsigned L_DEPTH  = 16,
  parameter int unsigned H_DEPTH  = 4608
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [15:0]   tile_id,
  input  logic          in_valid,
  input  flit_t         in_flit,
  output logic          in_ready,
  output logic          out_valid,
  output flit_t         out_flit,
  input  logic          out_ready
);
  localparam int unsigned LAW = (L_DEPTH > 1) ? $clog2(L_DEPTH) : 1;
  localparam int unsigned HAW = $clog2(H_DEPTH);

  typedef enum logic [1:0] {S_IDLE, S_WAIT_L, S_WAIT_H, S_REPLY} state_e;
  state_e state;

  logic  take;
  logic  lu_valid, lu_out_valid;
  fp16_t lu_res [N_LCELLS];
  logic  hu_valid, hu_resp_valid;
  logic [1:0] hu_op;
  vec_t  hu_resp;
  flit_t req_q;
  vec_t  lres_vec;

  assign in_ready = (state == S_IDLE);
  assign take     = in_valid && in_ready;

  assign lu_valid = take && in_flit.op == OP_LDOT;
  assign hu_valid = take && (in_flit.op == OP_HWRITE || in_flit.op == OP_HDOT || in_flit.op == OP_HREAD);
  always_comb
    case (in_flit.op)
      OP_HWRITE: hu_op = 2'd0;
      OP_HDOT:   hu_op = 2'd1;
      default:   hu_op = 2'd2;
    endcase

  l_unit #(.N_CELLS(N_LCELLS), .DEPTH(L_DEPTH)) u_l (
    .clk(clk), .rst_n(rst_n), .tile_id(tile_id), .in_valid(lu_valid), .act(in_flit.data),
    .addr(in_flit.addr[LAW-1:0]), .out_valid(lu_out_valid), .res(lu_res));

  h_unit #(.DEPTH(H_DEPTH)) u_h (
    .clk(clk), .rst_n(rst_n), .req_valid(hu_valid), .req_op(hu_op),
    .req_addr(in_flit.addr[HAW-1:0]), .req_flags(in_flit.b[3:0]), .req_data(in_flit.data),
    .resp_valid(hu_resp_valid), .resp_data(hu_resp));

  always_comb begin
    lres_vec = '0;
    for (int c = 0; c < int'(N_LCELLS); c++) lres_vec[c*16 +: 16] = lu_res[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      out_valid <= 1'b0;
    end else begin
      case (state)
        S_IDLE:
          if (take) begin
            if (in_flit.op == OP_LDOT) state <= S_WAIT_L;
            else if (in_flit.op == OP_HREAD || (in_flit.op == OP_HDOT && in_flit.b[HF_LAST]))
              state <= S_WAIT_H;
          end
        S_WAIT_L: if (lu_out_valid) begin state <= S_REPLY; out_valid <= 1'b1; end
        S_WAIT_H: if (hu_resp_valid) begin state <= S_REPLY; out_valid <= 1'b1; end
        S_REPLY:  if (out_ready) begin state <= S_IDLE; out_valid <= 1'b0; end
        default:  state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (take) req_q <= in_flit;
    if ((state == S_WAIT_L && lu_out_valid) || (state == S_WAIT_H && hu_resp_valid)) begin
      out_flit          <= '0;
      out_flit.dst_x    <= req_q.rep_x;
      out_flit.dst_y    <= req_q.rep_y;
      out_flit.dst_host <= req_q.rep_host;
      out_flit.op       <= OP_RESULT;
      out_flit.addr     <= req_q.rep_addr;
      out_flit.data     <= (state == S_WAIT_L) ? lres_vec : hu_resp;
    end
  end

  // A matrix unit only receives matrix-unit operations.
  assert property (@(posedge clk) disable iff (!rst_n)
    take |-> in_flit.op inside {OP_LDOT, OP_HWRITE, OP_HDOT, OP_HREAD});
endmodule
