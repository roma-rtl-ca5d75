// router: the internal router of one unit of the 17 x 16 array.
//
// Every matrix unit and vector unit exchanges inputs and results with its four
// neighbours through a router; the architecture states only that much. This
// design's router is a single-flit-packet mesh router:
//   * five ports: 0 local, 1 north (row - 1), 2 south (row + 1), 3 east
//     (column + 1), 4 west (column - 1); each with valid/ready handshakes.
//   * a 2-entry FIFO per input, so a neighbour sees `ready` from registers only
//     (no combinational path between routers) and a full link runs at one
//     flit per cycle.
//   * dimension-ordered routing: first along the row (X) to the destination
//     column, then along the column (Y). Flits for the host (dst_host) go to
//     column 0 of row HOST_Y and leave there through the west port, which the
//     array connects to the host interface.
//   * one round-robin arbiter per output; a grant is held while the output is
//     valid and not accepted, so an offered flit never changes.
// A flit needs one cycle per hop when nothing blocks it (FIFO write at the
// edge, routed out of the FIFO head in the next cycle).
// The router learns its position from the my_x / my_y straps.
module router
  import roma_pkg::*;
#(
  parameter int unsigned HOST_Y = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [XW-1:0] my_x,
  input  logic [YW-1:0] my_y,
  input  logic          in_valid  [5],
  input  flit_t         in_flit   [5],
  output logic          in_ready  [5],
  output logic          out_valid [5],
  output flit_t         out_flit  [5],
  input  logic          out_ready [5]
);
  localparam int P_L = 0, P_N = 1, P_S = 2, P_E = 3, P_W = 4;

  flit_t      fifo  [5][2];
  logic       rptr  [5];
  logic       wptr  [5];
  logic [1:0] count [5];

  logic [2:0] route   [5];      // requested output of each input head
  logic [4:0] grant   [5];      // grant[o][i]
  logic [2:0] rr      [5];      // round-robin pointer per output
  logic       locked  [5];
  logic [2:0] lock_in [5];
  logic [4:0] pop;

  function automatic logic [2:0] route_of(input flit_t f, input logic [XW-1:0] x,
                                          input logic [YW-1:0] y);
    logic [XW-1:0] tx;
    logic [YW-1:0] ty;
    tx = f.dst_host ? '0 : f.dst_x;
    ty = f.dst_host ? YW'(HOST_Y) : f.dst_y;
    if (x < tx)      return 3'(P_E);
    else if (x > tx) return 3'(P_W);
    else if (y < ty) return 3'(P_S);
    else if (y > ty) return 3'(P_N);
    else             return f.dst_host ? 3'(P_W) : 3'(P_L);
  endfunction

  always_comb
    for (int i = 0; i < 5; i++) begin
      in_ready[i] = (count[i] != 2'd2);
      route[i]    = route_of(fifo[i][rptr[i]], my_x, my_y);
    end

  // arbitration
  always_comb begin
    int idx;
    idx = 0;
    pop = '0;
    for (int o = 0; o < 5; o++) begin
      grant[o] = '0;
      if (locked[o]) grant[o][lock_in[o]] = 1'b1;
      else begin
        for (int n = 4; n >= 0; n--) begin
          idx = (int'(rr[o]) + n) % 5;
          if (count[idx] != 2'd0 && int'(route[idx]) == o) begin
            grant[o]      = '0;
            grant[o][idx] = 1'b1;
          end
        end
      end
      out_valid[o] = |grant[o];
      out_flit[o]  = '0;
      for (int i = 0; i < 5; i++) if (grant[o][i]) out_flit[o] = fifo[i][rptr[i]];
      if (out_ready[o]) pop = pop | grant[o];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 5; i++) begin
        rptr[i] <= 1'b0; wptr[i] <= 1'b0; count[i] <= 2'd0;
        rr[i] <= 3'd0; locked[i] <= 1'b0; lock_in[i] <= 3'd0;
      end
    end else begin
      for (int i = 0; i < 5; i++) begin
        logic push;
        push = in_valid[i] && in_ready[i];
        if (push) wptr[i] <= ~wptr[i];
        if (pop[i]) rptr[i] <= ~rptr[i];
        count[i] <= count[i] + 2'(push) - 2'(pop[i]);
      end
      for (int o = 0; o < 5; o++) begin
        if (out_valid[o] && out_ready[o]) begin
          locked[o] <= 1'b0;
          for (int i = 0; i < 5; i++) if (grant[o][i]) rr[o] <= 3'((i + 1) % 5);
        end else if (out_valid[o]) begin
          locked[o] <= 1'b1;
          for (int i = 0; i < 5; i++) if (grant[o][i]) lock_in[o] <= 3'(i);
        end
      end
    end
  end

  always_ff @(posedge clk)
    for (int i = 0; i < 5; i++)
      if (in_valid[i] && in_ready[i]) fifo[i][wptr[i]] <= in_flit[i];

  // Handshake rule: an offered flit stays offered, unchanged, until taken.
  for (genvar o = 0; o < 5; o++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
      out_valid[o] && !out_ready[o] |=> out_valid[o] && $stable(out_flit[o]));
  end
endmodule
