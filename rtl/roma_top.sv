// roma_top: the ROMA accelerator array.
//
// ROMA keeps a whole quantized LLM on chip: the 2-bit base-model weights live
// in mask ROM (B-ROM) inside the L-Units, LoRA adapters and the KV cache live
// in SRAM inside the H-Units, and intermediate vectors live in the vector
// units' SRAM. The array is 2*HALF_ROWS+1 = 17 rows by COLS = 16 columns:
// rows 0..7 and 9..16 are matrix units (two 8 x 16 matrix arrays), row 8 is
// the 1 x 16 row of vector units between them. Every unit has a router and
// exchanges activations and results with its four neighbours (see router.sv
// for the packet format and routing, which are this design's own).
//
// The host reaches the array through one network port: the west side of the
// router at column 0 of the vector row. Flits from the host are routed to any
// unit; flits marked dst_host come back out of the same corner. Unused edge
// ports of the mesh are tied off (nothing enters, nothing may leave).
// Each unit learns its coordinates from straps; a matrix unit's ROM image is
// selected by tile_id = {row, column}.
//
// A typical operation: the host sends OP_LDOT flits with 128 FP16 activations
// to matrix units, the results return as OP_RESULT flits to a vector unit's
// scratch (rep_x/rep_y/rep_addr), vector operations combine them, and OP_VREAD
// returns a vector to the host. The control program that sequences a whole
// transformer layer is not part of this RTL.
module roma_top
  import roma_pkg::*;
#(
  parameter int unsigned HALF_ROWS = 8,
  parameter int unsigned COLS      = 16,
  parameter int unsigned N_LCELLS  = 16,
  parameter int unsigned L_DEPTH   = 16,
  parameter int unsigned H_DEPTH   = 4608,
  parameter int unsigned V_DEPTH   = 4096
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  host_in_valid,
  input  flit_t host_in_flit,
  output logic  host_in_ready,
  output logic  host_out_valid,
  output flit_t host_out_flit,
  input  logic  host_out_ready
);
  localparam int unsigned ROWS = 2 * HALF_ROWS + 1;
  localparam int unsigned VROW = HALF_ROWS;

  // router port signals, [row][col][port]; ports 0 L, 1 N, 2 S, 3 E, 4 W
  logic  ri_v [ROWS][COLS][5];
  flit_t ri_f [ROWS][COLS][5];
  logic  ri_r [ROWS][COLS][5];
  logic  ro_v [ROWS][COLS][5];
  flit_t ro_f [ROWS][COLS][5];
  logic  ro_r [ROWS][COLS][5];

  for (genvar y = 0; y < ROWS; y++) begin : g_row
    for (genvar x = 0; x < COLS; x++) begin : g_col
      router #(.HOST_Y(VROW)) u_router (
        .clk(clk), .rst_n(rst_n), .my_x(XW'(x)), .my_y(YW'(y)),
        .in_valid(ri_v[y][x]), .in_flit(ri_f[y][x]), .in_ready(ri_r[y][x]),
        .out_valid(ro_v[y][x]), .out_flit(ro_f[y][x]), .out_ready(ro_r[y][x]));

      // local unit
      if (y == VROW) begin : g_vu
        vector_unit #(.DEPTH(V_DEPTH)) u_vu (
          .clk(clk), .rst_n(rst_n),
          .in_valid(ro_v[y][x][0]), .in_flit(ro_f[y][x][0]), .in_ready(ro_r[y][x][0]),
          .out_valid(ri_v[y][x][0]), .out_flit(ri_f[y][x][0]), .out_ready(ri_r[y][x][0]));
      end else begin : g_mu
        matrix_unit #(.N_LCELLS(N_LCELLS), .L_DEPTH(L_DEPTH), .H_DEPTH(H_DEPTH)) u_mu (
          .clk(clk), .rst_n(rst_n), .tile_id({8'(y), 8'(x)}),
          .in_valid(ro_v[y][x][0]), .in_flit(ro_f[y][x][0]), .in_ready(ro_r[y][x][0]),
          .out_valid(ri_v[y][x][0]), .out_flit(ri_f[y][x][0]), .out_ready(ri_r[y][x][0]));
      end

      // north / south links
      if (y > 0) begin : g_n
        assign ri_v[y][x][1] = ro_v[y-1][x][2];
        assign ri_f[y][x][1] = ro_f[y-1][x][2];
        assign ro_r[y-1][x][2] = ri_r[y][x][1];
      end else begin : g_n_edge
        assign ri_v[y][x][1] = 1'b0;
        assign ri_f[y][x][1] = '0;
      end
      if (y == ROWS - 1) begin : g_s_edge
        assign ri_v[y][x][2] = 1'b0;
        assign ri_f[y][x][2] = '0;
        assign ro_r[y][x][2] = 1'b0;
      end else begin : g_s
        assign ri_v[y][x][2] = ro_v[y+1][x][1];
        assign ri_f[y][x][2] = ro_f[y+1][x][1];
        assign ro_r[y+1][x][1] = ri_r[y][x][2];
      end
      if (y == 0) begin : g_n_edge_r
        assign ro_r[y][x][1] = 1'b0;
      end

      // east / west links
      if (x < COLS - 1) begin : g_e
        assign ri_v[y][x][3] = ro_v[y][x+1][4];
        assign ri_f[y][x][3] = ro_f[y][x+1][4];
        assign ro_r[y][x+1][4] = ri_r[y][x][3];
      end else begin : g_e_edge
        assign ri_v[y][x][3] = 1'b0;
        assign ri_f[y][x][3] = '0;
        assign ro_r[y][x][3] = 1'b0;
      end
      if (x > 0) begin : g_w
        assign ri_v[y][x][4] = ro_v[y][x-1][3];
        assign ri_f[y][x][4] = ro_f[y][x-1][3];
        assign ro_r[y][x-1][3] = ri_r[y][x][4];
      end else if (y == VROW) begin : g_host
        assign ri_v[y][x][4]  = host_in_valid;
        assign ri_f[y][x][4]  = host_in_flit;
        assign host_in_ready  = ri_r[y][x][4];
        assign host_out_valid = ro_v[y][x][4];
        assign host_out_flit  = ro_f[y][x][4];
        assign ro_r[y][x][4]  = host_out_ready;
      end else begin : g_w_edge
        assign ri_v[y][x][4] = 1'b0;
        assign ri_f[y][x][4] = '0;
        assign ro_r[y][x][4] = 1'b0;
      end
    end
  end

  // Nothing may leave the mesh through a tied-off edge. These checks are
  // simulation-only. Their `disable iff (!rst_n)` is why lint reports rst_n as
  // used both synchronously and asynchronously. No flop samples rst_n
  // synchronously; in the logic it is only an asynchronous reset.
  for (genvar x = 0; x < COLS; x++) begin : g_edge_chk
    assert property (@(posedge clk) disable iff (!rst_n) !ro_v[0][x][1] && !ro_v[ROWS-1][x][2]);
  end
  for (genvar y = 0; y < ROWS; y++) begin : g_edge_chk_ew
    assert property (@(posedge clk) disable iff (!rst_n) !ro_v[y][COLS-1][3]);
    if (y != VROW) begin : g_w
      assert property (@(posedge clk) disable iff (!rst_n) !ro_v[y][0][4]);
    end
  end
endmodule
