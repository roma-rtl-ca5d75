// tb_matrix_unit: a matrix unit with 4 L-cells, 16-word B-ROMs and a 64-word
// H-Unit SRAM, driven through its router port. It checks L-Unit group dot
// products against the ROM-image reference, H-Unit writes, reads and
// multi-request FP16/FP8 dot products, that replies carry the reply address
// and destination, that each reply is offered at the second edge after its
// request, and that a stalled reply is held until the router takes it.
module tb_matrix_unit;
  import roma_pkg::*;
  import roma_tb_pkg::*;

  localparam int NC = 4, TILE = 300;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  flit_t in_flit, out_flit;
  int checks = 0, failures = 0, cyc = 0, acc_cyc = 0, held = 0;
  vec_t words [8];

  matrix_unit #(.N_LCELLS(NC), .L_DEPTH(16), .H_DEPTH(64)) dut (
    .clk(clk), .rst_n(rst_n), .tile_id(16'(TILE)), .in_valid(in_valid), .in_flit(in_flit),
    .in_ready(in_ready), .out_valid(out_valid), .out_flit(out_flit), .out_ready(out_ready));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n && in_valid && in_ready) acc_cyc = cyc;
  always @(posedge clk) if (rst_n && out_valid && !out_ready) held++;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input op_e op, input int addr, input int b, input vec_t d, input int raddr);
    @(negedge clk);
    in_flit = '0;
    in_flit.op = op; in_flit.addr = 16'(addr); in_flit.b = 16'(b); in_flit.data = d;
    in_flit.rep_x = 4'd5; in_flit.rep_y = 5'd8; in_flit.rep_addr = 16'(raddr);
    in_valid = 1;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic get_reply(output vec_t d, input int raddr, input string what);
    int first;
    first = -1;
    out_ready = ($urandom % 2 == 0);
    while (1) begin
      @(posedge clk);
      if (out_valid && first < 0) first = cyc;
      if (out_valid && out_ready) break;
      @(negedge clk);
      out_ready = ($urandom % 3 != 0);
    end
    d = out_flit.data;
    checks++;
    if (out_flit.op != OP_RESULT || out_flit.dst_x != 4'd5 || out_flit.dst_y != 5'd8 ||
        out_flit.dst_host || out_flit.addr != 16'(raddr)) begin
      failures++; $display("%s: bad reply header", what);
    end
    checks++;
    if (first - acc_cyc != 3) begin failures++; $display("%s: reply after %0d edges", what, first - acc_cyc); end
    @(negedge clk);
    out_ready = 1;
  endtask

  function automatic real fp8_real(input logic [7:0] q);
    real r;
    if (q[6:3] == 0) r = real'(q[2:0]) / 8.0 * pow2(-6);
    else             r = (1.0 + real'(q[2:0]) / 8.0) * pow2(int'(q[6:3]) - 7);
    return q[7] ? -r : r;
  endfunction

  initial begin
    vec_t a, d;
    int rv[128], rs, rm, ad;
    in_valid = 0; in_flit = '0; out_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // L-Unit group dot products
    for (int t = 0; t < 30; t++) begin
      for (int k = 0; k < 128; k++) a[k*16 +: 16] = rand_fp16(5, 25);
      ad = int'($urandom % 16);
      send(OP_LDOT, ad, 0, a, t);
      get_reply(d, t, "ldot");
      ref_align(a, rv, rs, rm);
      for (int c = 0; c < NC; c++) begin
        fp16_t e;
        e = ref_group(rv, rm, ref_rom_word(TILE, c, ad));
        checks++;
        if (d[c*16 +: 16] !== e) begin failures++; $display("ldot t%0d cell %0d %h exp %h", t, c, d[c*16 +: 16], e); end
      end
    end
    // H-Unit: write, read back
    for (int i = 0; i < 8; i++) begin
      for (int k = 0; k < 128; k++) words[i][k*16 +: 16] = rand_fp16(10, 20);
      if (i >= 4) for (int k = 0; k < 256; k++) if (words[i][k*8 +: 7] == 7'h7f) words[i][k*8] = 1'b0;
      send(OP_HWRITE, i, 0, words[i], 0);
    end
    for (int i = 0; i < 8; i++) begin
      send(OP_HREAD, i, 0, '0, 40 + i);
      get_reply(d, 40 + i, "hread");
      checks++;
      if (d !== words[i]) begin failures++; $display("hread %0d mismatch", i); end
    end
    // H-Unit dot products over 1..3 requests
    for (int t = 0; t < 12; t++) begin
      real acc; int len; logic fp8;
      len = 1 + t % 3; fp8 = t[0]; acc = 0.0;
      for (int r = 0; r < len; r++) begin
        int wa; logic half;
        wa = fp8 ? 4 + int'($urandom % 4) : int'($urandom % 4);
        half = 1'($urandom);
        for (int k = 0; k < 128; k++) a[k*16 +: 16] = rand_fp16(10, 20);
        for (int k = 0; k < 128; k++)
          acc += fp16_to_real(a[k*16 +: 16]) *
                 (fp8 ? fp8_real(words[wa][(half ? 1024 : 0) + k*8 +: 8]) : fp16_to_real(words[wa][k*16 +: 16]));
        send(OP_HDOT, wa, {half, fp8, (r == len - 1), (r == 0)}, a, 60 + t);
      end
      get_reply(d, 60 + t, "hdot");
      checks++;
      if (d[15:0] !== real_to_fp16(acc)) begin failures++; $display("hdot t%0d %h exp %h", t, d[15:0], real_to_fp16(acc)); end
    end
    checks++;
    if (held == 0) begin failures++; $display("reply back-pressure never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
