// tb_roma_top: end-to-end test of the array at a reduced size (3 rows x 3
// columns: two matrix rows around one vector row, 4 L-cells per unit).
// Through the single host port it
//   1. sends L-Unit group dot products to every matrix unit, half of them
//      replying to the host and half storing their results in a vector
//      unit's scratch;
//   2. adds two stored result vectors in a vector unit and reads the sum back;
//   3. writes H-Unit words (FP16 and FP8) and runs accumulated dot products
//      over several requests in both formats;
//   4. holds the host output port not-ready at random so replies back up
//      through the mesh.
// Every reply is checked against the reference model. The testbench counts
// how often each mechanism happened (L dot, result store into a vector unit,
// vector add, H write, FP16 and FP8 H dot, multi-request accumulation,
// host back-pressure, input stall at the host port) and fails if one never did.
module tb_roma_top;
  import roma_pkg::*;
  import roma_tb_pkg::*;

  localparam int HR = 1, NCOL = 3, NC = 4, VROW = HR;
  logic clk = 0, rst_n = 0;
  logic  host_in_valid, host_in_ready, host_out_valid, host_out_ready;
  flit_t host_in_flit, host_out_flit;
  int checks = 0, failures = 0, cyc = 0;

  // mechanism counters
  int n_ldot = 0, n_store = 0, n_vadd = 0, n_hwrite = 0, n_hdot16 = 0, n_hdot8 = 0;
  int n_accum = 0, n_backpressure = 0, n_in_stall = 0;

  vec_t exp_rep [int];        // expected reply data by tag (rep_addr)
  int   got = 0, want = 0;
  logic bp_enable = 0;

  roma_top #(.HALF_ROWS(HR), .COLS(NCOL), .N_LCELLS(NC), .L_DEPTH(16), .H_DEPTH(64), .V_DEPTH(64)) dut (
    .clk(clk), .rst_n(rst_n),
    .host_in_valid(host_in_valid), .host_in_flit(host_in_flit), .host_in_ready(host_in_ready),
    .host_out_valid(host_out_valid), .host_out_flit(host_out_flit), .host_out_ready(host_out_ready));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #2000000;
    failures++;
    $display("watchdog: %0d of %0d replies", got, want);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // host receive side
  always @(negedge clk) host_out_ready <= bp_enable ? ($urandom % 3 == 0) : 1'b1;
  always @(posedge clk) if (rst_n) begin
    if (host_out_valid && !host_out_ready) n_backpressure++;
    if (host_in_valid && !host_in_ready) n_in_stall++;
    if (host_out_valid && host_out_ready) begin
      int tag;
      tag = int'(host_out_flit.addr);
      checks++;
      if (!exp_rep.exists(tag)) begin failures++; $display("unexpected reply tag %0d", tag); end
      else begin
        if (host_out_flit.data !== exp_rep[tag]) begin
          failures++; $display("reply %0d: lane0 %h exp %h", tag, host_out_flit.data[15:0], exp_rep[tag][15:0]);
        end
        exp_rep.delete(tag);
      end
      got++;
    end
  end

  task automatic send(input flit_t f);
    @(negedge clk);
    host_in_valid = 1; host_in_flit = f;
    @(posedge clk);
    while (!host_in_ready) @(posedge clk);
    @(negedge clk);
    host_in_valid = 0;
  endtask

  function automatic flit_t mk(input op_e op, input int x, input int y, input int addr);
    flit_t f;
    f = '0;
    f.op = op; f.dst_x = XW'(x); f.dst_y = YW'(y); f.addr = 16'(addr);
    f.rep_host = 1'b1;
    return f;
  endfunction

  function automatic vec_t ldot_ref(input vec_t a, input int x, input int y, input int ad);
    int rv[128], rs, rm;
    vec_t r;
    r = '0;
    ref_align(a, rv, rs, rm);
    for (int c = 0; c < NC; c++) r[c*16 +: 16] = ref_group(rv, rm, ref_rom_word(y * 256 + x, c, ad));
    return r;
  endfunction

  function automatic real fp8_real(input logic [7:0] q);
    real r;
    if (q[6:3] == 0) r = real'(q[2:0]) / 8.0 * pow2(-6);
    else             r = (1.0 + real'(q[2:0]) / 8.0) * pow2(int'(q[6:3]) - 7);
    return q[7] ? -r : r;
  endfunction

  task automatic wait_replies();
    int t;
    t = 0;
    while (got < want && t < 20000) begin @(posedge clk); t++; end
  endtask

  initial begin
    flit_t f;
    vec_t a, r0, r1, sum, words [4];
    int tag;
    host_in_valid = 0; host_in_flit = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    tag = 1;
    bp_enable = 1;
    // 1. L-Unit dot products on every matrix unit
    for (int y = 0; y < 2 * HR + 1; y++) for (int x = 0; x < NCOL; x++) if (y != VROW) begin
      for (int n = 0; n < 4; n++) begin
        int ad;
        for (int k = 0; k < 128; k++) a[k*16 +: 16] = rand_fp16(5, 25);
        ad = int'($urandom % 16);
        f = mk(OP_LDOT, x, y, ad); f.data = a; f.rep_addr = 16'(tag);
        exp_rep[tag] = ldot_ref(a, x, y, ad);
        want++; tag++; n_ldot++;
        send(f);
      end
    end
    // burst to one unit: its requests queue up in the mesh back to the host port
    for (int n = 0; n < 10; n++) begin
      for (int k = 0; k < 128; k++) a[k*16 +: 16] = rand_fp16(5, 25);
      f = mk(OP_LDOT, 0, 0, n); f.data = a; f.rep_addr = 16'(tag);
      exp_rep[tag] = ldot_ref(a, 0, 0, n);
      want++; tag++; n_ldot++;
      send(f);
    end
    wait_replies();
    bp_enable = 0;
    // 2. two results stored into vector unit (2, VROW), added there, read back
    for (int k = 0; k < 128; k++) a[k*16 +: 16] = rand_fp16(10, 15);
    f = mk(OP_LDOT, 0, 0, 3); f.data = a; f.rep_host = 0; f.rep_x = 2; f.rep_y = VROW; f.rep_addr = 16'd20;
    r0 = ldot_ref(a, 0, 0, 3); send(f); n_ldot++; n_store++;
    for (int k = 0; k < 128; k++) a[k*16 +: 16] = rand_fp16(10, 15);
    f = mk(OP_LDOT, 1, 2, 5); f.data = a; f.rep_host = 0; f.rep_x = 2; f.rep_y = VROW; f.rep_addr = 16'd21;
    r1 = ldot_ref(a, 1, 2, 5); send(f); n_ldot++; n_store++;
    repeat (40) @(posedge clk);
    f = mk(OP_VADD, 2, VROW, 22); f.a = 16'd20; f.b = 16'd21; send(f); n_vadd++;
    sum = '0;
    for (int k = 0; k < 128; k++)
      sum[k*16 +: 16] = real_to_fp16(fp16_to_real(r0[k*16 +: 16]) + fp16_to_real(r1[k*16 +: 16]));
    f = mk(OP_VREAD, 2, VROW, 22); f.rep_addr = 16'(tag); exp_rep[tag] = sum; want++; tag++;
    send(f);
    wait_replies();
    // 3. H-Unit on matrix unit (2, 2): write FP16 words 0,1 and FP8 words 2,3
    for (int i = 0; i < 4; i++) begin
      for (int k = 0; k < 128; k++) words[i][k*16 +: 16] = rand_fp16(10, 20);
      if (i >= 2) for (int k = 0; k < 256; k++) if (words[i][k*8 +: 7] == 7'h7f) words[i][k*8] = 1'b0;
      f = mk(OP_HWRITE, 2, 2, i); f.data = words[i]; send(f); n_hwrite++;
    end
    for (int t = 0; t < 6; t++) begin
      real acc; int len; logic fp8;
      len = 1 + t % 3; fp8 = t[0]; acc = 0.0;
      for (int r = 0; r < len; r++) begin
        int wa; logic half;
        wa = fp8 ? 2 + r % 2 : r % 2;
        half = 1'(r);
        for (int k = 0; k < 128; k++) a[k*16 +: 16] = rand_fp16(10, 20);
        for (int k = 0; k < 128; k++)
          acc += fp16_to_real(a[k*16 +: 16]) *
                 (fp8 ? fp8_real(words[wa][(half ? 1024 : 0) + k*8 +: 8]) : fp16_to_real(words[wa][k*16 +: 16]));
        f = mk(OP_HDOT, 2, 2, wa); f.data = a; f.b = {12'd0, half, fp8, (r == len - 1), (r == 0)};
        f.rep_addr = 16'(tag);
        send(f);
      end
      exp_rep[tag] = '0; exp_rep[tag][15:0] = real_to_fp16(acc); want++; tag++;
      if (fp8) n_hdot8++; else n_hdot16++;
      if (len > 1) n_accum++;
    end
    wait_replies();
    repeat (10) @(posedge clk);
    checks++;
    if (got != want || exp_rep.size() != 0) begin failures++; $display("replies: got %0d want %0d", got, want); end
    $display("mechanisms: ldot=%0d store=%0d vadd=%0d hwrite=%0d hdot16=%0d hdot8=%0d accum=%0d backpressure=%0d in_stall=%0d",
             n_ldot, n_store, n_vadd, n_hwrite, n_hdot16, n_hdot8, n_accum, n_backpressure, n_in_stall);
    begin
      int m [9];
      m = '{n_ldot, n_store, n_vadd, n_hwrite, n_hdot16, n_hdot8, n_accum, n_backpressure, n_in_stall};
      for (int i = 0; i < 9; i++) begin
        checks++;
        if (m[i] == 0) begin failures++; $display("mechanism %0d never happened", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
