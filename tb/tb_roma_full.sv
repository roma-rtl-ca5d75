// tb_roma_full: one pass through the full-size array with every parameter at
// its default (17 x 16 units, 16 L-cells per unit, full H-Unit and vector SRAMs).
// It sends an L-Unit group dot product to the farthest matrix unit (column 15,
// row 16) with the reply to the host, another from unit (0, 0) into the scratch
// of vector unit (15, 8) followed by a VREAD of that scratch word, and an
// H-Unit write plus FP16 dot product on unit (7, 3). All replies are checked
// against the reference model.
module tb_roma_full;
  import roma_pkg::*;
  import roma_tb_pkg::*;

  localparam int NC = 16;
  logic clk = 0, rst_n = 0;
  logic  host_in_valid, host_in_ready, host_out_valid, host_out_ready;
  flit_t host_in_flit, host_out_flit;
  int checks = 0, failures = 0, got = 0;
  vec_t exp_rep [int];

  roma_top dut (
    .clk(clk), .rst_n(rst_n),
    .host_in_valid(host_in_valid), .host_in_flit(host_in_flit), .host_in_ready(host_in_ready),
    .host_out_valid(host_out_valid), .host_out_flit(host_out_flit), .host_out_ready(host_out_ready));

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog: %0d replies", got);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && host_out_valid && host_out_ready) begin
    int tag;
    tag = int'(host_out_flit.addr);
    checks++;
    if (!exp_rep.exists(tag) || host_out_flit.data !== exp_rep[tag]) begin
      failures++; $display("reply %0d wrong: lane0 %h", tag, host_out_flit.data[15:0]);
    end else exp_rep.delete(tag);
    got++;
  end

  task automatic send(input flit_t f);
    @(negedge clk);
    host_in_valid = 1; host_in_flit = f;
    @(posedge clk);
    while (!host_in_ready) @(posedge clk);
    @(negedge clk);
    host_in_valid = 0;
  endtask

  function automatic vec_t ldot_ref(input vec_t a, input int x, input int y, input int ad);
    int rv[128], rs, rm;
    vec_t r;
    r = '0;
    ref_align(a, rv, rs, rm);
    for (int c = 0; c < NC; c++) r[c*16 +: 16] = ref_group(rv, rm, ref_rom_word(y * 256 + x, c, ad));
    return r;
  endfunction

  initial begin
    flit_t f;
    vec_t a, w;
    real acc;
    host_in_valid = 0; host_in_flit = '0; host_out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // far matrix unit, reply to host
    for (int k = 0; k < 128; k++) a[k*16 +: 16] = rand_fp16(5, 25);
    f = '0; f.op = OP_LDOT; f.dst_x = 15; f.dst_y = 16; f.addr = 9; f.data = a;
    f.rep_host = 1; f.rep_addr = 1; exp_rep[1] = ldot_ref(a, 15, 16, 9);
    send(f);
    // unit (0,0) into vector unit (15,8) scratch word 3, then read it
    for (int k = 0; k < 128; k++) a[k*16 +: 16] = rand_fp16(5, 25);
    f = '0; f.op = OP_LDOT; f.dst_x = 0; f.dst_y = 0; f.addr = 15; f.data = a;
    f.rep_x = 15; f.rep_y = 8; f.rep_addr = 3; exp_rep[2] = ldot_ref(a, 0, 0, 15);
    send(f);
    repeat (80) @(posedge clk);
    f = '0; f.op = OP_VREAD; f.dst_x = 15; f.dst_y = 8; f.addr = 3; f.rep_host = 1; f.rep_addr = 2;
    send(f);
    // H-Unit on (7,3): write word 4000, dot product
    for (int k = 0; k < 128; k++) begin w[k*16 +: 16] = rand_fp16(10, 20); a[k*16 +: 16] = rand_fp16(10, 20); end
    f = '0; f.op = OP_HWRITE; f.dst_x = 7; f.dst_y = 3; f.addr = 4000; f.data = w;
    send(f);
    acc = 0.0;
    for (int k = 0; k < 128; k++) acc += fp16_to_real(a[k*16 +: 16]) * fp16_to_real(w[k*16 +: 16]);
    f = '0; f.op = OP_HDOT; f.dst_x = 7; f.dst_y = 3; f.addr = 4000; f.data = a; f.b = 16'h3;
    f.rep_host = 1; f.rep_addr = 4; exp_rep[4] = '0; exp_rep[4][15:0] = real_to_fp16(acc);
    send(f);
    repeat (200) @(posedge clk);
    checks++;
    if (got != 3 || exp_rep.size() != 0) begin failures++; $display("got %0d of 3 replies", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
