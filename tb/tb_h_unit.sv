// tb_h_unit: writes FP16 (KV-cache style) and FP8 (LoRA style) words into a
// small H-Unit SRAM, reads them back, and runs single- and multi-request dot
// products in both formats, issuing one request per cycle. Every response is
// compared with a double-precision reference (exact for the exponent ranges
// used) rounded to FP16, and must arrive 2 cycles after its request.
module tb_h_unit;
  import roma_pkg::*;
  import roma_tb_pkg::*;

  localparam int D = 64;
  logic clk = 0, rst_n = 0;
  logic req_valid, resp_valid;
  logic [1:0] req_op;
  logic [5:0] req_addr;
  logic [3:0] req_flags;
  vec_t req_data, resp_data;
  int checks = 0, failures = 0, cyc = 0;

  vec_t words [D];
  // expected responses, in order
  vec_t exp_q [$];
  int   exp_cyc [$];
  real  acc;

  h_unit #(.DEPTH(D)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fp8_real(input logic [7:0] q);
    real r;
    if (q[6:3] == 0) r = real'(q[2:0]) / 8.0 * pow2(-6);
    else             r = (1.0 + real'(q[2:0]) / 8.0) * pow2(int'(q[6:3]) - 7);
    return q[7] ? -r : r;
  endfunction

  function automatic vec_t rand_vec(input int lo, input int hi);
    vec_t v;
    for (int k = 0; k < 128; k++) v[k*16 +: 16] = rand_fp16(lo, hi);
    return v;
  endfunction

  // drive one request during the low phase; it is accepted at the next rising edge
  task automatic issue(input logic [1:0] op, input int addr, input logic [3:0] fl, input vec_t d);
    @(negedge clk);
    req_valid = 1; req_op = op; req_addr = 6'(addr); req_flags = fl; req_data = d;
  endtask

  task automatic idle();
    @(negedge clk);
    req_valid = 0;
  endtask

  task automatic expect_resp(input vec_t v);
    exp_q.push_back(v);
    exp_cyc.push_back(cyc + 2);   // called in the low phase before the accepting edge
  endtask

  always @(posedge clk) if (rst_n && resp_valid) begin
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected response"); end
    else begin
      vec_t e; int ec;
      e = exp_q.pop_front(); ec = exp_cyc.pop_front();
      if (resp_data !== e) begin
        failures++; $display("resp %h exp %h", resp_data[15:0], e[15:0]);
      end
      checks++;
      if (cyc != ec) begin failures++; $display("latency: at %0d expected %0d", cyc, ec); end
    end
  end

  initial begin
    vec_t a;
    req_valid = 0; req_op = 0; req_addr = 0; req_flags = 0; req_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      if (i < 4) words[i] = rand_vec(10, 20);
      else for (int k = 0; k < 256; k++) begin
        logic [7:0] q;
        q = 8'($urandom);
        if (q[6:0] == 7'h7f) q[0] = 0;      // avoid the E4M3 NaN code
        words[i][k*8 +: 8] = q;
      end
      issue(2'd0, i, 4'd0, words[i]);
    end
    // read back, back to back
    for (int i = 0; i < 8; i++) begin
      issue(2'd2, i, 4'd0, '0);
      expect_resp(words[i]);
    end
    idle();
    // dot products: t = 0..39, each 1..3 requests long, mixing FP16 and FP8
    for (int t = 0; t < 40; t++) begin
      int len; logic fp8;
      len = 1 + t % 3;
      fp8 = t[0];
      acc = 0.0;
      for (int r = 0; r < len; r++) begin
        int wa; logic half; logic [3:0] fl;
        wa   = fp8 ? 4 + int'($urandom % 4) : int'($urandom % 4);
        half = 1'($urandom);
        a    = rand_vec(10, 20);
        for (int k = 0; k < 128; k++) begin
          real wv;
          wv = fp8 ? fp8_real(words[wa][(half ? 1024 : 0) + k*8 +: 8]) : fp16_to_real(words[wa][k*16 +: 16]);
          acc += fp16_to_real(a[k*16 +: 16]) * wv;
        end
        fl = {half, fp8, (r == len - 1), (r == 0)};
        issue(2'd1, wa, fl, a);
        if (r == len - 1) expect_resp({{(VEC_BITS-16){1'b0}}, real_to_fp16(acc)});
      end
      if (t % 5 == 0) idle();
    end
    idle();
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d responses missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
