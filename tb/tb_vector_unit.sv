// tb_vector_unit: stores random FP16 vectors into a small vector-unit scratch,
// runs every operation (add, multiply, max, sum and max reductions,
// permutation, result store) and reads the results back through VREAD
// replies, with the reply port stalled at random. Results are compared with a
// double-precision reference (exact for the exponent ranges used) rounded to
// FP16; the reply must be offered at the second edge after the request.
module tb_vector_unit;
  import roma_pkg::*;
  import roma_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  flit_t in_flit, out_flit;
  int checks = 0, failures = 0, cyc = 0, acc_cyc = 0;
  int held = 0;
  vec_t model [16];

  vector_unit #(.DEPTH(64)) dut (.*);

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

  task automatic send(input op_e op, input int addr, input int a, input int b, input vec_t d);
    @(negedge clk);
    in_flit = '0;
    in_flit.op = op; in_flit.addr = 16'(addr); in_flit.a = 16'(a); in_flit.b = 16'(b);
    in_flit.data = d; in_flit.rep_host = 1'b1; in_flit.rep_addr = 16'(addr + 100);
    in_valid = 1;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic read_check(input int addr, input vec_t e, input string what);
    int first;
    send(OP_VREAD, addr, 0, 0, '0);
    out_ready = ($urandom % 2 == 0);
    first = -1;
    while (1) begin
      @(posedge clk);
      if (out_valid && first < 0) first = cyc;
      if (out_valid && out_ready) break;
      @(negedge clk);
      out_ready = ($urandom % 3 != 0);
    end
    checks++;
    if (out_flit.data !== e || out_flit.op != OP_RESULT || !out_flit.dst_host || out_flit.addr != 16'(addr + 100)) begin
      failures++;
      $display("%s: scratch %0d lane0 %h exp %h", what, addr, out_flit.data[15:0], e[15:0]);
      for (int k = 0; k < 128; k++) if (out_flit.data[k*16 +: 16] !== e[k*16 +: 16]) begin
        $display("  lane %0d got %h exp %h", k, out_flit.data[k*16 +: 16], e[k*16 +: 16]); break; end
    end
    checks++;
    if (first - acc_cyc != 2) begin failures++; $display("%s: reply after %0d edges", what, first - acc_cyc); end
    @(negedge clk);
    out_ready = 1;
  endtask

  function automatic vec_t rvec();
    vec_t v;
    for (int k = 0; k < 128; k++) v[k*16 +: 16] = rand_fp16(8, 22);
    return v;
  endfunction

  initial begin
    vec_t e, p;
    in_valid = 0; in_flit = '0; out_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 6; r++) begin
      for (int i = 0; i < 4; i++) begin
        model[i] = rvec();
        send((i == 3) ? OP_RESULT : OP_VSTORE, i, 0, 0, model[i]);
      end
      for (int i = 0; i < 4; i++) read_check(i, model[i], "store");
      // add
      send(OP_VADD, 5, 0, 1, '0);
      for (int k = 0; k < 128; k++)
        e[k*16 +: 16] = real_to_fp16(fp16_to_real(model[0][k*16 +: 16]) + fp16_to_real(model[1][k*16 +: 16]));
      read_check(5, e, "add");
      // multiply
      send(OP_VMUL, 6, 1, 2, '0);
      for (int k = 0; k < 128; k++)
        e[k*16 +: 16] = real_to_fp16(fp16_to_real(model[1][k*16 +: 16]) * fp16_to_real(model[2][k*16 +: 16]));
      read_check(6, e, "mul");
      // max
      send(OP_VMAX, 7, 2, 3, '0);
      for (int k = 0; k < 128; k++)
        e[k*16 +: 16] = (fp16_to_real(model[3][k*16 +: 16]) > fp16_to_real(model[2][k*16 +: 16]))
                        ? model[3][k*16 +: 16] : model[2][k*16 +: 16];
      read_check(7, e, "max");
      // reduce sum
      send(OP_VRSUM, 8, 0, 0, '0);
      begin
        real s; s = 0.0;
        for (int k = 0; k < 128; k++) s += fp16_to_real(model[0][k*16 +: 16]);
        e = '0; e[15:0] = real_to_fp16(s);
      end
      read_check(8, e, "rsum");
      // reduce max
      send(OP_VRMAX, 9, 1, 0, '0);
      begin
        real m; int mi; m = fp16_to_real(model[1][15:0]); mi = 0;
        for (int k = 1; k < 128; k++) if (fp16_to_real(model[1][k*16 +: 16]) > m) begin
          m = fp16_to_real(model[1][k*16 +: 16]); mi = k; end
        e = '0; e[15:0] = model[1][mi*16 +: 16];
      end
      read_check(9, e, "rmax");
      // permutation
      for (int k = 0; k < 128; k++) p[k*16 +: 16] = 16'($urandom % 128);
      send(OP_VPERM, 10, 2, 0, p);
      for (int k = 0; k < 128; k++) e[k*16 +: 16] = model[2][int'(p[k*16 +: 7])*16 +: 16];
      read_check(10, e, "perm");
    end
    checks++;
    if (held == 0) begin failures++; $display("reply back-pressure never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
