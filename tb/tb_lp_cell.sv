// tb_lp_cell: random aligned activations, vsum, max_exp, weights, zero point
// and scale into one low-precision compute cell; the FP16 result is compared
// with (sum value*w - vsum*z) * s * 2^(max_exp-25) computed in double precision
// (exact for these widths) and rounded to FP16.
module tb_lp_cell;
  import roma_pkg::*;
  import roma_tb_pkg::*;

  logic signed [11:0] value [128];
  logic signed [18:0] vsum;
  logic [4:0]         max_exp;
  logic [255:0]       w;
  logic [1:0]         z;
  logic [15:0]        s, res, expv;
  int checks = 0, failures = 0;

  lp_cell dut (.value(value), .vsum(vsum), .max_exp(max_exp), .w(w), .z(z), .s(s), .res(res));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint dot, acc;
    for (int t = 0; t < 2000; t++) begin
      for (int k = 0; k < 128; k++) value[k] = (t % 3 == 0) ? 12'($urandom % 64) - 12'sd32 : 12'($urandom);
      vsum    = (t % 5 == 0) ? 19'sd0 : 19'($urandom);
      max_exp = 5'($urandom);
      w       = {8{$urandom}};
      z       = 2'($urandom);
      s       = rand_fp16((t % 7 == 0) ? 0 : 1, 30);
      #1;
      dot = 0;
      for (int k = 0; k < 128; k++) dot += longint'(value[k]) * longint'(w[2*k +: 2]);
      acc  = dot - longint'(vsum) * longint'(z);
      expv = real_to_fp16(real'(acc) * fp16_to_real(s) * pow2(int'(max_exp) - 25));
      if (acc == 0) expv = {s[15], 15'd0};   // exact zero keeps the sign of the product
      checks++;
      if (res !== expv) begin
        failures++;
        if (failures < 10) $display("t%0d res %h exp %h", t, res, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
