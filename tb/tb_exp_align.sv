// tb_exp_align: random FP16 groups (normal, subnormal and mixed exponent
// ranges) through exp_align; value, vsum and max_exp are compared with a
// reference written from the alignment formulas.
module tb_exp_align;
  import roma_pkg::*;
  import roma_tb_pkg::*;

  logic [2047:0]     act;
  logic signed [11:0] value [128];
  logic signed [18:0] vsum;
  logic [4:0]         max_exp;
  int checks = 0, failures = 0;

  exp_align dut (.act(act), .value(value), .vsum(vsum), .max_exp(max_exp));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int rv[128], rs, rm, lo, hi;
    for (int t = 0; t < 200; t++) begin
      case (t % 4)
        0: begin lo = 0;  hi = 30; end
        1: begin lo = 0;  hi = 2;  end      // subnormals dominate
        2: begin lo = 14; hi = 16; end
        default: begin lo = 5; hi = 25; end
      endcase
      for (int k = 0; k < 128; k++) act[k*16 +: 16] = rand_fp16(lo, hi);
      #1;
      ref_align(act, rv, rs, rm);
      checks++;
      if (int'(max_exp) != rm) begin failures++; $display("max_exp %0d exp %0d", max_exp, rm); end
      checks++;
      if (int'(vsum) != rs) begin failures++; $display("vsum %0d exp %0d", vsum, rs); end
      for (int k = 0; k < 128; k++) begin
        checks++;
        if (int'(value[k]) != rv[k]) begin
          failures++;
          if (failures < 10) $display("t%0d value[%0d] %0d exp %0d", t, k, value[k], rv[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
