// tb_fused_cell: a fused cell with a random 16-word ROM image, fed through a
// real exp_align from random FP16 groups; each result is compared with the
// reference alignment and group formula applied to the stored word.
module tb_fused_cell;
  import roma_pkg::*;
  import roma_tb_pkg::*;

  logic [2047:0]      act;
  logic signed [11:0] value [128];
  logic signed [18:0] vsum;
  logic [4:0]         max_exp;
  logic [3:0]         addr;
  logic [273:0]       mask [16];
  logic [15:0]        res, expv;
  int checks = 0, failures = 0;

  exp_align u_al (.act(act), .value(value), .vsum(vsum), .max_exp(max_exp));
  fused_cell #(.DEPTH(16)) dut (.addr(addr), .mask(mask), .value(value), .vsum(vsum),
                                .max_exp(max_exp), .res(res));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int rv[128], rs, rm;
    for (int i = 0; i < 16; i++) mask[i] = ref_rom_word(7, 3, i);
    for (int t = 0; t < 300; t++) begin
      for (int k = 0; k < 128; k++) act[k*16 +: 16] = rand_fp16(8, 20);
      addr = 4'($urandom);
      #1;
      ref_align(act, rv, rs, rm);
      expv = ref_group(rv, rm, mask[addr]);
      checks++;
      if (res !== expv) begin
        failures++;
        if (failures < 10) $display("t%0d addr %0d res %h exp %h", t, addr, res, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
