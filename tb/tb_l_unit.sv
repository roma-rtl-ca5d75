// tb_l_unit: streams one activation group per cycle into an L-Unit with the
// default 16 cells and 16-word ROMs and checks every cell's FP16 result against
// the reference (ROM image hash, alignment and group formula), that results
// arrive exactly 2 cycles after the input, and that back-to-back groups keep a
// rate of one group per cycle.
module tb_l_unit;
  import roma_pkg::*;
  import roma_tb_pkg::*;

  localparam int NC = 16, TILE = 37, NT = 40;
  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid;
  vec_t act;
  logic [3:0] addr;
  fp16_t res [NC];
  int checks = 0, failures = 0;
  int cyc = 0;

  logic [2047:0] acts [NT];
  logic [3:0]    addrs [NT];
  int            sent_cyc [NT];
  int nin = 0, nout = 0;

  l_unit #(.N_CELLS(NC), .DEPTH(16)) dut (.clk(clk), .rst_n(rst_n), .tile_id(16'(TILE)),
    .in_valid(in_valid), .act(act), .addr(addr), .out_valid(out_valid), .res(res));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < NT; t++) begin
      for (int k = 0; k < 128; k++) acts[t][k*16 +: 16] = rand_fp16((t % 2) ? 0 : 10, 20);
      addrs[t] = 4'($urandom);
    end
    in_valid = 0; act = '0; addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int t = 0; t < NT; t++) begin
      in_valid <= 1; act <= acts[t]; addr <= addrs[t];
      @(posedge clk);
      if (t == 20) begin in_valid <= 0; repeat (3) @(posedge clk); end
    end
    in_valid <= 0;
    repeat (6) @(posedge clk);
    checks++;
    if (nout != NT) begin failures++; $display("got %0d results, expected %0d", nout, NT); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && in_valid) begin
    sent_cyc[nin] = cyc;
    nin++;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    int rv[128], rs, rm;
    ref_align(acts[nout], rv, rs, rm);
    checks++;
    if (cyc - sent_cyc[nout] != 2) begin
      failures++; $display("group %0d latency %0d", nout, cyc - sent_cyc[nout]);
    end
    for (int c = 0; c < NC; c++) begin
      fp16_t e;
      e = ref_group(rv, rm, ref_rom_word(TILE, c, int'(addrs[nout])));
      checks++;
      if (res[c] !== e) begin
        failures++;
        if (failures < 10) $display("group %0d cell %0d res %h exp %h", nout, c, res[c], e);
      end
    end
    nout++;
  end
endmodule
