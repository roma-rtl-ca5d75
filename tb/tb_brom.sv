// tb_brom: fills a B-ROM mask with random bits and reads every address, in a
// 274-bit-wide instance and a deeper 8-bit-wide one; each word read must equal
// the stored word (the block/candidate/tap structure must reproduce it).
module tb_brom;
  localparam int D1 = 16, W1 = 274, D2 = 64, W2 = 8;
  logic [3:0]    a1;
  logic [W1-1:0] m1 [D1];
  logic [W1-1:0] d1;
  logic [5:0]    a2;
  logic [W2-1:0] m2 [D2];
  logic [W2-1:0] d2;
  int checks = 0, failures = 0;

  brom #(.DEPTH(D1), .W(W1)) dut1 (.addr(a1), .mask(m1), .data(d1));
  brom #(.DEPTH(D2), .W(W2)) dut2 (.addr(a2), .mask(m2), .data(d2));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 4; r++) begin
      for (int i = 0; i < D1; i++) for (int j = 0; j < W1; j++) m1[i][j] = 1'($urandom);
      for (int i = 0; i < D2; i++) m2[i] = 8'($urandom);
      for (int i = 0; i < D1; i++) begin
        a1 = 4'(i);
        #1 checks++;
        if (d1 !== m1[i]) begin failures++; $display("w274 addr %0d mismatch", i); end
      end
      for (int i = 0; i < D2; i++) begin
        a2 = 6'(i);
        #1 checks++;
        if (d2 !== m2[i]) begin failures++; $display("w8 addr %0d got %h exp %h", i, d2, m2[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
