// tb_router: one router at column 2, row 3 (host row 3) with random traffic on
// all five inputs and random back-pressure on all five outputs. Each flit
// carries a unique id; the testbench routes it independently (X first, then Y,
// host flits to column 0 of the host row and out west) and checks that it
// leaves by the right port, exactly once, and in order with the other flits
// from the same input to the same output. It also checks that a flit moves
// through an idle router in one cycle and that a saturated path sustains one
// flit per cycle, and that input and output stalls both occurred.
module tb_router;
  import roma_pkg::*;

  localparam int MX = 2, MY = 3;
  logic clk = 0, rst_n = 0;
  logic  in_valid [5], in_ready [5], out_valid [5], out_ready [5];
  flit_t in_flit [5], out_flit [5];
  int checks = 0, failures = 0, cyc = 0;
  int sent = 0, recv = 0, in_stalls = 0, out_stalls = 0;
  int exp_q [5][5][$];       // [input][output] queue of ids
  int sent_cyc [int];

  router #(.HOST_Y(MY)) dut (.clk(clk), .rst_n(rst_n), .my_x(XW'(MX)), .my_y(YW'(MY)),
    .in_valid(in_valid), .in_flit(in_flit), .in_ready(in_ready),
    .out_valid(out_valid), .out_flit(out_flit), .out_ready(out_ready));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #400000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_port(input flit_t f);
    int tx, ty;
    tx = f.dst_host ? 0 : int'(f.dst_x);
    ty = f.dst_host ? MY : int'(f.dst_y);
    if (tx > MX) return 3;
    if (tx < MX) return 4;
    if (ty > MY) return 2;
    if (ty < MY) return 1;
    return f.dst_host ? 4 : 0;
  endfunction

  function automatic flit_t rand_flit(input int id, input int src);
    flit_t f;
    f = '0;
    f.dst_x    = XW'($urandom % 5);
    f.dst_y    = YW'($urandom % 7);
    f.dst_host = ($urandom % 6 == 0);
    f.op       = OP_RESULT;
    f.a        = 16'(id);
    f.b        = 16'(src);
    f.data     = {64{$urandom}};
    return f;
  endfunction

  // monitor inputs and outputs at each rising edge
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < 5; i++) begin
      if (in_valid[i] && in_ready[i]) begin
        exp_q[i][ref_port(in_flit[i])].push_back(int'(in_flit[i].a));
        sent_cyc[int'(in_flit[i].a)] = cyc;
        sent++;
      end
      if (in_valid[i] && !in_ready[i]) in_stalls++;
    end
    for (int o = 0; o < 5; o++) begin
      if (out_valid[o] && !out_ready[o]) out_stalls++;
      if (out_valid[o] && out_ready[o]) begin
        int src, id;
        src = int'(out_flit[o].b);
        id  = int'(out_flit[o].a);
        checks++;
        if (src > 4 || exp_q[src][o].size() == 0) begin
          failures++; $display("flit %0d left port %0d unexpectedly", id, o);
        end else begin
          int e;
          e = exp_q[src][o].pop_front();
          if (e != id) begin failures++; $display("port %0d got id %0d expected %0d", o, id, e); end
        end
        recv++;
      end
    end
  end

  initial begin
    int id;
    flit_t f;
    id = 0;
    for (int i = 0; i < 5; i++) begin in_valid[i] = 0; in_flit[i] = '0; out_ready[i] = 1; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // 1) latency through an idle router: local -> east
    @(negedge clk);
    f = rand_flit(id, 0); f.dst_host = 0; f.dst_x = 4; f.dst_y = 1;
    in_valid[0] = 1; in_flit[0] = f; id++;
    @(negedge clk);
    in_valid[0] = 0;
    checks++;
    if (!out_valid[3]) begin failures++; $display("flit not at east output one cycle later"); end
    // 2) saturated stream west -> east, 20 flits, output always ready
    for (int n = 0; n < 20; n++) begin
      f = rand_flit(id, 4); f.dst_host = 0; f.dst_x = 4;
      in_valid[4] = 1; in_flit[4] = f; id++;
      @(negedge clk);
      checks++;
      if (!in_ready[4]) begin failures++; $display("stream stalled at flit %0d", n); end
    end
    in_valid[4] = 0;
    repeat (4) @(negedge clk);
    // 3) random traffic with random back-pressure
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < 5; i++) begin
        if (!in_valid[i] || in_ready[i]) begin     // previous flit taken (or none offered)
          if ($urandom % 3 != 0) begin in_valid[i] = 1; in_flit[i] = rand_flit(id, i); id++; end
          else in_valid[i] = 0;
        end
        out_ready[i] = ($urandom % 4 != 0);
      end
      @(posedge clk);
      #1;
    end
    for (int i = 0; i < 5; i++) begin out_ready[i] = 1; end
    @(negedge clk);
    for (int i = 0; i < 5; i++) if (in_ready[i]) in_valid[i] = 0;
    @(negedge clk);
    for (int i = 0; i < 5; i++) in_valid[i] = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (sent != recv) begin failures++; $display("sent %0d received %0d", sent, recv); end
    checks++;
    if (in_stalls == 0 || out_stalls == 0) begin
      failures++; $display("stalls not exercised: in %0d out %0d", in_stalls, out_stalls);
    end
    $display("router: %0d flits, %0d input stalls, %0d output stalls", recv, in_stalls, out_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
