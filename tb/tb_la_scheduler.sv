// tb_la_scheduler: the controller for N = 8 (default) and N = 16.
// The stage sequence of one codeword is rebuilt here with the recursive
// look-ahead time-chart construction (TC = {stage i, TC}; TC = [TC, TC] for
// i = log2N down to 1, no duplication at i = 1) and compared with the stages
// the scheduler runs. For N = 8 the number of active merged PEs per cycle is
// compared with the table of the design: codeword 1: 4,-,2,1,1,2,1,1 and
// codeword 2: -,4,2,1,1,2,1,1. Also checked: use_g exactly after a last-stage
// cycle, bit-pair index, last in cycle N, in_ready back in cycle N+1, the
// second slot flag, and a new pair taken back to back.
module tb_la_scheduler;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       iv8, rdy8, la8, lb8, run8, g8, lf8, last8, bv8, clr8;
  logic [1:0] st8;
  logic [1:0] leaf8;
  logic       iv16, rdy16, la16, lb16, run16, g16, lf16, last16, bv16, clr16;
  logic [2:0] st16;
  logic [2:0] leaf16;

  la_scheduler u8 (.clk, .rst_n, .in_valid(iv8), .in_ready(rdy8), .load_a(la8), .load_b(lb8),
                   .run(run8), .stage(st8), .use_g(g8), .leaf_act(lf8), .leaf(leaf8),
                   .last(last8), .b_valid(bv8), .clear(clr8));
  la_scheduler #(.N(16)) u16 (.clk, .rst_n, .in_valid(iv16), .in_ready(rdy16), .load_a(la16),
                   .load_b(lb16), .run(run16), .stage(st16), .use_g(g16), .leaf_act(lf16),
                   .leaf(leaf16), .last(last16), .b_valid(bv16), .clear(clr16));

  int tc [$];
  task automatic build_tc(input int l);
    int t [$];
    tc = {};
    for (int i = l; i >= 1; i--) begin
      tc.push_front(i);
      if (i == 1) break;
      t = tc;
      foreach (t[j]) tc.push_back(t[j]);
    end
  endtask

  int table_c1 [8] = '{4, 0, 2, 1, 1, 2, 1, 1};
  int table_c2 [8] = '{0, 4, 2, 1, 1, 2, 1, 1};

  // one pair on the N=8 instance, checking every cycle; 'single' leaves slot B empty
  task automatic pair8(input bit single);
    int pes1, pes2, leafs, prev_leaf;
    build_tc(3);
    prev_leaf = 0;
    leafs = 0;
    for (int c = 1; c <= 8; c++) begin
      iv8 = (c == 1) || (c == 2 && !single);
      #1;
      pes1 = la8 ? 4 : (run8 ? (8 >> st8) : 0);
      pes2 = lb8 ? 4 : (run8 ? (8 >> st8) : 0);
      checks += 4;
      if (pes1 != table_c1[c-1]) begin failures++; $display("FAIL N=8 cycle %0d C1 PEs %0d", c, pes1); end
      if (pes2 != (single && c == 2 ? 0 : table_c2[c-1])) begin
        failures++; $display("FAIL N=8 cycle %0d C2 PEs %0d", c, pes2);
      end
      if (c == 1 || c >= 3) begin
        int exp_stage;
        exp_stage = (c == 1) ? tc[0] : tc[c-2];
        if (int'(st8) != exp_stage) begin failures++; $display("FAIL N=8 cycle %0d stage %0d", c, st8); end
      end
      if (run8 && (g8 !== (prev_leaf == 1))) begin failures++; $display("FAIL N=8 use_g cycle %0d", c); end
      if (last8 !== (c == 8)) begin failures++; $display("FAIL N=8 last cycle %0d", c); end
      if (lf8) begin
        checks++;
        if (int'(leaf8) != leafs) begin failures++; $display("FAIL N=8 leaf index"); end
        leafs++;
      end
      if (c >= 3) begin
        checks++;
        if (bv8 !== !single) begin failures++; $display("FAIL N=8 b_valid"); end
      end
      prev_leaf = lf8;
      @(negedge clk);
    end
    iv8 = 1'b0;
    #1;
    checks += 2;
    if (!rdy8) begin failures++; $display("FAIL N=8 in_ready not back in cycle N+1"); end
    if (leafs != 4) begin failures++; $display("FAIL N=8 %0d bit pairs", leafs); end
  endtask

  task automatic pair16();
    int prev_leaf, leafs;
    build_tc(4);
    prev_leaf = 0;
    leafs = 0;
    for (int c = 1; c <= 16; c++) begin
      iv16 = (c <= 2);
      #1;
      checks++;
      if (c == 1 || c >= 3) begin
        if (int'(st16) != ((c == 1) ? tc[0] : tc[c-2])) begin
          failures++; $display("FAIL N=16 cycle %0d stage %0d", c, st16);
        end
      end
      if (c == 2 && !lb16) begin failures++; $display("FAIL N=16 load_b"); end
      if (run16 && (g16 !== (prev_leaf == 1))) begin failures++; $display("FAIL N=16 use_g"); end
      if (lf16) begin
        checks++;
        if (int'(leaf16) != leafs) begin failures++; $display("FAIL N=16 leaf"); end
        leafs++;
      end
      checks++;
      if (last16 !== (c == 16)) begin failures++; $display("FAIL N=16 last %0d", c); end
      prev_leaf = lf16;
      @(negedge clk);
    end
    iv16 = 1'b0;
    checks++;
    if (leafs != 8) begin failures++; $display("FAIL N=16 %0d pairs", leafs); end
  endtask

  initial begin
    iv8 = 0; iv16 = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // idle: nothing runs without in_valid
    checks++;
    if (la8 || run8 || !rdy8) begin failures++; $display("FAIL idle"); end
    pair8(1'b0);
    pair8(1'b0);           // back to back
    @(negedge clk);
    pair8(1'b1);           // second slot empty
    pair16();
    pair16();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
