// tb_llr_store: the per-codeword LLR banks for N = 8 (default) and N = 32.
// Random stage results are written with random enables; a model of the banks
// kept here is used to predict the operands for every stage 2..log2N, for
// left children (min-sum values) and right children (candidates selected by
// random partial sums from the IGC unit of the matching size): PE p must get
// a[p] on op_in2 and a[p + M/2] on op_in1, unused operands 0.
module tb_llr_store;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int QW = 8;

  // N = 8
  logic             we8, ug8;
  logic [1:0]       ws8, rs8;
  logic [3:0][QW-1:0] f8, g08, g18;
  logic [3:0]       b8 [1:2];
  logic [1:0][QW-1:0] o18, o28;
  // N = 32
  logic             we32, ug32;
  logic [2:0]       ws32, rs32;
  logic [15:0][QW-1:0] f32, g032, g132;
  logic [15:0]      b32 [1:4];
  logic [7:0][QW-1:0] o132, o232;

  llr_store dut8 (.clk, .wr_en(we8), .wr_stage(ws8), .pe_f(f8), .pe_g0(g08), .pe_g1(g18),
                  .rd_stage(rs8), .rd_use_g(ug8), .beta(b8), .op_in1(o18), .op_in2(o28));
  llr_store #(.N(32)) dut32 (.clk, .wr_en(we32), .wr_stage(ws32), .pe_f(f32), .pe_g0(g032),
                  .pe_g1(g132), .rd_stage(rs32), .rd_use_g(ug32), .beta(b32),
                  .op_in1(o132), .op_in2(o232));

  logic [QW-1:0] mf [2][5][16], mg0 [2][5][16], mg1 [2][5][16];   // [inst][stage][entry]
  bit            written [2][5];

  task automatic step(input int inst);
    int n, l;
    n = inst ? 32 : 8;
    l = $clog2(n);
    // random write
    @(negedge clk);
    if (inst == 0) begin
      we8 = 1'($urandom); ws8 = 2'(1 + $urandom % (l - 1));
      for (int i = 0; i < 4; i++) begin f8[i] = 8'($urandom); g08[i] = 8'($urandom); g18[i] = 8'($urandom); end
    end else begin
      we32 = 1'($urandom); ws32 = 3'(1 + $urandom % (l - 1));
      for (int i = 0; i < 16; i++) begin f32[i] = 8'($urandom); g032[i] = 8'($urandom); g132[i] = 8'($urandom); end
    end
    @(posedge clk);
    if (inst == 0 && we8) begin
      written[0][ws8] = 1;
      for (int i = 0; i < (n >> ws8); i++) begin mf[0][ws8][i] = f8[i]; mg0[0][ws8][i] = g08[i]; mg1[0][ws8][i] = g18[i]; end
    end
    if (inst == 1 && we32) begin
      written[1][ws32] = 1;
      for (int i = 0; i < (n >> ws32); i++) begin mf[1][ws32][i] = f32[i]; mg0[1][ws32][i] = g032[i]; mg1[1][ws32][i] = g132[i]; end
    end
    @(negedge clk);
    we8 = 1'b0; we32 = 1'b0;
    // read every stage, both kinds
    for (int s = 2; s <= l; s++) begin
      for (int g = 0; g < 2; g++) begin
        int m;
        logic [QW-1:0] a [16];
        logic [15:0]   bt;
        m = n >> (s - 1);
        bt = 16'($urandom);
        if (inst == 0) begin
          rs8 = 2'(s); ug8 = 1'(g);
          for (int k = 1; k <= 2; k++) b8[k] = 4'($urandom);
          b8[l - (s - 1)] = bt[3:0];
        end else begin
          rs32 = 3'(s); ug32 = 1'(g);
          for (int k = 1; k <= 4; k++) b32[k] = 16'($urandom);
          b32[l - (s - 1)] = bt;
        end
        #1;
        if (!written[inst][s-1]) continue;
        for (int j = 0; j < m; j++)
          a[j] = (g == 0) ? mf[inst][s-1][j] : (bt[j] ? mg1[inst][s-1][j] : mg0[inst][s-1][j]);
        for (int p = 0; p < n / 4; p++) begin
          logic [QW-1:0] e1, e2, r1, r2;
          e2 = (p < m / 2) ? a[p] : '0;
          e1 = (p < m / 2) ? a[p + m/2] : '0;
          r1 = inst ? o132[p] : o18[p];
          r2 = inst ? o232[p] : o28[p];
          checks += 2;
          if (r1 !== e1 || r2 !== e2) begin
            failures++;
            $display("FAIL N=%0d stage %0d use_g %0d PE %0d: %0d/%0d expected %0d/%0d",
                     n, s, g, p, r1, r2, e1, e2);
          end
        end
      end
    end
  endtask

  initial begin
    we8 = 0; we32 = 0; ug8 = 0; ug32 = 0; ws8 = 1; ws32 = 1; rs8 = 2; rs32 = 2;
    f8 = '0; g08 = '0; g18 = '0; f32 = '0; g032 = '0; g132 = '0;
    b8[1] = '0; b8[2] = '0;
    for (int k = 1; k <= 4; k++) b32[k] = '0;
    for (int i = 0; i < 2; i++) for (int s = 0; s < 5; s++) written[i][s] = 0;
    for (int r = 0; r < 300; r++) begin
      step(0);
      step(1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
