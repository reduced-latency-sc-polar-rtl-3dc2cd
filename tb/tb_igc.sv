// tb_igc: the input generating circuit for N = 8 (default) and N = 32.
// Random decided bit pairs of a whole codeword are fed with random idle cycles
// in between. In the cycle after pair i, unit U_k must deliver exactly when the
// k-1 lowest bits of i are all 1 (a block of 2^k bits has just been decided),
// and then its 2^k outputs must equal the polar transform x = u*F^(xk) of
// that block, computed here by the butterfly x[j] ^= x[j+h]. A clear in the
// middle of a codeword must restart the circuit.
module tb_igc;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0;
  always #5 clk = ~clk;

  logic       v8, o8, e8, v32, o32, e32;
  logic [3:0]  beta8  [1:2];
  logic [2:1]  bv8;
  logic [15:0] beta32 [1:4];
  logic [4:1]  bv32;

  igc            dut8  (.clk, .rst_n, .clear, .u_valid(v8),  .u_odd(o8),  .u_even(e8),
                        .beta(beta8),  .beta_valid(bv8));
  igc #(.N(32))  dut32 (.clk, .rst_n, .clear, .u_valid(v32), .u_odd(o32), .u_even(e32),
                        .beta(beta32), .beta_valid(bv32));

  function automatic logic [31:0] xform(input logic [31:0] u, input int lo, input int m);
    logic [31:0] x;
    x = '0;
    for (int j = 0; j < m; j++) x[j] = u[lo + j];
    for (int h = 1; h < m; h = h * 2)
      for (int j = 0; j < m; j++)
        if ((j & h) == 0) x[j] = x[j] ^ x[j + h];
    return x;
  endfunction

  // run one codeword of length n through the instance of that size
  task automatic run_codeword(input int n, input int stop_at);
    logic [31:0] u;
    int nu;
    nu = $clog2(n) - 1;
    u = $urandom;
    for (int i = 0; i < n / 2; i++) begin
      if (i == stop_at) return;
      @(negedge clk);
      if (n == 8) begin v8 = 1'b1; o8 = u[2*i]; e8 = u[2*i+1]; end
      else        begin v32 = 1'b1; o32 = u[2*i]; e32 = u[2*i+1]; end
      @(negedge clk);
      v8 = 1'b0; v32 = 1'b0;
      for (int k = 1; k <= nu; k++) begin
        bit expv;
        logic [31:0] got, exp;
        expv = ((i + 1) % (1 << (k - 1))) == 0;
        checks++;
        if (((n == 8) ? bv8[k] : bv32[k]) !== expv) begin
          failures++;
          $display("FAIL N=%0d pair %0d unit %0d valid", n, i, k);
        end
        if (expv) begin
          got = (n == 8) ? 32'(beta8[k]) : 32'(beta32[k]);
          exp = xform(u, 2 * (i + 1) - (1 << k), 1 << k);
          checks++;
          if (got !== exp) begin
            failures++;
            $display("FAIL N=%0d pair %0d unit %0d: %h expected %h", n, i, k, got, exp);
          end
        end
      end
      repeat ($urandom % 3) begin
        @(negedge clk);
        checks++;
        if (bv8 !== '0 || bv32 !== '0) begin
          failures++;
          $display("FAIL output without a new pair");
        end
      end
    end
  endtask

  initial begin
    v8 = 0; o8 = 0; e8 = 0; v32 = 0; o32 = 0; e32 = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 30; r++) begin
      @(negedge clk); clear = 1'b1;
      @(negedge clk); clear = 1'b0;
      run_codeword(8, (r % 7 == 6) ? 1 : -1);
      run_codeword(32, (r % 5 == 4) ? 5 : -1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
