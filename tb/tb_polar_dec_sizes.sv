// tb_polar_dec_sizes: the decoder at other code lengths, side by side:
//   N = 4    (Q = 8)  smallest legal size, stage 1 followed directly by the
//                     last stage;
//   N = 64   (Q = 10) an intermediate size;
//   N = 1024 (Q = 12) a practical code length; 12-bit LLRs keep noiseless
//                     codewords with channel LLRs of +-1 free of wrap-around.
// Each instance gets its own stimulus and scoreboard (polar_dec_check): pairs
// of noiseless and random codewords, full and with an empty second slot, back
// to back and after gaps, every bit pair compared with the software SC decoder
// and the latency of N cycles per pair checked. The test fails if an instance
// never saw an empty slot, a back-to-back pair or a noiseless codeword.
module tb_polar_dec_sizes;
  int checks, failures;

  `define POLAR_DUT(NN, QQ, PP, TAG)                                                  \
    logic                    clk_``TAG, rst_``TAG, iv_``TAG, rdy_``TAG;               \
    logic [NN-1:0]           frz_``TAG;                                               \
    logic [NN-1:0][QQ-1:0]   llr_``TAG;                                               \
    logic                    ov_``TAG, obv_``TAG, ol_``TAG, done_``TAG;               \
    logic [$clog2(NN)-2:0]   oi_``TAG;                                                \
    logic [1:0]              ua_``TAG, ub_``TAG;                                      \
    int                      c_``TAG, f_``TAG, s_``TAG, b_``TAG, n_``TAG;             \
    polar_dec_2p #(.N(NN), .Q(QQ)) dut_``TAG (                                        \
      .clk(clk_``TAG), .rst_n(rst_``TAG), .frozen(frz_``TAG), .in_valid(iv_``TAG),   \
      .in_ready(rdy_``TAG), .llr_in(llr_``TAG), .out_valid(ov_``TAG),                 \
      .out_b_valid(obv_``TAG), .out_idx(oi_``TAG), .out_u_a(ua_``TAG),                \
      .out_u_b(ub_``TAG), .out_last(ol_``TAG));                                       \
    polar_dec_check #(.N(NN), .Q(QQ), .NPAIRS(PP)) chk_``TAG (                         \
      .clk(clk_``TAG), .rst_n(rst_``TAG), .frozen(frz_``TAG), .in_valid(iv_``TAG),   \
      .in_ready(rdy_``TAG), .llr_in(llr_``TAG), .out_valid(ov_``TAG),                 \
      .out_b_valid(obv_``TAG), .out_idx(oi_``TAG), .out_u_a(ua_``TAG),                \
      .out_u_b(ub_``TAG), .out_last(ol_``TAG), .checks(c_``TAG), .failures(f_``TAG),  \
      .n_single(s_``TAG), .n_back2back(b_``TAG), .n_noiseless(n_``TAG),               \
      .done(done_``TAG));

  `POLAR_DUT(4, 8, 40, n4)
  `POLAR_DUT(64, 10, 12, n64)
  `POLAR_DUT(1024, 12, 6, n1k)

  task automatic need(input string what, input int n);
    checks++;
    $display("%-34s %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("FAIL never exercised: %s", what);
    end
  endtask

  initial begin
    checks = 0;
    failures = 0;
    #20;
    wait (done_n4 === 1'b1 && done_n64 === 1'b1 && done_n1k === 1'b1);
    #20;
    checks   += c_n4 + c_n64 + c_n1k;
    failures += f_n4 + f_n64 + f_n1k;
    $display("N=4    checks %0d failures %0d", c_n4, f_n4);
    $display("N=64   checks %0d failures %0d", c_n64, f_n64);
    $display("N=1024 checks %0d failures %0d", c_n1k, f_n1k);
    need("N=4 empty second slot", s_n4);
    need("N=4 back-to-back pair", b_n4);
    need("N=4 noiseless codeword", n_n4);
    need("N=64 empty second slot", s_n64);
    need("N=64 back-to-back pair", b_n64);
    need("N=64 noiseless codeword", n_n64);
    need("N=1024 empty second slot", s_n1k);
    need("N=1024 back-to-back pair", b_n1k);
    need("N=1024 noiseless codeword", n_n1k);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(10 * 200 * 1024 * 6);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
