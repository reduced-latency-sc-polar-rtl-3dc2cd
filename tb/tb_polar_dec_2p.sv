// tb_polar_dec_2p: end-to-end test of the 2-parallel look-ahead decoder at its
// default size (no parameter override). polar_dec_check offers 40 codeword
// pairs and checks every bit pair against a software SC decoder and the
// cycle counts. This testbench also counts how often each mechanism of the
// decoder was exercised and fails if one never was:
//   stage 1 of both slots on the shared PE array, the look-ahead candidate
//   u=1 being selected, an IGC unit combining stored and new partial sums,
//   a frozen bit overriding a negative LLR, a pair with an empty second slot,
//   a pair started back to back, a noiseless codeword.
module tb_polar_dec_2p;
  localparam int unsigned N = 8;
  localparam int unsigned Q = 8;

  logic                  clk, rst_n, in_valid, in_ready;
  logic [N-1:0]          frozen;
  logic [N-1:0][Q-1:0]   llr_in;
  logic                  out_valid, out_b_valid, out_last;
  logic [$clog2(N)-2:0]  out_idx;
  logic [1:0]            out_u_a, out_u_b;
  int                    checks, failures, n_single, n_b2b, n_noiseless;
  logic                  done;

  polar_dec_2p dut (
    .clk, .rst_n, .frozen, .in_valid, .in_ready, .llr_in,
    .out_valid, .out_b_valid, .out_idx, .out_u_a, .out_u_b, .out_last
  );

  polar_dec_check #(.N(N), .Q(Q), .NPAIRS(40)) chk (
    .clk, .rst_n, .frozen, .in_valid, .in_ready, .llr_in,
    .out_valid, .out_b_valid, .out_idx, .out_u_a, .out_u_b, .out_last,
    .checks, .failures, .n_single, .n_back2back(n_b2b), .n_noiseless, .done
  );

  int n_load_a, n_load_b, n_sel_u1, n_igc_combine, n_frozen_override;

  always @(posedge clk) begin
    if (rst_n) begin
      if (dut.load_a) n_load_a++;
      if (dut.load_b) n_load_b++;
      if (dut.run && dut.use_g && (|dut.beta_a[$clog2(N) - int'(dut.stage) + 1]))
        n_sel_u1++;
      if (|dut.beta_v_a[$clog2(N)-1:2]) n_igc_combine++;
      if (dut.leaf_act && dut.frz_odd && dut.pe_f[0][Q-1]) n_frozen_override++;
    end
  end

  task automatic need(input string what, input int n);
    checks++;
    $display("mechanism %-28s %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    n_load_a = 0; n_load_b = 0; n_sel_u1 = 0; n_igc_combine = 0; n_frozen_override = 0;
    repeat (2) @(posedge clk);   // let the checker initialise done
    wait (done === 1'b1);
    @(posedge clk);
    need("stage 1, slot A", n_load_a);
    need("stage 1, slot B", n_load_b);
    need("candidate u=1 selected", n_sel_u1);
    need("IGC combine (U_k, k>=2)", n_igc_combine);
    need("frozen bit overrides LLR", n_frozen_override);
    need("empty second slot", n_single);
    need("back-to-back pair", n_b2b);
    need("noiseless codeword", n_noiseless);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200 * N * 40) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
