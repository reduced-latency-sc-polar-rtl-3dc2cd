// polar_dec_check: stimulus and scoreboard for polar_dec_2p, shared by the
// end-to-end testbenches of different code lengths.
// It makes the clock and reset, offers codeword pairs through the valid/ready
// handshake and checks every decided bit pair against a software SC decoder
// written here from the textbook recursion (min-sum for the upper branch,
// (-1)^u*a + b for the lower one, Q-bit wrap-around arithmetic, frozen bits 0),
// plus, for noiseless codewords, against the transmitted bits themselves.
// It also checks the timing: first bit pair in cycle log2(N)+1, last pair in
// cycle N after the first codeword was taken, in_ready back in cycle N+1.
// Pair kinds exercised: noiseless and random LLRs, full pairs and pairs whose
// second slot is empty, new pairs offered back to back and after a gap, a new
// random frozen set per pair.
// When all NPAIRS pairs are checked it raises done; checks/failures and the
// event counters are outputs so that the enclosing testbench prints the result.
module polar_dec_check #(
  parameter int unsigned N      = 8,
  parameter int unsigned Q      = 8,
  parameter int unsigned NPAIRS = 40
) (
  output logic                  clk,
  output logic                  rst_n,
  output logic [N-1:0]          frozen,
  output logic                  in_valid,
  input  logic                  in_ready,
  output logic [N-1:0][Q-1:0]   llr_in,
  input  logic                  out_valid,
  input  logic                  out_b_valid,
  input  logic [$clog2(N)-2:0]  out_idx,
  input  logic [1:0]            out_u_a,
  input  logic [1:0]            out_u_b,
  input  logic                  out_last,
  output int                    checks,
  output int                    failures,
  output int                    n_single,
  output int                    n_back2back,
  output int                    n_noiseless,
  output logic                  done
);
  localparam int unsigned L = $clog2(N);
  // largest channel LLR magnitude for which no sum can wrap
  localparam int AMAX = ((1 << (Q - 1)) - 1) / N;
  localparam int A    = (AMAX > 0) ? AMAX : 1;

  // ------------------------------------------------------------ reference
  function automatic int wrapq(input int v);
    logic [Q-1:0] t;
    t = Q'(v);
    return int'($signed(t));
  endfunction

  function automatic int minsum(input int a, input int b);
    int ma, mb, m;
    ma = (a < 0) ? -a : a;
    mb = (b < 0) ? -b : b;
    m  = (ma < mb) ? ma : mb;
    return wrapq(((a < 0) != (b < 0)) ? -m : m);
  endfunction

  // x = u * F^(xn), F = [1 0; 1 1], natural order
  function automatic logic [N-1:0] encode(input logic [N-1:0] u);
    logic [N-1:0] x;
    x = u;
    for (int h = 1; h < N; h = h * 2)
      for (int j = 0; j < N; j++)
        if ((j & h) == 0) x[j] = x[j] ^ x[j + h];
    return x;
  endfunction

  // partial sums of the decided bits u[lo .. lo+m-1]
  function automatic logic [N-1:0] encode_range(input logic [N-1:0] u, input int lo,
                                                input int m);
    logic [N-1:0] x;
    x = '0;
    for (int j = 0; j < m; j++) x[j] = u[lo + j];
    for (int h = 1; h < m; h = h * 2)
      for (int j = 0; j < m; j++)
        if ((j & h) == 0) x[j] = x[j] ^ x[j + h];
    return x;
  endfunction

  int alpha [L+1][N];

  // successive-cancellation decoder, one bit at a time
  function automatic logic [N-1:0] sc_ref(input logic [N-1:0][Q-1:0] llr,
                                          input logic [N-1:0] frz);
    logic [N-1:0] u, beta;
    int dstart, m, k;
    u = '0;
    for (int j = 0; j < N; j++) alpha[0][j] = int'($signed(llr[j]));
    for (int i = 0; i < N; i++) begin
      if (i == 0) dstart = 1;
      else begin
        int tz;
        tz = 0;
        while (((i >> tz) & 1) == 0) tz++;
        dstart = L - tz;
      end
      for (int d = dstart; d <= L; d++) begin
        m = N >> d;                 // size of the node at depth d
        k = i >> (L - d);           // its index at that depth
        if ((k % 2) == 0) begin
          for (int j = 0; j < m; j++)
            alpha[d][j] = minsum(alpha[d-1][j], alpha[d-1][j + m]);
        end else begin
          beta = encode_range(u, (k - 1) * m, m);
          for (int j = 0; j < m; j++)
            alpha[d][j] = wrapq(alpha[d-1][j + m] +
                                (beta[j] ? -alpha[d-1][j] : alpha[d-1][j]));
        end
      end
      u[i] = frz[i] ? 1'b0 : (alpha[L][0] < 0);
    end
    return u;
  endfunction

  // ------------------------------------------------------------ clock, reset
  int cyc;
  initial begin
    clk = 1'b0;
    forever #5 clk = ~clk;
  end
  always @(posedge clk) cyc <= cyc + 1;

  // ------------------------------------------------------------ stimulus
  logic [N-1:0]          exp_a, exp_b;
  logic                  exp_b_valid;
  logic [N-1:0][Q-1:0]   llr_a, llr_b;
  logic [N-1:0]          frz_next;
  int                    pairs_done;

  task automatic make_codeword(input bit noiseless, output logic [N-1:0][Q-1:0] llr,
                               output logic [N-1:0] expect_u);
    logic [N-1:0] u, x;
    for (int j = 0; j < N; j++) u[j] = frz_next[j] ? 1'b0 : 1'($urandom);
    x = encode(u);
    for (int j = 0; j < N; j++) begin
      if (noiseless)
        llr[j] = x[j] ? Q'(-A) : Q'(A);
      else
        llr[j] = Q'($urandom);
    end
    expect_u = sc_ref(llr, frz_next);
    if (noiseless) begin
      checks++;
      if (expect_u !== u) begin
        failures++;
        $display("FAIL reference model does not decode a noiseless codeword");
      end
      n_noiseless++;
    end
  endtask

  initial begin
    checks = 0; failures = 0; n_single = 0; n_back2back = 0; n_noiseless = 0;
    done = 1'b0; pairs_done = 0; cyc = 0;
    rst_n = 1'b0; in_valid = 1'b0; llr_in = '0; frozen = '0;
    exp_a = '0; exp_b = '0; exp_b_valid = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int p = 0; p < NPAIRS; p++) begin
      bit single, gap, noisy_a, noisy_b;
      single  = (p % 5 == 3);
      gap     = (p % 3 == 2);
      noisy_a = (p % 2 == 1);
      noisy_b = (p % 4 >= 2);
      for (int j = 0; j < N; j++) frz_next[j] = ($urandom % 4) == 0;
      // a pair may only start once the previous one has left the decoder
      if (gap) repeat (2 + ($urandom % 3)) @(negedge clk);
      while (!in_ready) @(negedge clk);
      make_codeword(!noisy_a, llr_a, exp_a);
      make_codeword(!noisy_b, llr_b, exp_b);
      exp_b_valid = !single;
      frozen   = frz_next;
      llr_in   = llr_a;
      in_valid = 1'b1;
      @(negedge clk);
      llr_in   = llr_b;
      in_valid = !single;
      @(negedge clk);
      in_valid = 1'b0;
      llr_in   = '0;
      // the next pair may be offered as soon as in_ready returns
      while (!in_ready) @(negedge clk);
      checks++;
      if (pairs_done != p + 1) begin
        failures++;
        $display("FAIL in_ready returned before the last bit pair of pair %0d", p);
      end
    end
    while (pairs_done < NPAIRS) @(negedge clk);
    done = 1'b1;
  end

  // ------------------------------------------------------------ scoreboard
  int   t_a;          // cycle in which codeword A was taken
  bit   take_b_next;
  int   next_idx;
  int   t_last;

  always @(posedge clk) begin
    if (rst_n) begin
      if (in_valid && in_ready && !take_b_next) begin
        if (t_last > 0) begin
          checks++;
          if (cyc - t_last < 1) failures++;
          if (cyc - t_last == 1) n_back2back++;
        end
        t_a <= cyc;
        take_b_next <= 1'b1;
        next_idx <= 0;
      end else begin
        take_b_next <= 1'b0;
        if (take_b_next && !in_valid) n_single++;
        if (take_b_next) begin
          checks++;
          if (!in_ready) begin
            failures++;
            $display("FAIL second slot not offered");
          end
        end
      end
      if (out_valid) begin
        int i;
        i = int'(out_idx);
        checks += 3;
        if (i != next_idx) begin
          failures++;
          $display("FAIL pair index %0d, expected %0d", i, next_idx);
        end
        if (i == 0 && cyc - t_a != L) begin
          failures++;
          $display("FAIL first bit pair in cycle %0d, expected %0d", cyc - t_a + 1, L + 1);
        end
        if (out_u_a !== {exp_a[2*i+1], exp_a[2*i]}) begin
          failures++;
          $display("FAIL codeword A pair %0d: got %b expected %b", i, out_u_a,
                   {exp_a[2*i+1], exp_a[2*i]});
        end
        if (out_b_valid !== exp_b_valid) begin
          failures++;
          $display("FAIL out_b_valid %b", out_b_valid);
        end
        if (exp_b_valid) begin
          checks++;
          if (out_u_b !== {exp_b[2*i+1], exp_b[2*i]}) begin
            failures++;
            $display("FAIL codeword B pair %0d: got %b expected %b", i, out_u_b,
                     {exp_b[2*i+1], exp_b[2*i]});
          end
        end
        next_idx <= i + 1;
        checks++;
        if (out_last !== (i == N/2 - 1)) begin
          failures++;
          $display("FAIL out_last at pair %0d", i);
        end
        if (out_last) begin
          checks++;
          if (cyc - t_a != N - 1) begin
            failures++;
            $display("FAIL last bit pair in cycle %0d, expected %0d", cyc - t_a + 1, N);
          end
          t_last <= cyc;
          pairs_done <= pairs_done + 1;
        end
      end
    end
  end

  initial begin
    t_a = 0; take_b_next = 1'b0; next_idx = 0; t_last = 0;
  end
endmodule
