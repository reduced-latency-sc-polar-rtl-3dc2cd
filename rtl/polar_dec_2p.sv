// polar_dec_2p: 2-parallel look-ahead min-sum successive-cancellation (SC)
// polar decoder for codes of length N = 2^L.
//
// Idea. Conventional SC decoding needs 2(N-1) cycles because the update of
// the second LLR of each pair, (-1)^u * a + b, waits for the decision u. Here
// each merged PE computes the min-sum value and BOTH candidates (u = 0 and
// u = 1) in the same cycle; the candidate is chosen later by a multiplexer
// once the partial sum u is known. This halves one codeword to N-1 cycles.
// Two codewords are interleaved on N/2 merged PEs, so a pair of codewords is
// decoded every N cycles.
//
// Blocks: N/2 merged_pe (shared), la_scheduler, and for each of the two
// codeword slots an llr_store (intermediate LLRs and candidate muxes), a
// leaf_decide (bit-pair decision at the last stage) and an igc (partial sums).
//
// PE use per cycle (see la_scheduler): stage 1 of slot A on all PEs (cycle 1),
// stage 1 of slot B on all PEs (cycle 2), then stage s of both slots with
// slot A on PEs 0..N/2^s-1 and slot B on PEs N/4..N/4+N/2^s-1.
// Stage 1 pairs llr_in[p] (first half) with llr_in[p+N/2] (second half); the
// code is x = u * F^(xn) with F = [1 0; 1 1] in natural index order (no
// bit-reversal), frozen bits are 0.
//
// Interface. in_valid/in_ready: llr_in (N two's-complement Q-bit LLRs, the
// log of P(y|0)/P(y|1)) is taken in a cycle where both are high; the first
// codeword of a pair in the idle state, the second in the next cycle.
// Outputs: while out_valid is high, out_u_a and out_u_b carry bits
// u(2i+1) ([0]) and u(2i+2) ([1]) (1-based) of both codewords, i = out_idx;
// out_b_valid tells whether slot B holds a codeword; out_last marks the last
// pair. Counting the cycle that takes the first codeword as cycle 1, the
// first pair appears in cycle L+1, the last in cycle N; in_ready returns in
// cycle N+1. frozen[i] = 1 marks bit u(i+1) as frozen; keep it stable
// during decoding.
//
// The look-ahead schedule, merged PE, IGC and the sharing of N/2 PEs by two
// codewords follow the paper; the PE-to-slot mapping for general N, the
// handshake, the register arrangement and Q are this design's choices.
module polar_dec_2p #(
  parameter int unsigned N = 8,
  parameter int unsigned Q = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [N-1:0]          frozen,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [N-1:0][Q-1:0]   llr_in,
  output logic                  out_valid,
  output logic                  out_b_valid,
  output logic [$clog2(N)-2:0]  out_idx,
  output logic [1:0]            out_u_a,
  output logic [1:0]            out_u_b,
  output logic                  out_last
);
  localparam int unsigned L  = $clog2(N);
  localparam int unsigned SW = $clog2(L + 1);
  localparam int unsigned H  = N / 4;       // first PE of slot B in run cycles

  if (N < 4 || (1 << L) != N) begin : g_bad_n
    $error("polar_dec_2p: N must be a power of two, at least 4");
  end

  // ---------------- control
  logic            load_a, load_b, run, use_g, leaf_act, last, b_valid, clear;
  logic [SW-1:0]   stage;
  logic [L-2:0]    leaf;

  la_scheduler #(.N(N)) u_sched (
    .clk, .rst_n, .in_valid, .in_ready,
    .load_a, .load_b, .run, .stage, .use_g, .leaf_act, .leaf, .last,
    .b_valid, .clear
  );

  // ---------------- shared merged PEs
  logic [N/2-1:0][Q-1:0] pe_in1, pe_in2, pe_f, pe_g0, pe_g1;
  logic [N/4-1:0][Q-1:0] op1_a, op2_a, op1_b, op2_b;

  always_comb begin
    pe_in1 = '0;
    pe_in2 = '0;
    if (load_a || load_b) begin
      for (int p = 0; p < N/2; p++) begin
        pe_in2[p] = llr_in[p];
        pe_in1[p] = llr_in[p + N/2];
      end
    end else if (run) begin
      for (int p = 0; p < H; p++) begin
        pe_in1[p]     = op1_a[p];
        pe_in2[p]     = op2_a[p];
        pe_in1[p + H] = op1_b[p];
        pe_in2[p + H] = op2_b[p];
      end
    end
  end

  for (genvar p = 0; p < N/2; p++) begin : g_pe
    merged_pe #(.Q(Q)) u_pe (
      .in1(pe_in1[p]), .in2(pe_in2[p]),
      .out1(pe_f[p]), .out2(pe_g0[p]), .out3(pe_g1[p])
    );
  end

  // PE outputs as seen by slot B: all PEs in its stage-1 cycle, PEs H.. later
  logic [N/2-1:0][Q-1:0] b_f, b_g0, b_g1;
  always_comb begin
    b_f  = '0;
    b_g0 = '0;
    b_g1 = '0;
    for (int i = 0; i < N/2; i++) begin
      if (load_b) begin
        b_f[i]  = pe_f[i];
        b_g0[i] = pe_g0[i];
        b_g1[i] = pe_g1[i];
      end else if (i < H) begin
        b_f[i]  = pe_f[i + H];
        b_g0[i] = pe_g0[i + H];
        b_g1[i] = pe_g1[i + H];
      end
    end
  end

  // ---------------- per-slot stores, decisions and partial sums
  logic            wr_a, wr_b;
  logic [SW-1:0]   wr_stage;
  logic [N/2-1:0]  beta_a [1:L-1];
  logic [N/2-1:0]  beta_b [1:L-1];
  logic [L-1:1]    beta_v_a, beta_v_b;
  logic            uo_a, ue_a, uo_b, ue_b;
  logic            frz_odd, frz_even;

  always_comb begin
    wr_a     = load_a || (run && !leaf_act);
    wr_b     = load_b || (run && !leaf_act);
    wr_stage = run ? stage : SW'(1);
    frz_odd  = frozen[{leaf, 1'b0}];
    frz_even = frozen[{leaf, 1'b1}];
  end

  llr_store #(.N(N), .Q(Q)) u_store_a (
    .clk, .wr_en(wr_a), .wr_stage, .pe_f(pe_f), .pe_g0(pe_g0), .pe_g1(pe_g1),
    .rd_stage(stage), .rd_use_g(use_g), .beta(beta_a),
    .op_in1(op1_a), .op_in2(op2_a)
  );
  llr_store #(.N(N), .Q(Q)) u_store_b (
    .clk, .wr_en(wr_b), .wr_stage, .pe_f(b_f), .pe_g0(b_g0), .pe_g1(b_g1),
    .rd_stage(stage), .rd_use_g(use_g), .beta(beta_b),
    .op_in1(op1_b), .op_in2(op2_b)
  );

  leaf_decide #(.Q(Q)) u_dec_a (
    .f(pe_f[0]), .g0(pe_g0[0]), .g1(pe_g1[0]),
    .frz_odd, .frz_even, .u_odd(uo_a), .u_even(ue_a)
  );
  leaf_decide #(.Q(Q)) u_dec_b (
    .f(pe_f[H]), .g0(pe_g0[H]), .g1(pe_g1[H]),
    .frz_odd, .frz_even, .u_odd(uo_b), .u_even(ue_b)
  );

  igc #(.N(N)) u_igc_a (
    .clk, .rst_n, .clear, .u_valid(leaf_act), .u_odd(uo_a), .u_even(ue_a),
    .beta(beta_a), .beta_valid(beta_v_a)
  );
  igc #(.N(N)) u_igc_b (
    .clk, .rst_n, .clear, .u_valid(leaf_act), .u_odd(uo_b), .u_even(ue_b),
    .beta(beta_b), .beta_valid(beta_v_b)
  );

  // ---------------- outputs
  always_comb begin
    out_valid   = leaf_act;
    out_b_valid = b_valid;
    out_idx     = leaf;
    out_u_a     = {ue_a, uo_a};
    out_u_b     = {ue_b, uo_b};
    out_last    = last;
  end

  // a right child is fed only when the IGC unit it needs has just delivered
  a_beta_ready: assert property (@(posedge clk) disable iff (!rst_n)
    (run && use_g) |-> beta_v_a[L - int'(stage) + 1] && beta_v_b[L - int'(stage) + 1]);
endmodule
