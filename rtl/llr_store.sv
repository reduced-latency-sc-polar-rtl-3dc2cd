// llr_store: intermediate LLR registers of one codeword slot, with the
// candidate-select multiplexers in front of the next stage.
// For every stage t = 1 .. log2(N)-1 it keeps the N/2^t results of the merged
// PEs of that stage: the min-sum values f and both look-ahead candidates g0
// (u = 0) and g1 (u = 1). The last stage needs no bank; its outputs are decided
// at once.
// Write side: with wr_en, the bank of stage wr_stage takes pe_f/pe_g0/pe_g1
// (entry i from PE i of this slot).
// Read side (combinational): for the stage rd_stage (2 .. log2N) about to run,
// it builds the M = N/2^(rd_stage-1) input LLRs a[j] from the bank of stage
// rd_stage-1: a[j] = f[j] for a left child (rd_use_g = 0), or a[j] = g1[j] if
// partial sum beta[j] is 1 and g0[j] otherwise for a right child
// (rd_use_g = 1). The partial sums come from unit U_k of the IGC with
// k = log2N - (rd_stage - 1). PE p of the stage then gets op_in2[p] = a[p]
// (first half) and op_in1[p] = a[p + M/2] (second half).
// Bank sizing and the pairing of a[p] with a[p+M/2] are this design's
// generalisation of the paper's 8-bit example.
module llr_store #(
  parameter int unsigned N = 8,
  parameter int unsigned Q = 8
) (
  input  logic                               clk,
  input  logic                               wr_en,
  input  logic [$clog2($clog2(N)+1)-1:0]     wr_stage,
  input  logic [N/2-1:0][Q-1:0]              pe_f,
  input  logic [N/2-1:0][Q-1:0]              pe_g0,
  input  logic [N/2-1:0][Q-1:0]              pe_g1,
  input  logic [$clog2($clog2(N)+1)-1:0]     rd_stage,
  input  logic                               rd_use_g,
  input  logic [N/2-1:0]                     beta [1:$clog2(N)-1],
  output logic [N/4-1:0][Q-1:0]              op_in1,
  output logic [N/4-1:0][Q-1:0]              op_in2
);
  localparam int unsigned L = $clog2(N);

  // operands for the stage after bank t, gathered per bank
  logic [L-1:1][N/4-1:0][Q-1:0] op1_all, op2_all;

  for (genvar t = 1; t < L; t++) begin : g_bank
    localparam int unsigned P = N >> t;       // entries in this bank
    localparam int unsigned K = L - t;        // IGC unit whose sums select
    logic [Q-1:0] f_q  [P];
    logic [Q-1:0] g0_q [P];
    logic [Q-1:0] g1_q [P];
    logic [P-1:0][Q-1:0]   a;
    logic [N/4-1:0][Q-1:0] o1, o2;

    always_ff @(posedge clk) begin
      if (wr_en && wr_stage == t) begin
        for (int i = 0; i < P; i++) begin
          f_q[i]  <= pe_f[i];
          g0_q[i] <= pe_g0[i];
          g1_q[i] <= pe_g1[i];
        end
      end
    end

    always_comb begin
      for (int j = 0; j < P; j++)
        a[j] = !rd_use_g ? f_q[j] : (beta[K][j] ? g1_q[j] : g0_q[j]);
      o1 = '0;
      o2 = '0;
      for (int p = 0; p < P / 2; p++) begin
        o2[p] = a[p];
        o1[p] = a[p + P/2];
      end
    end

    assign op1_all[t] = o1;
    assign op2_all[t] = o2;
  end

  always_comb begin
    op_in1 = '0;
    op_in2 = '0;
    for (int t = 1; t < L; t++) begin
      if (int'(rd_stage) == t + 1) begin
        op_in1 = op1_all[t];
        op_in2 = op2_all[t];
      end
    end
  end
endmodule
