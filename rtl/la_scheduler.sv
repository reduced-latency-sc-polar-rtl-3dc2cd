// la_scheduler: controller of the 2-parallel look-ahead decoder.
// A code of length N = 2^L is decoded stage by stage; stage 1 sits at the
// channel (N/2 PEs per codeword) and stage L at the decided bits (1 PE).
// Under the look-ahead schedule one codeword needs N-1 activations: a preorder
// walk of the stage tree, where every stage s < L is followed by its left and
// then its right subtree, and every stage-L activation decides a bit pair.
// Two codewords share the N/2 PEs:
//   cycle 1      : stage 1 of codeword 1 (all N/2 PEs)       load_a
//   cycle 2      : stage 1 of codeword 2 (all N/2 PEs)       load_b
//   cycles 3..N  : the remaining N-2 activations of both codewords in
//                  lockstep, N/2^s PEs each for stage s        run
// so both codewords are done after N cycles, and a new pair may start in the
// next cycle. The walk needs no stack: after any stage s < L comes stage s+1
// fed by min-sum values (use_g = 0); after the stage-L cycle that decided pair
// i comes stage L - trailing_ones(i), fed by the selected look-ahead
// candidates (use_g = 1).
// Handshake: in_ready is high in the idle state and in the cycle after; a
// codeword is taken in a cycle with in_valid && in_ready. If no second codeword
// is offered in the cycle after the first, the second slot runs empty
// (b_valid = 0). The schedule follows the paper's time chart and PE-count
// table; the handshake and the back-to-back restart are this design's choices.
module la_scheduler
  import polar_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              in_valid,
  output logic                              in_ready,
  output logic                              load_a,     // stage 1, codeword 1
  output logic                              load_b,     // stage 1, codeword 2
  output logic                              run,        // stages 2..L, both
  output logic [$clog2($clog2(N)+1)-1:0]    stage,
  output logic                              use_g,
  output logic                              leaf_act,   // stage L this cycle
  output logic [$clog2(N)-2:0]              leaf,       // bit-pair index
  output logic                              last,
  output logic                              b_valid,
  output logic                              clear       // start of a pair
);
  localparam int unsigned L  = $clog2(N);
  localparam int unsigned SW = $clog2(L + 1);
  localparam int unsigned LW = L - 1;

  sched_state_e    state_q;
  logic [SW-1:0]   stage_q;
  logic            use_g_q;
  logic [LW-1:0]   leaf_q;
  logic            b_valid_q;

  always_comb begin
    in_ready = (state_q == SCH_IDLE) || (state_q == SCH_LOADB);
    load_a   = (state_q == SCH_IDLE)  && in_valid;
    load_b   = (state_q == SCH_LOADB) && in_valid;
    run      = (state_q == SCH_RUN);
    stage    = run ? stage_q : SW'(1);
    use_g    = run && use_g_q;
    leaf_act = run && (stage_q == SW'(L));
    leaf     = leaf_q;
    last     = leaf_act && (leaf_q == LW'(N/2 - 1));
    b_valid  = b_valid_q;
    clear    = load_a;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= SCH_IDLE;
      stage_q   <= SW'(1);
      use_g_q   <= 1'b0;
      leaf_q    <= '0;
      b_valid_q <= 1'b0;
    end else begin
      unique case (state_q)
        SCH_IDLE: begin
          if (in_valid) state_q <= SCH_LOADB;
        end
        SCH_LOADB: begin
          state_q   <= SCH_RUN;
          stage_q   <= SW'(2);
          use_g_q   <= 1'b0;
          leaf_q    <= '0;
          b_valid_q <= in_valid;
        end
        SCH_RUN: begin
          if (stage_q != SW'(L)) begin
            stage_q <= stage_q + 1'b1;
            use_g_q <= 1'b0;
          end else if (leaf_q == LW'(N/2 - 1)) begin
            state_q <= SCH_IDLE;
          end else begin
            stage_q <= SW'(L - trailing_ones(32'(leaf_q)));
            use_g_q <= 1'b1;
            leaf_q  <= leaf_q + 1'b1;
          end
        end
        default: state_q <= SCH_IDLE;
      endcase
    end
  end

  // the active stage of a run cycle is always 2..L
  a_stage_range: assert property (@(posedge clk) disable iff (!rst_n)
    run |-> (stage_q >= SW'(2) && stage_q <= SW'(L)));
  // candidates are selected only right after a bit pair was decided
  a_g_after_leaf: assert property (@(posedge clk) disable iff (!rst_n)
    (run && use_g_q) |-> $past(leaf_act));
endmodule
