// leaf_decide: decision logic after the last decoder stage.
// The last-stage merged PE delivers the min-sum LLR f of bit u(2i-1) and both
// candidate LLRs of bit u(2i) (g0 if u(2i-1)=0, g1 if u(2i-1)=1). This block
// decides u(2i-1) from the sign of f (LLR >= 0 gives 0), forces it to 0 if the
// bit is frozen, uses it to pick g0 or g1, and decides u(2i) the same way, all
// in the same cycle. Frozen bits are taken as 0 (this design's choice; the
// decision rule itself is the standard SC one). Purely combinational.
module leaf_decide #(
  parameter int unsigned Q = 8
) (
  input  logic [Q-1:0] f,
  input  logic [Q-1:0] g0,
  input  logic [Q-1:0] g1,
  input  logic         frz_odd,
  input  logic         frz_even,
  output logic         u_odd,
  output logic         u_even
);
  logic [Q-1:0] g_sel;
  always_comb begin
    u_odd  = ~frz_odd & f[Q-1];
    g_sel  = u_odd ? g1 : g0;
    u_even = ~frz_even & g_sel[Q-1];
  end
endmodule
