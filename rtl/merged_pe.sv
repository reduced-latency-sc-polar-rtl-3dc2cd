// merged_pe: merged Type I / Type II processing element.
// From two Q-bit two's-complement LLRs it produces, in one combinational pass,
//   out1 = sign(in1)^sign(in2) * min(|in1|, |in2|)   (min-sum update)
//   out2 = in1 + in2                                (partial-sum update, u = 0)
//   out3 = in1 - in2                                (partial-sum update, u = 1)
// in1 is the LLR from the second half of the block and in2 the one from the
// first half, so out2/out3 are the two look-ahead candidates (-1)^u*in2 + in1.
//
// Structure (after the paper's merged PE): both inputs are converted to sign
// and magnitude; one Type I PE computes |in1|+|in2| (S) and |in1|-|in2| (D) on
// the magnitudes. Its borrow-out doubles as the comparator of the min-sum part
// and picks the smaller magnitude. A 2x2 crossing switch, steered by whether
// the signs differ, sends S to the candidate whose operands have equal signs
// and D to the other. All three results are converted back to two's complement
// with the sign of in1 (candidates) or the sign product (min-sum). D is used as
// a two's-complement number, so no absolute value is needed:
// sign(in1)*(|in1|-|in2|) is exactly the mixed-sign sum.
//
// Arithmetic wraps modulo 2^Q; there is no saturation (the paper's Q-bit
// adder-subtractor has none). The magnitude of -2^(Q-1) is 2^(Q-1) as an
// unsigned Q-bit number. The choice of switch select and sign routing is this
// design's; the block list (TtoS, Type I PE, B_n-steered mux, crossing switch,
// three StoT) follows the paper.
module merged_pe #(
  parameter int unsigned Q = 8
) (
  input  logic [Q-1:0] in1,
  input  logic [Q-1:0] in2,
  output logic [Q-1:0] out1,
  output logic [Q-1:0] out2,
  output logic [Q-1:0] out3
);
  logic         sgn1, sgn2;
  logic [Q-1:0] mag1, mag2;
  logic [Q-1:0] sum_m, dif_m;
  logic         c_n, b_n;   // c_n (carry out) is not needed: results wrap
  logic [Q-1:0] min_m, sw_to2, sw_to3;
  logic         diff_sign;

  // TtoS: two's complement -> sign and magnitude
  always_comb begin
    sgn1 = in1[Q-1];
    sgn2 = in2[Q-1];
    mag1 = sgn1 ? (~in1 + 1'b1) : in1;
    mag2 = sgn2 ? (~in2 + 1'b1) : in2;
  end

  // shared magnitude adder-subtractor; b_n = 1 when |in1| < |in2|
  type1_pe #(.Q(Q)) u_type1 (
    .x(mag1), .y(mag2), .s(sum_m), .d(dif_m), .c_q(c_n), .b_q(b_n)
  );

  always_comb begin
    diff_sign = sgn1 ^ sgn2;
    // Type II part: magnitude mux steered by the borrow
    min_m  = b_n ? mag1 : mag2;
    // crossing switch
    sw_to2 = diff_sign ? dif_m : sum_m;
    sw_to3 = diff_sign ? sum_m : dif_m;
    // StoT: sign and magnitude -> two's complement
    out1 = diff_sign ? (~min_m + 1'b1) : min_m;
    out2 = sgn1 ? (~sw_to2 + 1'b1) : sw_to2;
    out3 = sgn1 ? (~sw_to3 + 1'b1) : sw_to3;
  end
endmodule
