// type1_pe: Q-bit adder-subtractor (the "Type I PE" of the look-ahead decoder).
// It produces both s = x + y and d = x - y (mod 2^Q) in the same cycle, which is
// what the look-ahead scheme needs: the two possible results of the partial-sum
// update, before the deciding bit is known. Bit 0 is a half adder-subtractor,
// bits 1..Q-1 are full adder-subtractors with a ripple carry chain and a ripple
// borrow chain. c_q and b_q are the final carry and borrow; b_q = 1 exactly when
// x < y as unsigned numbers, which the merged PE uses as its comparator.
// Purely combinational. Q (word length) is this design's choice; the paper
// leaves it as a symbol.
module type1_pe #(
  parameter int unsigned Q = 8
) (
  input  logic [Q-1:0] x,
  input  logic [Q-1:0] y,
  output logic [Q-1:0] s,
  output logic [Q-1:0] d,
  output logic         c_q,
  output logic         b_q
);
  logic [Q:1] c;   // c[k]: carry into bit k (c[Q] is the carry out)
  logic [Q:1] b;   // b[k]: borrow into bit k

  half_addsub u_lsb (
    .x(x[0]), .y(y[0]), .sd(s[0]), .c_out(c[1]), .b_out(b[1])
  );
  assign d[0] = s[0];

  for (genvar k = 1; k < Q; k++) begin : g_bit
    full_addsub u_cell (
      .x(x[k]), .y(y[k]), .c_in(c[k]), .b_in(b[k]),
      .s(s[k]), .d(d[k]), .c_out(c[k+1]), .b_out(b[k+1])
    );
  end

  assign c_q = c[Q];
  assign b_q = b[Q];
endmodule
