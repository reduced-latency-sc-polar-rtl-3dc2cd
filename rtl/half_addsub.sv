// half_addsub: 1-bit half adder-subtractor, the LSB cell of the Type I PE.
// It computes X+Y and X-Y at once. With no carry or borrow coming in, the sum
// and the difference bit are the same XOR (output sd), the carry is X.Y and the
// borrow is (not X).Y. These are the paper's adder/subtractor equations with a
// zero carry/borrow input. Purely combinational.
module half_addsub (
  input  logic x,
  input  logic y,
  output logic sd,
  output logic c_out,
  output logic b_out
);
  always_comb begin
    sd    = x ^ y;
    c_out = x & y;
    b_out = ~x & y;
  end
endmodule
