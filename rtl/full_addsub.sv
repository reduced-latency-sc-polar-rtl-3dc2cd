// full_addsub: 1-bit full adder-subtractor of the Type I PE.
// The adder (carry chain c_in -> c_out) and the subtractor (borrow chain
// b_in -> b_out) run side by side and share the X xor Y term:
//   s     = (x ^ y) ^ c_in          d     = (x ^ y) ^ b_in
//   c_out = x.y + (x ^ y).c_in      b_out = ~x.y + ~(x ^ y).b_in
// Separate carry and borrow inputs follow the cell's port list in the paper;
// the equations are the paper's. Purely combinational.
module full_addsub (
  input  logic x,
  input  logic y,
  input  logic c_in,
  input  logic b_in,
  output logic s,
  output logic d,
  output logic c_out,
  output logic b_out
);
  logic p;   // shared propagate term x ^ y
  always_comb begin
    p     = x ^ y;
    s     = p ^ c_in;
    d     = p ^ b_in;
    c_out = (x & y) | (p & c_in);
    b_out = (~x & y) | (~p & b_in);
  end
endmodule
