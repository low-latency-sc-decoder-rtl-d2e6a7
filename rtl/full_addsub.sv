// full_addsub: 1-bit full adder-subtractor.
// Adds and subtracts the same two bits at once.  The sum and the difference
// are both X^Y^Z, and both the carry and the borrow are built from the
// shared X^Y term, so one cell replaces a full adder plus a full
// subtractor.  Carry-in and borrow-in are separate pins because the adder
// chain and the subtractor chain carry different values.
//   s     = x ^ y ^ c_in          c_out = x&y  | (x^y)  & c_in
//   d     = x ^ y ^ b_in          b_out = ~x&y | ~(x^y) & b_in
// Purely combinational.  The equations are the architecture's; the cell
// boundary and pin names follow its 1-bit full adder-subtractor.
module full_addsub (
  input  logic x,
  input  logic y,
  input  logic c_in,
  input  logic b_in,
  output logic s,
  output logic c_out,
  output logic d,
  output logic b_out
);
  logic p;  // shared propagate term x ^ y
  always_comb begin
    p     = x ^ y;
    s     = p ^ c_in;
    d     = p ^ b_in;
    c_out = (x & y) | (p & c_in);
    b_out = (~x & y) | (~p & b_in);
  end
endmodule
