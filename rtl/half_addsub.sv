// half_addsub: 1-bit half adder-subtractor for the least significant bit.
// With no incoming carry or borrow the sum and the difference are the same
// bit, x ^ y, so the cell has one shared output sd.  The carry is x & y and
// the borrow is ~x & y.  Purely combinational; follows the architecture's
// half adder-subtractor (pins B_out, S/D, C_out).
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
