// type1_pe: q-bit adder-subtractor (the "Type I PE").
// Computes x + y and x - y of two unsigned q-bit operands in parallel with a
// ripple chain of one half adder-subtractor (bit 0) and q-1 full
// adder-subtractors (bits 1..q-1).  The carry chain gives s and c_q
// (x + y = {c_q, s}); the borrow chain gives d and b_q (x - y = d modulo
// 2^q, b_q = 1 exactly when x < y), so b_q also serves as a comparator.
// Combinational.  The cell chain is the architecture's; its use on
// unsigned magnitudes inside the merged PE is as drawn there.
module type1_pe #(
  parameter int unsigned Q = polar_pkg::Q_DEFAULT
) (
  input  logic [Q-1:0] x,
  input  logic [Q-1:0] y,
  output logic [Q-1:0] s,
  output logic         c_q,
  output logic [Q-1:0] d,
  output logic         b_q
);
  logic [Q:0] c;  // carry chain, c[k] enters bit k
  logic [Q:0] b;  // borrow chain

  half_addsub u_bit0 (
    .x(x[0]), .y(y[0]), .sd(s[0]), .c_out(c[1]), .b_out(b[1])
  );
  assign d[0] = s[0];
  assign c[0] = 1'b0;
  assign b[0] = 1'b0;

  for (genvar k = 1; k < Q; k++) begin : g_bit
    full_addsub u_bit (
      .x(x[k]), .y(y[k]), .c_in(c[k]), .b_in(b[k]),
      .s(s[k]), .c_out(c[k+1]), .d(d[k]), .b_out(b[k+1])
    );
  end

  assign c_q = c[Q];
  assign b_q = b[Q];
endmodule
