// stot: sign-magnitude to two's complement conversion with compression.
// Takes a sign and a Q+1 bit magnitude (the adder-subtractor result with its
// carry), inverts and increments when the sign is set, and compresses the
// result to Q bits.  The architecture only says a "sign compression" is
// applied; this design saturates: positive values above 2^(Q-1)-1 become
// 2^(Q-1)-1, negative values below -2^(Q-1) become -2^(Q-1).  A negative
// zero gives 0.  Combinational.
module stot #(
  parameter int unsigned Q = polar_pkg::Q_DEFAULT
) (
  input  logic         sgn,
  input  logic [Q:0]   mag,
  output logic [Q-1:0] o
);
  localparam logic [Q:0] POS_MAX = (Q+1)'((1 << (Q-1)) - 1);
  localparam logic [Q:0] NEG_MAX = (Q+1)'(1 << (Q-1));

  logic [Q-1:0] tc;  // two's complement of the low Q bits

  always_comb begin
    tc = (sgn ? ~mag[Q-1:0] : mag[Q-1:0]) + Q'(sgn);
    if (!sgn && mag > POS_MAX)      o = POS_MAX[Q-1:0];
    else if (sgn && mag > NEG_MAX)  o = {1'b1, {(Q-1){1'b0}}};
    else                            o = tc;
  end
endmodule
