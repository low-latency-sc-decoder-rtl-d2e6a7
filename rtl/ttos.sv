// ttos: two's complement to sign-magnitude conversion.
// The sign bit i[Q-1] selects, bit by bit, either i or its inverse; a
// half-adder chain whose carry-in is the sign then adds one, giving the
// magnitude.  The magnitude keeps Q bits (sign extension), so -2^(Q-1)
// converts to magnitude 2^(Q-1) without overflow.  Combinational.
// Structure follows the architecture's TtoS block.
module ttos #(
  parameter int unsigned Q = polar_pkg::Q_DEFAULT
) (
  input  logic [Q-1:0] i,
  output logic         sgn,
  output logic [Q-1:0] mag
);
  logic [Q-1:0] sel;   // i or ~i, chosen by the sign
  logic [Q-1:0] c;     // half-adder carry chain, c[0] = sign

  assign sgn  = i[Q-1];
  assign c[0] = sgn;
  for (genvar k = 0; k < Q; k++) begin : g_bit
    assign sel[k]  = sgn ? ~i[k] : i[k];
    assign mag[k]  = sel[k] ^ c[k];
    if (k < Q-1) begin : g_carry
      assign c[k+1] = sel[k] & c[k];
    end
  end
endmodule
