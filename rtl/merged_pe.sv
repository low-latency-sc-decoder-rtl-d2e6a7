// merged_pe: Type I and Type II processing element sharing one
// adder-subtractor.
// in2 is the LLR of the upper half of the code (the one modified by the
// partial sum), in1 the LLR of the lower half.  Both are turned into
// sign-magnitude (TtoS).  A single type1_pe then forms |in2|+|in1| (S) and
// |in2|-|in1| (D); its borrow says which magnitude is smaller, so it doubles
// as the comparator of the min-sum rule:
//   out1 = sgn(in1) sgn(in2) min(|in1|,|in2|)      (Type II, min-sum)
//   out2 = in1 + in2                                 (Type I, u_{2i-1} = 0)
//   out3 = in1 - in2                                 (Type I, u_{2i-1} = 1)
// For out2/out3 a crossbar hands S or |D| to each output depending on
// whether the two signs agree, and the sign of each result follows the
// sign-magnitude addition rules (the sign of the larger operand when the
// magnitudes are subtracted).  Three StoT blocks return q-bit two's
// complement values, saturated.  Combinational.
// The partitioning (two TtoS, one Type I PE, borrow-driven min mux,
// S/D crossbar, three StoT) is the architecture's; taking |D| from D by the
// borrow, and the exact sign logic, are this design's own.
module merged_pe #(
  parameter int unsigned Q = polar_pkg::Q_DEFAULT
) (
  input  logic [Q-1:0] in1,
  input  logic [Q-1:0] in2,
  output logic [Q-1:0] out1,
  output logic [Q-1:0] out2,
  output logic [Q-1:0] out3
);
  logic         sa, sb;      // signs of in2 (a) and in1 (b)
  logic [Q-1:0] ma, mb;      // magnitudes
  logic [Q-1:0] s, d;
  logic         c_q, b_q;    // b_q = 1 when |in2| < |in1|

  ttos #(.Q(Q)) u_ttos_a (.i(in2), .sgn(sa), .mag(ma));
  ttos #(.Q(Q)) u_ttos_b (.i(in1), .sgn(sb), .mag(mb));

  type1_pe #(.Q(Q)) u_addsub (
    .x(ma), .y(mb), .s(s), .c_q(c_q), .d(d), .b_q(b_q)
  );

  logic [Q:0]   sum_mag;     // |a| + |b|
  logic [Q:0]   dif_mag;     // ||a| - |b||
  logic [Q:0]   min_mag;
  logic         same;        // the two signs agree
  logic         s1, s2, s3;
  logic [Q:0]   m2, m3;

  always_comb begin
    sum_mag = {c_q, s};
    dif_mag = {1'b0, b_q ? (~d + 1'b1) : d};
    min_mag = {1'b0, b_q ? ma : mb};
    same    = ~(sa ^ sb);
    // Type II: sign product, smaller magnitude
    s1 = sa ^ sb;
    // crossbar: a + b uses S when signs agree, |D| otherwise; b - a the reverse
    m2 = same ? sum_mag : dif_mag;
    m3 = same ? dif_mag : sum_mag;
    // a + b: common sign, or the sign of the larger magnitude
    s2 = same ? sa : (b_q ? sb : sa);
    // b - a = b + (-a): -a has sign ~sa
    s3 = same ? (b_q ? sb : ~sb) : sb;
  end

  stot #(.Q(Q)) u_stot1 (.sgn(s1), .mag(min_mag), .o(out1));
  stot #(.Q(Q)) u_stot2 (.sgn(s2), .mag(m2),      .o(out2));
  stot #(.Q(Q)) u_stot3 (.sgn(s3), .mag(m3),      .o(out3));
endmodule
