// igc: input generating circuit for the Type I candidate selects.
// Every Type I candidate chosen at stage s needs one partial sum: an XOR of
// decisions of the left subtree that has just been decoded below it.  The
// IGC builds these vectors from the stream of decoded pairs, recursively:
//   U_1  one XOR-pass element turns (u_{2i-1}, u_{2i}) into
//        (u_{2i-1}^u_{2i}, u_{2i}), the partial sums of a 2-bit subtree;
//   U_k  a demultiplexer driven by c_k sends a finished subtree vector either
//        into the store of its level (it was a left half) or on to a row of
//        XOR-pass elements that combine it with the stored left half (it was
//        a right half), giving the vector of the subtree one level up:
//          out[2j] = left[j] ^ right[j],  out[2j+1] = right[j].
// Vectors are kept in the tree order of the decoder stages, so stage s's
// register is exactly the select vector of its look-ahead muxes.  Stage s
// (0..n-2) has N/2^(s+1) PEs and ps_flat holds its bits at offset
// N - N/2^s: stage 0 in the low N/2 bits.  A vector is written at the end
// of the cycle that completes it and read from the next cycle on.
// XOR-pass element count is N/2-1.  The recursion, the XOR-pass elements
// and the c_k demultiplexers are the architecture's; the stores are
// registers with write enable (its RAM variant) rather than delay lines,
// and c_k comes from the schedule controller.
module igc #(
  parameter int unsigned N = polar_pkg::N_DEFAULT
) (
  input  logic                 clk,
  input  logic                 leaf,
  input  logic                 u_odd,
  input  logic                 u_even,
  input  logic [$clog2(N)-2:0] c,
  output logic [N-3:0]         ps_flat
);
  localparam int unsigned NS = $clog2(N);
  localparam int unsigned NL = NS - 1;      // registered stages / store levels

  logic [N/2-1:0] ps_q [NL];   // store of level s (low N/2^(s+1) bits used)
  logic [N/2-1:0] bt   [NL];   // vector completed below level s this cycle
  logic [NL-1:0]  dn;          // a subtree below level s completed this cycle

  always_comb begin
    for (int s = 0; s < NL; s++) begin
      bt[s] = '0;
      dn[s] = 1'b0;
    end
    // U_1: XOR-pass element on the decoded pair
    dn[NL-1]    = leaf;
    bt[NL-1][0] = u_odd ^ u_even;
    bt[NL-1][1] = u_even;
    // U_k: right halves are combined with the stored left half
    for (int s = NL-1; s >= 1; s--) begin
      if (dn[s] && c[s]) begin
        dn[s-1] = 1'b1;
        for (int j = 0; j < N/4; j++) begin
          if (j < (N >> (s+1))) begin
            bt[s-1][2*j]   = ps_q[s][j] ^ bt[s][j];
            bt[s-1][2*j+1] = bt[s][j];
          end
        end
      end
    end
  end

  // left halves go into the store of their level
  always_ff @(posedge clk) begin
    for (int s = 0; s < NL; s++)
      if (dn[s] && !c[s]) ps_q[s] <= bt[s];
  end

  for (genvar s = 0; s < NL; s++) begin : g_out
    localparam int unsigned W   = N >> (s+1);
    localparam int unsigned OFF = N - (N >> s);
    assign ps_flat[OFF +: W] = ps_q[s][W-1:0];
  end
endmodule
