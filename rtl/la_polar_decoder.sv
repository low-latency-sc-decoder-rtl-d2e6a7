// la_polar_decoder: pipelined look-ahead successive-cancellation decoder
// for an N-bit polar code (min-sum LLR arithmetic, q-bit LLRs).
// The decoder is a tree of n = log2 N stages of merged PEs, N/2 in the
// first stage, halving towards the output, N-1 in all.  Every active PE
// computes the min-sum value and both look-ahead candidates of the partial
// sum-dependent update at once, so a stage is needed only once per pair of
// SC steps and a codeword takes N-1 cycles instead of 2(N-1).
//   Stages 0..n-2   la_stage, registered outputs, loaded when active.
//   Last stage      one merged PE, combinational: its min-sum output is
//                   L^(2i-1); the hard decision u_{2i-1} (0 if frozen,
//                   else the sign) picks L^(2i) among the two candidates,
//                   whose sign gives u_{2i}.
//   igc             turns each decoded pair into the partial sums that
//                   select candidates at stages 0..n-2.
//   la_ctrl         steps the look-ahead time chart.
// Interface: pulse start with llr (tree order, see below) and frozen while
// busy is low; that cycle is cycle 1.  In each of the N/2 cycles with
// out_valid, out_idx = i-1 and the pair (u_{2i-1}, u_{2i}) with its LLRs is
// presented combinationally; the last pair comes in cycle N-1, done pulses
// the cycle after, and u_hat then holds all decisions.  llr[k] is L(y_{k+1})
// for the generator matrix G_N = B_N F^(x)n (with bit reversal), where
// adjacent inputs meet in the first stage, y_{2j+1} being the input whose
// sign is flipped by the partial sum.  For G_N = F^(x)n without bit
// reversal, feed llr[k] = L(y_{bitrev(k)+1}).
// Architecture, schedule, N-1 cycle latency and the IGC follow the
// published 1st (pipelined) look-ahead design.  Q = 6, saturating StoT,
// frozen-bit input port and the unregistered last stage are this design's
// choices.  Reset clears control state only; the datapath registers are
// always written before they are read.
module la_polar_decoder #(
  parameter int unsigned N = polar_pkg::N_DEFAULT,
  parameter int unsigned Q = polar_pkg::Q_DEFAULT
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [N-1:0][Q-1:0]   llr,
  input  logic [N-1:0]          frozen,
  output logic                  busy,
  output logic                  out_valid,
  output logic [$clog2(N)-2:0]  out_idx,
  output logic [Q-1:0]          llr_odd,
  output logic [Q-1:0]          llr_even,
  output logic                  u_odd,
  output logic                  u_even,
  output logic                  done,
  output logic [N-1:0]          u_hat
);
  localparam int unsigned NS = $clog2(N);

  logic [NS-2:0] stage_en, osel;
  logic          leaf, last;
  logic [N-3:0]  ps_flat;
  logic [N-1:0]  frozen_q;

  la_ctrl #(.N(N)) u_ctrl (
    .clk, .rst_n, .start, .busy, .stage_en, .osel, .leaf, .last
  );

  igc #(.N(N)) u_igc (
    .clk, .leaf, .u_odd, .u_even, .c(osel), .ps_flat
  );

  // registered stages 0..n-2
  for (genvar s = 0; s < NS-1; s++) begin : g_st
    localparam int unsigned P   = N >> (s+1);
    localparam int unsigned OFF = N - (N >> s);
    logic [2*P-1:0][Q-1:0] x;
    logic [P-1:0][Q-1:0]   y;
    if (s == 0) begin : g_in
      assign x = llr;
    end else begin : g_in
      assign x = g_st[s-1].y;
    end
    la_stage #(.Q(Q), .P(P)) u_stage (
      .clk, .en(stage_en[s]), .x, .ps(ps_flat[OFF +: P]), .osel(osel[s]), .y
    );
  end

  // last stage: one merged PE and the decisions
  logic [Q-1:0] l_o2, l_o3;
  logic [1:0][Q-1:0] x_last;
  assign x_last = g_st[NS-2].y;

  merged_pe #(.Q(Q)) u_last_pe (
    .in1(x_last[1]), .in2(x_last[0]), .out1(llr_odd), .out2(l_o2), .out3(l_o3)
  );

  always_comb begin
    u_odd    = frozen_q[{out_idx, 1'b0}] ? 1'b0 : llr_odd[Q-1];
    llr_even = u_odd ? l_o3 : l_o2;
    u_even   = frozen_q[{out_idx, 1'b1}] ? 1'b0 : llr_even[Q-1];
  end
  assign out_valid = leaf;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_idx  <= '0;
      done     <= 1'b0;
      frozen_q <= '0;
      u_hat    <= '0;
    end else begin
      done <= last;
      if (start && !busy) begin
        frozen_q <= frozen;
        out_idx  <= '0;
      end else if (leaf) begin
        out_idx                  <= out_idx + 1'b1;
        u_hat[{out_idx, 1'b0}]   <= u_odd;
        u_hat[{out_idx, 1'b1}]   <= u_even;
      end
    end
  end
endmodule
