// la_stage: one registered stage of the pipelined look-ahead decoder.
// P merged PEs work on adjacent input pairs: PE j takes x[2j] as its
// upper-half input (input_2) and x[2j+1] as its lower-half input (input_1).
// When en is high all three outputs of every PE are loaded into the stage
// registers: the min-sum value and both look-ahead candidates.  On the
// output side each PE has a 2:1 mux that picks the u=0 or u=1 candidate by
// its partial-sum bit ps[j], and a second 2:1 mux that hands the next stage
// either the min-sum value (osel = 0, left subtree) or the chosen candidate
// (osel = 1, right subtree).  y is combinational from the registers, ps and
// osel.  Registers have no reset: the schedule always writes a stage
// before the next stage reads it.
// Register and mux counts per PE (3 registers, 2 muxes) follow the
// architecture's pipelined decoder; the port grouping is this design's.
module la_stage #(
  parameter int unsigned Q = polar_pkg::Q_DEFAULT,
  parameter int unsigned P = polar_pkg::N_DEFAULT / 2
) (
  input  logic                  clk,
  input  logic                  en,
  input  logic [2*P-1:0][Q-1:0] x,
  input  logic [P-1:0]          ps,
  input  logic                  osel,
  output logic [P-1:0][Q-1:0]   y
);
  logic [P-1:0][Q-1:0] o1_d, o2_d, o3_d;   // PE outputs
  logic [P-1:0][Q-1:0] o1_q, o2_q, o3_q;   // stage registers

  for (genvar j = 0; j < P; j++) begin : g_pe
    merged_pe #(.Q(Q)) u_pe (
      .in1(x[2*j+1]), .in2(x[2*j]),
      .out1(o1_d[j]), .out2(o2_d[j]), .out3(o3_d[j])
    );
  end

  always_ff @(posedge clk) begin
    if (en) begin
      o1_q <= o1_d;
      o2_q <= o2_d;
      o3_q <= o3_d;
    end
  end

  always_comb begin
    for (int j = 0; j < P; j++)
      y[j] = osel ? (ps[j] ? o3_q[j] : o2_q[j]) : o1_q[j];
  end
endmodule
