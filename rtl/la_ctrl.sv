// la_ctrl: schedule controller of the look-ahead decoder.
// Walks the look-ahead time chart of an N-bit code, one stage per cycle,
// N-1 cycles per codeword.  Stages are numbered 0..n-1 here (n = log2 N),
// stage 0 being the one fed by the channel.  The recursion of the time
// chart becomes a stage pointer and one select bit per registered stage:
//   - the start cycle is cycle 1: stage 0 loads the channel LLRs;
//   - after stage s < n-1 comes stage s+1, fed with stage s's min-sum
//     outputs (osel[s] = 0, left subtree);
//   - after the last stage (a decoded pair) comes the deepest stage k whose
//     feeding select osel[k-1] is still 0; it runs again with osel[k-1] = 1,
//     i.e. on the look-ahead candidates chosen by the partial sums (right
//     subtree).  When every select is 1 the codeword is finished.
// Outputs: stage_en[s] loads stage s this cycle, osel[s] is the output
// select of stage s (also the IGC demultiplexer control), leaf marks a
// cycle in which the last stage produces a pair, last marks the final one.
// start is accepted only when idle.  The time chart is the architecture's;
// this state encoding is this design's own.
module la_ctrl #(
  parameter int unsigned N = polar_pkg::N_DEFAULT
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  output logic         busy,
  output logic [$clog2(N)-2:0] stage_en,
  output logic [$clog2(N)-2:0] osel,
  output logic         leaf,
  output logic         last
);
  localparam int unsigned NS = $clog2(N);   // number of stages
  typedef logic [$clog2(NS+1)-1:0] stage_t;

  stage_t cur;
  logic   found;
  stage_t back;   // deepest stage whose feeding select is still 0

  always_comb begin
    found = 1'b0;
    back  = '0;
    for (int k = 1; k < NS; k++) begin
      if (!osel[k-1]) begin
        found = 1'b1;
        back  = stage_t'(k);
      end
    end
  end

  always_comb begin
    stage_en = '0;
    if (!busy) stage_en[0] = start;
    else
      for (int k = 0; k < NS-1; k++)
        if (int'(cur) == k) stage_en[k] = 1'b1;
    leaf = busy && (int'(cur) == NS-1);
    last = leaf && !found;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      cur  <= '0;
      osel <= '0;
    end else if (!busy) begin
      if (start) begin
        busy    <= 1'b1;
        cur     <= stage_t'(1);
        osel[0] <= 1'b0;
      end
    end else if (int'(cur) < NS-1) begin
      cur <= cur + 1'b1;
      for (int k = 0; k < NS-1; k++)
        if (int'(cur) == k) osel[k] <= 1'b0;
    end else if (found) begin
      cur <= back;
      for (int k = 0; k < NS-1; k++)
        if (int'(back) == k+1) osel[k] <= 1'b1;
    end else begin
      busy <= 1'b0;
      cur  <= '0;
    end
  end
endmodule
