// tb_la_polar_decoder_n1024: end-to-end test of la_polar_decoder at N = 1024, the shortest practical code length.
// Each codeword gets random channel LLRs (natural order) and a random frozen
// set; a second kind of codeword is a real polar codeword (random
// information bits, frozen bits zero, x = u F^{(x)n}) sent as noiseless LLRs
// of +/-QMAX / 2, which must decode back to u.  The reference is an iterative
// successive-cancellation min-sum decoder in natural order, written here
// independently of the RTL, with the same q-bit saturation after every
// f/g step.  The decoder is fed llr[p] = L_nat[bitrev(p)].  Checked per
// pair: both LLRs, both decisions and its cycle against the look-ahead time
// chart (for N = 8: cycles 3, 4, 6, 7); per codeword: the pair order, the
// last pair in cycle N-1 (start being cycle 1), done one
// cycle later, and u_hat.  Counted mechanisms, each of which must occur:
// a u=1 look-ahead candidate taken at an inner stage, at the last stage,
// a frozen bit overriding a negative LLR, a saturated result, and a start
// pulse ignored while busy.
module tb_la_polar_decoder_n1024;
  localparam int N  = 1024;
  localparam int Q  = polar_pkg::Q_DEFAULT;
  localparam int NS = $clog2(N);
  localparam int NCW = 30;
  localparam int QMAX = (1 << (Q-1)) - 1;
  localparam int QMIN = -(1 << (Q-1));

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic start = 1'b0;
  logic [N-1:0][Q-1:0] llr = '0;
  logic [N-1:0] frozen = '0;
  logic busy, out_valid, u_odd, u_even, done;
  logic [NS-2:0] out_idx;
  logic [Q-1:0] llr_odd, llr_even;
  logic [N-1:0] u_hat;

  la_polar_decoder #(.N(N)) dut (
    .clk, .rst_n, .start, .llr, .frozen, .busy, .out_valid, .out_idx,
    .llr_odd, .llr_even, .u_odd, .u_even, .done, .u_hat
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // mechanism counters
  int n_inner_u1 = 0, n_last_u1 = 0, n_frozen_override = 0, n_sat = 0, n_ignored = 0;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL at cycle %0d: %s", cycle, what);
    end
  endtask

  function automatic int sat(input int v, inout int nsat);
    if (v > QMAX) begin nsat++; return QMAX; end
    if (v < QMIN) begin nsat++; return QMIN; end
    return v;
  endfunction

  function automatic int bitrev(input int p);
    int r = 0;
    for (int b = 0; b < NS; b++) if (p[b]) r |= 1 << (NS-1-b);
    return r;
  endfunction

  // reference results
  int ref_llr [N];
  bit ref_u   [N];
  int lnat    [N];
  bit frz     [N];

  // iterative natural-order SC min-sum decoder
  task automatic sc_reference();
    int alpha [NS+1][N];
    bit lbeta [NS+1][N];
    bit b     [N];
    bit nb    [N];
    int m, d, dv, t, bl, av, bv, mn;
    for (int k = 0; k < N; k++) alpha[0][k] = lnat[k];
    for (int i = 0; i < N; i++) begin
      if (i == 0) dv = -1;
      else begin
        t = 0;
        while (((i >> t) & 1) == 0) t++;
        dv = NS - 1 - t;
        m = 1 << (NS - dv - 1);
        for (int k = 0; k < m; k++) begin
          av = alpha[dv][k]; bv = alpha[dv][k+m];
          if (lbeta[dv+1][k]) begin
            if (dv < NS-1) n_inner_u1++; else n_last_u1++;
            alpha[dv+1][k] = sat(bv - av, n_sat);
          end else
            alpha[dv+1][k] = sat(bv + av, n_sat);
        end
      end
      for (d = dv + 1; d < NS; d++) begin
        m = 1 << (NS - d - 1);
        for (int k = 0; k < m; k++) begin
          av = alpha[d][k]; bv = alpha[d][k+m];
          mn = ((av < 0 ? -av : av) < (bv < 0 ? -bv : bv)) ? (av < 0 ? -av : av) : (bv < 0 ? -bv : bv);
          alpha[d+1][k] = sat(((av < 0) ^ (bv < 0)) ? -mn : mn, n_sat);
        end
      end
      ref_llr[i] = alpha[NS][0];
      if (frz[i] && alpha[NS][0] < 0) n_frozen_override++;
      ref_u[i] = frz[i] ? 1'b0 : (alpha[NS][0] < 0);
      // partial sums back up the tree
      bl = 1;
      b[0] = ref_u[i];
      for (d = NS; d >= 1; d--) begin
        if (((i >> (NS - d)) & 1) == 0) begin
          for (int k = 0; k < bl; k++) lbeta[d][k] = b[k];
          break;
        end
        for (int k = 0; k < bl; k++) begin
          nb[k] = lbeta[d][k] ^ b[k];
          nb[k+bl] = b[k];
        end
        bl = 2 * bl;
        for (int k = 0; k < bl; k++) b[k] = nb[k];
      end
    end
  endtask

  // cycles (1-based from start) in which the last stage is active, from the
  // recursive definition of the look-ahead time chart (explicit stack)
  int leaf_cycle [N/2];
  initial begin : build_schedule
    int stk [$];
    int s, c, p;
    c = 0;
    p = 0;
    stk.push_back(0);
    while (stk.size() > 0) begin
      s = stk.pop_back();
      c++;
      if (s == NS - 1) begin
        leaf_cycle[p] = c;
        p++;
      end else begin
        stk.push_back(s + 1);
        stk.push_back(s + 1);
      end
    end
  end

  function automatic int sx(input logic [Q-1:0] v);
    return int'($signed(v));
  endfunction

  task automatic run_codeword(input bit noiseless);
    bit u_src [N];
    bit x [N];
    int start_cycle, pairs, amp;
    amp = QMAX / 2;
    for (int k = 0; k < N; k++) frz[k] = ($urandom % 2) == 0;
    if (noiseless) begin
      for (int k = 0; k < N; k++) u_src[k] = frz[k] ? 1'b0 : 1'($urandom % 2);
      for (int k = 0; k < N; k++) x[k] = u_src[k];
      for (int h = N/2; h >= 1; h /= 2)
        for (int s0 = 0; s0 < N; s0 += 2*h)
          for (int k = s0; k < s0 + h; k++) x[k] = x[k] ^ x[k+h];
      for (int k = 0; k < N; k++) lnat[k] = x[k] ? -amp : amp;
    end else begin
      for (int k = 0; k < N; k++) lnat[k] = int'($urandom % (1 << Q)) + QMIN;
    end
    sc_reference();
    if (noiseless)
      for (int k = 0; k < N; k++) check(ref_u[k] == u_src[k], "reference decodes noiseless codeword");
    for (int p = 0; p < N; p++) llr[p] = Q'(lnat[bitrev(p)]);
    for (int k = 0; k < N; k++) frozen[k] = frz[k];
    @(negedge clk);
    start = 1'b1;
    start_cycle = cycle;   // cycle 1 of the codeword
    @(negedge clk);
    start = 1'b0;
    pairs = 0;
    while (pairs < N/2) begin
      // a stray start mid-codeword must be ignored
      if (pairs == 1) begin
        start = 1'b1;
        llr = ~llr;
        n_ignored++;
      end else start = 1'b0;
      #1;
      if (out_valid) begin
        check(int'(out_idx) == pairs, $sformatf("pair order %0d vs %0d", out_idx, pairs));
        check(sx(llr_odd)  == ref_llr[2*pairs],   $sformatf("L(%0d) %0d vs %0d", 2*pairs+1, sx(llr_odd), ref_llr[2*pairs]));
        check(sx(llr_even) == ref_llr[2*pairs+1], $sformatf("L(%0d) %0d vs %0d", 2*pairs+2, sx(llr_even), ref_llr[2*pairs+1]));
        check(u_odd  == ref_u[2*pairs],   $sformatf("u%0d", 2*pairs+1));
        check(u_even == ref_u[2*pairs+1], $sformatf("u%0d", 2*pairs+2));
        check(cycle - start_cycle + 1 == leaf_cycle[pairs],
              $sformatf("pair %0d in cycle %0d, schedule says %0d", pairs, cycle - start_cycle + 1, leaf_cycle[pairs]));
        pairs++;
        if (pairs == N/2)
          check(cycle - start_cycle + 1 == N - 1,
                $sformatf("last pair in cycle %0d, expected %0d", cycle - start_cycle + 1, N - 1));
      end
      check(cycle - start_cycle < N, "pairs arrive within N-1 cycles");
      if (cycle - start_cycle >= N) break;
      @(negedge clk);
    end
    start = 1'b0;
    #1;
    check(done == 1'b1, "done one cycle after the last pair");
    check(!busy, "idle after the codeword");
    for (int k = 0; k < N; k++) check(u_hat[k] == ref_u[k], $sformatf("u_hat[%0d]", k));
    @(negedge clk);
    check(done == 1'b0, "done is a single pulse");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < NCW; c++) run_codeword(c % 3 == 2);
    check(n_inner_u1 > 0 || NS < 3, "u=1 candidate used at an inner stage");
    check(n_last_u1 > 0, "u=1 candidate used at the last stage");
    check(n_frozen_override > 0, "frozen bit overrode a negative LLR");
    check(n_sat > 0, "saturation occurred");
    check(n_ignored > 0, "start ignored while busy");
    $display("mechanisms: inner_u1=%0d last_u1=%0d frozen_override=%0d saturation=%0d ignored_start=%0d",
             n_inner_u1, n_last_u1, n_frozen_override, n_sat, n_ignored);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
