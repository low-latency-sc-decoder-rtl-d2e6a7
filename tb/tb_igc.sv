// tb_igc: test of the input generating circuit at N = 8 and N = 64.
// The look-ahead schedule is generated here from its recursive definition
// (explicit stack) and drives the IGC's controls c and leaf; each leaf cycle
// supplies a random decoded pair.  Whenever the schedule starts a right
// subtree under stage s, the IGC's stage-s output must equal the polar
// transform of the bits decoded in the left subtree, in the stage's tree
// order (entry j holds natural entry bitrev(j)).  At N = 8 the stage-0
// vector is also checked against the printed list
// u1^u2^u3^u4, u3^u4, u2^u4, u4.
module tb_igc;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  logic leaf8 = 1'b0, uo8 = 1'b0, ue8 = 1'b0;
  logic [1:0] c8 = '0;
  logic [5:0] ps8;
  logic leaf64 = 1'b0, uo64 = 1'b0, ue64 = 1'b0;
  logic [4:0] c64 = '0;
  logic [61:0] ps64;

  igc #(.N(8))  u8  (.clk, .leaf(leaf8),  .u_odd(uo8),  .u_even(ue8),  .c(c8),  .ps_flat(ps8));
  igc #(.N(64)) u64 (.clk, .leaf(leaf64), .u_odd(uo64), .u_even(ue64), .c(c64), .ps_flat(ps64));

  task automatic build(input int ns, output int st [$], output int sl [$]);
    int stk_s [$], stk_l [$];
    int s, l;
    st = {}; sl = {};
    stk_s.push_back(0); stk_l.push_back(0);
    while (stk_s.size() > 0) begin
      s = stk_s.pop_back(); l = stk_l.pop_back();
      st.push_back(s); sl.push_back(l);
      if (s < ns - 1) begin
        stk_s.push_back(s + 1); stk_l.push_back(1);
        stk_s.push_back(s + 1); stk_l.push_back(0);
      end
    end
  endtask

  function automatic int bitrev(input int v, input int bits);
    int r = 0;
    for (int b = 0; b < bits; b++) if (v[b]) r |= 1 << (bits-1-b);
    return r;
  endfunction

  // expected stage-s select bit j, given the decoded bits so far
  function automatic bit expect_ps(input bit u [], input int n, input int s, input int j, input int base);
    int w = n >> (s+1);
    int lw = $clog2(w);
    bit x [];
    x = new[w];
    for (int k = 0; k < w; k++) x[k] = u[base + k];
    for (int h = w/2; h >= 1; h /= 2)
      for (int s0 = 0; s0 < w; s0 += 2*h)
        for (int k = s0; k < s0 + h; k++) x[k] = x[k] ^ x[k+h];
    return x[bitrev(j, lw)];
  endfunction

  task automatic run(input int n);
    int st [$], sl [$];
    bit u [];
    int ns = $clog2(n);
    int pairs = 0, w, off;
    logic [4:0] cs = '0;
    bit got;
    u = new[n];
    build(ns, st, sl);
    for (int c = 0; c < st.size(); c++) begin
      @(negedge clk);
      if (st[c] > 0) cs[st[c]-1] = 1'(sl[c]);
      // consumption point: right subtree under stage st[c]-1 begins
      if (st[c] > 0 && sl[c] == 1) begin
        w = n >> st[c];
        off = n - (n >> (st[c]-1));
        for (int j = 0; j < w; j++) begin
          got = (n == 8) ? ps8[off + j] : ps64[off + j];
          check(got == expect_ps(u, n, st[c]-1, j, 2*pairs - w),
                $sformatf("N=%0d stage %0d bit %0d at pair %0d", n, st[c]-1, j, pairs));
        end
        if (n == 8 && st[c] == 1) begin
          check(ps8[0] == (u[0]^u[1]^u[2]^u[3]), "printed u1+u2+u3+u4");
          check(ps8[1] == (u[2]^u[3]), "printed u3+u4");
          check(ps8[2] == (u[1]^u[3]), "printed u2+u4");
          check(ps8[3] == u[3], "printed u4");
        end
      end
      if (n == 8) begin
        c8 = cs[1:0];
        leaf8 = (st[c] == ns - 1);
      end else begin
        c64 = cs[4:0];
        leaf64 = (st[c] == ns - 1);
      end
      if (st[c] == ns - 1) begin
        u[2*pairs] = 1'($urandom);
        u[2*pairs+1] = 1'($urandom);
        if (n == 8) begin uo8 = u[2*pairs]; ue8 = u[2*pairs+1]; end
        else begin uo64 = u[2*pairs]; ue64 = u[2*pairs+1]; end
        pairs++;
      end
    end
    @(negedge clk);
    leaf8 = 1'b0; leaf64 = 1'b0;
  endtask

  initial begin
    for (int r = 0; r < 20; r++) run(8);
    for (int r = 0; r < 5; r++) run(64);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
