// tb_la_ctrl: test of the schedule controller at N = 8 and N = 32.
// The expected time chart is built here from its recursive definition with
// an explicit stack (a stage is followed by its subtree on the min-sum path,
// then by the same subtree on the look-ahead path).  Each cycle the
// controller's stage enables, leaf and last flags and the select of the
// stage feeding the active one are compared with it; a codeword must take
// exactly N-1 cycles, and at N = 8 the active stages must be 1,2,3,3,2,3,3
// as in the published time chart.  A start pulse during busy is ignored.
module tb_la_ctrl;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  initial begin : watchdog
    #1000000;
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

  logic start8 = 1'b0, start32 = 1'b0;
  logic busy8, leaf8, last8, busy32, leaf32, last32;
  logic [1:0] en8, os8;
  logic [3:0] en32, os32;

  la_ctrl #(.N(8))  u8  (.clk, .rst_n, .start(start8),  .busy(busy8),  .stage_en(en8),  .osel(os8),  .leaf(leaf8),  .last(last8));
  la_ctrl #(.N(32)) u32 (.clk, .rst_n, .start(start32), .busy(busy32), .stage_en(en32), .osel(os32), .leaf(leaf32), .last(last32));

  // expected schedule: list of (stage, feeding select)
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

  initial begin
    int st [$], sl [$];
    int fig [7] = '{0, 1, 2, 2, 1, 2, 2};
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int rep = 0; rep < 3; rep++) begin
      // N = 8
      build(3, st, sl);
      check(st.size() == 7, "N=8 schedule length");
      for (int c = 0; c < 7; c++) check(st[c] == fig[c], "N=8 schedule matches the published chart");
      @(negedge clk);
      start8 = 1'b1;
      for (int c = 0; c < st.size(); c++) begin
        #1;
        if (c == 3) start8 = 1'b1; else if (c > 0) start8 = 1'b0;
        #1;
        check(leaf8 == (st[c] == 2), $sformatf("N=8 leaf c=%0d", c));
        if (st[c] < 2) check(en8 == 2'(1 << st[c]), $sformatf("N=8 enable c=%0d", c));
        else check(en8 == 2'b00, $sformatf("N=8 no enable at leaf c=%0d", c));
        if (st[c] > 0) check(os8[st[c]-1] == 1'(sl[c]), $sformatf("N=8 select c=%0d", c));
        check(last8 == (c == st.size() - 1), $sformatf("N=8 last c=%0d", c));
        check(busy8 == (c > 0), $sformatf("N=8 busy c=%0d", c));
        @(negedge clk);
        start8 = 1'b0;
      end
      #1 check(!busy8, "N=8 idle after N-1 cycles");
      // N = 32
      build(5, st, sl);
      check(st.size() == 31, "N=32 schedule length");
      @(negedge clk);
      start32 = 1'b1;
      for (int c = 0; c < st.size(); c++) begin
        #2;
        check(leaf32 == (st[c] == 4), $sformatf("N=32 leaf c=%0d", c));
        if (st[c] < 4) check(en32 == 4'(1 << st[c]), $sformatf("N=32 enable c=%0d", c));
        if (st[c] > 0) check(os32[st[c]-1] == 1'(sl[c]), $sformatf("N=32 select c=%0d", c));
        check(last32 == (c == st.size() - 1), $sformatf("N=32 last c=%0d", c));
        @(negedge clk);
        start32 = 1'b0;
      end
      #1 check(!busy32, "N=32 idle after N-1 cycles");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
