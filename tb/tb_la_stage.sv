// tb_la_stage: test of one registered decoder stage with P = 4 PEs, q = 6.
// Random input vectors are loaded with en; then every combination of osel
// and random partial-sum vectors is applied and each output compared with
// the min-sum value (osel = 0) or with x[2j+1] + x[2j] / x[2j+1] - x[2j]
// (osel = 1, ps[j] = 0 / 1), saturated.  A cycle with en low and new
// inputs must leave the outputs unchanged.
module tb_la_stage;
  localparam int Q = 6;
  localparam int P = 4;
  logic clk = 1'b0;
  logic en = 1'b0;
  logic [2*P-1:0][Q-1:0] x = '0;
  logic [P-1:0] ps = '0;
  logic osel = 1'b0;
  logic [P-1:0][Q-1:0] y;
  int checks = 0, failures = 0;

  la_stage #(.Q(Q), .P(P)) dut (.clk, .en, .x, .ps, .osel, .y);

  always #5 clk = ~clk;

  function automatic int sat(input int v);
    return v > 31 ? 31 : (v < -32 ? -32 : v);
  endfunction

  function automatic int expect_y(input int a, input int b, input bit os, input bit p);
    int ma, mb, m;
    if (!os) begin
      ma = a < 0 ? -a : a;
      mb = b < 0 ? -b : b;
      m = ma < mb ? ma : mb;
      return sat(((a < 0) != (b < 0)) ? -m : m);
    end
    return p ? sat(b - a) : sat(b + a);
  endfunction

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int xv [2*P];
    for (int it = 0; it < 200; it++) begin
      @(negedge clk);
      for (int k = 0; k < 2*P; k++) begin
        xv[k] = int'($urandom % 64) - 32;
        x[k] = Q'(xv[k]);
      end
      en = 1'b1;
      @(negedge clk);
      en = 1'b0;
      // new inputs without en must not disturb the stored values
      for (int k = 0; k < 2*P; k++) x[k] = Q'($urandom);
      @(negedge clk);
      for (int t = 0; t < 4; t++) begin
        osel = 1'(t & 1);
        ps = P'($urandom);
        #1;
        for (int j = 0; j < P; j++) begin
          checks++;
          if (int'($signed(y[j])) != expect_y(xv[2*j], xv[2*j+1], osel, ps[j])) begin
            failures++;
            if (failures < 10) $display("FAIL it=%0d j=%0d osel=%0d ps=%0d got %0d", it, j, osel, ps[j], $signed(y[j]));
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
