// tb_merged_pe: exhaustive test of the merged PE at q = 6.
// For every pair of inputs the three outputs are compared with integer
// arithmetic saturated to [-32, 31]: out1 the min-sum rule
// sgn(a) sgn(b) min(|a|,|b|), out2 = in1 + in2, out3 = in1 - in2.
module tb_merged_pe;
  localparam int Q = 6;
  logic [Q-1:0] in1, in2, out1, out2, out3;
  int checks = 0, failures = 0;

  merged_pe #(.Q(Q)) dut (.in1, .in2, .out1, .out2, .out3);

  function automatic int sat(input int v);
    return v > 31 ? 31 : (v < -32 ? -32 : v);
  endfunction

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a, b, ma, mb, f;
    for (a = -32; a < 32; a++)
      for (b = -32; b < 32; b++) begin
        in2 = Q'(a); in1 = Q'(b);
        #1;
        ma = a < 0 ? -a : a;
        mb = b < 0 ? -b : b;
        f = ((a < 0) != (b < 0)) ? -(ma < mb ? ma : mb) : (ma < mb ? ma : mb);
        checks += 3;
        if (int'($signed(out1)) != sat(f)) begin
          failures++;
          if (failures < 10) $display("FAIL out1 a=%0d b=%0d got %0d", a, b, $signed(out1));
        end
        if (int'($signed(out2)) != sat(b + a)) begin
          failures++;
          if (failures < 10) $display("FAIL out2 a=%0d b=%0d got %0d", a, b, $signed(out2));
        end
        if (int'($signed(out3)) != sat(b - a)) begin
          failures++;
          if (failures < 10) $display("FAIL out3 a=%0d b=%0d got %0d", a, b, $signed(out3));
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
