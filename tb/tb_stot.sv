// tb_stot: exhaustive test of the sign-magnitude to two's complement
// converter at q = 6: every sign and every 7-bit magnitude, compared with
// the signed value saturated to [-32, 31].
module tb_stot;
  localparam int Q = 6;
  logic sgn;
  logic [Q:0] mag;
  logic [Q-1:0] o;
  int checks = 0, failures = 0;

  stot #(.Q(Q)) dut (.sgn, .mag, .o);

  initial begin : watchdog
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v, e;
    for (int sg = 0; sg < 2; sg++)
      for (int m = 0; m < (1 << (Q+1)); m++) begin
        sgn = 1'(sg); mag = (Q+1)'(m);
        #1;
        v = sg ? -m : m;
        e = v > 31 ? 31 : (v < -32 ? -32 : v);
        checks++;
        if (int'($signed(o)) != e) begin
          failures++;
          if (failures < 10) $display("FAIL sgn=%0d mag=%0d got %0d want %0d", sg, m, $signed(o), e);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
