// tb_ttos: exhaustive test of the two's complement to sign-magnitude
// converter at q = 6: sign and magnitude of every input value, including
// -32, whose magnitude 32 needs the full q-bit magnitude field.
module tb_ttos;
  localparam int Q = 6;
  logic [Q-1:0] i, mag;
  logic sgn;
  int checks = 0, failures = 0;

  ttos #(.Q(Q)) dut (.i, .sgn, .mag);

  initial begin : watchdog
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v;
    for (v = -(1 << (Q-1)); v < (1 << (Q-1)); v++) begin
      i = Q'(v);
      #1;
      checks += 2;
      if (sgn != (v < 0)) begin failures++; $display("FAIL sign of %0d", v); end
      if (int'(mag) != (v < 0 ? -v : v)) begin failures++; $display("FAIL mag of %0d got %0d", v, mag); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
