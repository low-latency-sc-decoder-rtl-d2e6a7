// tb_half_addsub: exhaustive test of the 1-bit half adder-subtractor
// against x + y and x - y computed as integers.
module tb_half_addsub;
  logic x, y, sd, c_out, b_out;
  int checks = 0, failures = 0;

  half_addsub dut (.x, .y, .sd, .c_out, .b_out);

  initial begin : watchdog
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sum, dif;
    for (int v = 0; v < 4; v++) begin
      {x, y} = 2'(v);
      #1;
      sum = int'(x) + int'(y);
      dif = int'(x) - int'(y);
      checks += 3;
      if (sd != sum[0] || sd != dif[0]) begin failures++; $display("FAIL sd v=%0d", v); end
      if (c_out != (sum >= 2))          begin failures++; $display("FAIL c_out v=%0d", v); end
      if (b_out != (dif < 0))           begin failures++; $display("FAIL b_out v=%0d", v); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
