// tb_full_addsub: exhaustive test of the 1-bit full adder-subtractor.
// All 16 combinations of x, y, carry-in and borrow-in are applied; sum and
// carry are compared with the integer x + y + c_in, difference and borrow
// with x - y - b_in (borrow set when the result is negative).
module tb_full_addsub;
  logic x, y, c_in, b_in, s, c_out, d, b_out;
  int checks = 0, failures = 0;

  full_addsub dut (.x, .y, .c_in, .b_in, .s, .c_out, .d, .b_out);

  initial begin : watchdog
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sum, dif;
    for (int v = 0; v < 16; v++) begin
      {x, y, c_in, b_in} = 4'(v);
      #1;
      sum = int'(x) + int'(y) + int'(c_in);
      dif = int'(x) - int'(y) - int'(b_in);
      checks += 4;
      if (s != sum[0])          begin failures++; $display("FAIL s v=%0d", v); end
      if (c_out != (sum >= 2))  begin failures++; $display("FAIL c_out v=%0d", v); end
      if (d != dif[0])          begin failures++; $display("FAIL d v=%0d", v); end
      if (b_out != (dif < 0))   begin failures++; $display("FAIL b_out v=%0d", v); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
