// tb_type1_pe: exhaustive test of the q-bit adder-subtractor at q = 6.
// Every operand pair is applied; {c_q, s} must equal x + y and d, b_q must
// equal x - y modulo 2^q and (x < y).
module tb_type1_pe;
  localparam int Q = 6;
  logic [Q-1:0] x, y, s, d;
  logic c_q, b_q;
  int checks = 0, failures = 0;

  type1_pe #(.Q(Q)) dut (.x, .y, .s, .c_q, .d, .b_q);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sum, dif;
    for (int a = 0; a < (1 << Q); a++)
      for (int b = 0; b < (1 << Q); b++) begin
        x = Q'(a); y = Q'(b);
        #1;
        sum = a + b;
        dif = a - b;
        checks += 2;
        if ({c_q, s} != (Q+1)'(sum)) begin
          failures++;
          if (failures < 10) $display("FAIL sum %0d+%0d got %0d", a, b, {c_q, s});
        end
        if (d != Q'(dif) || b_q != (a < b)) begin
          failures++;
          if (failures < 10) $display("FAIL dif %0d-%0d got %0d b=%0d", a, b, d, b_q);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
