// tb_fx_operand_prep -- exhaustive check of the halved numerator and
// denominator for every 16-bit f, with the 1's and the 2's complement
// subtractor. Expected values follow from (1 - f)/2 and (1 + f)/2 in integer
// units of 2^-16: 1's complement gives (2^16 - 1 - f) div 2, 2's complement
// (2^16 - f) div 2, the denominator (2^16 + f) div 2.
module tb_fx_operand_prep;
  int checks = 0, failures = 0;
  logic [15:0] f, num1, den1, num2, den2;

  fx_operand_prep #(.W(16), .ONES_COMP(1)) dut1 (.f(f), .num(num1), .den(den1));
  fx_operand_prep #(.W(16), .ONES_COMP(0)) dut2 (.f(f), .num(num2), .den(den2));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e_n1, e_n2, e_d;
    for (int v = 0; v < 65536; v++) begin
      f = 16'(v);
      #1;
      e_n1 = (65536 - 1 - v) / 2;
      e_n2 = (65536 - v) / 2;
      e_d  = (65536 + v) / 2;
      checks += 3;
      if (int'(num1) != e_n1) begin failures++; if (failures < 10) $display("FAIL 1s f=%0d num=%0d exp %0d", v, num1, e_n1); end
      if (int'(num2) != e_n2) begin failures++; if (failures < 10) $display("FAIL 2s f=%0d num=%0d exp %0d", v, num2, e_n2); end
      if (int'(den1) != e_d || int'(den2) != e_d) begin failures++; if (failures < 10) $display("FAIL den f=%0d", v); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
