// tb_frac_mult -- random check of the truncating fixed-point multiplier in the
// two shapes the datapath uses: 0.18 x 0.18 -> 0.16 and 0.16 x 2.16 -> 1.16.
module tb_frac_mult;
  int checks = 0, failures = 0;
  logic [17:0] a1, b1;
  logic [15:0] p1;
  logic [15:0] a2;
  logic [17:0] b2;
  logic [16:0] p2;

  frac_mult #(.A_W(18), .B_W(18), .P_W(16), .SHIFT(20)) dut1 (.a(a1), .b(b1), .p(p1));
  frac_mult #(.A_W(16), .B_W(18), .P_W(17), .SHIFT(16)) dut2 (.a(a2), .b(b2), .p(p2));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e1, e2;
    for (int n = 0; n < 5000; n++) begin
      a1 = 18'($urandom); b1 = 18'($urandom);
      a2 = 16'($urandom); b2 = 18'($urandom_range(0, 131071));
      if (n == 0) begin a1 = '1; b1 = '1; end
      #1;
      e1 = (longint'(a1) * longint'(b1)) / (longint'(1) << 20);
      e2 = (longint'(a2) * longint'(b2)) / (longint'(1) << 16);
      checks += 2;
      if (longint'(p1) != e1) begin failures++; if (failures < 10) $display("FAIL1 %0d*%0d=%0d exp %0d", a1, b1, p1, e1); end
      if (longint'(p2) != e2) begin failures++; if (failures < 10) $display("FAIL2 %0d*%0d=%0d exp %0d", a2, b2, p2, e2); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
