// tb_tanh_sign_restore -- exhaustive check of the sign stage for every 15-bit
// magnitude and both signs, at the default 16-bit output and with a 20-bit
// output word that exercises the sign extension. The expected value is the
// integer +-mag.
module tb_tanh_sign_restore;
  int checks = 0, failures = 0;
  logic [14:0] mag;
  logic        sign;
  logic [15:0] y16;
  logic [19:0] y20;

  tanh_sign_restore #(.FRAC_OUT(15), .OUT_W(16)) dut16 (.mag, .sign, .y(y16));
  tanh_sign_restore #(.FRAC_OUT(15), .OUT_W(20)) dut20 (.mag, .sign, .y(y20));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e;
    for (int s = 0; s < 2; s++)
      for (int m = 0; m < 32768; m++) begin
        mag = 15'(m); sign = s[0];
        #1;
        e = s ? -m : m;
        checks += 2;
        if (int'($signed(y16)) != e) begin failures++; if (failures < 10) $display("FAIL16 m=%0d s=%0d y=%h", m, s, y16); end
        if (int'($signed(y20)) != e) begin failures++; if (failures < 10) $display("FAIL20 m=%0d s=%0d y=%h", m, s, y20); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
