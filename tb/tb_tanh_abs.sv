// tb_tanh_abs -- exhaustive check of sign detection and absolute value.
//
// Every 16-bit input is applied; the expected sign and magnitude are worked
// out with integer arithmetic in the testbench.
module tb_tanh_abs;
  int checks = 0, failures = 0;
  logic signed [15:0] x;
  logic        [15:0] mag;
  logic               sign;

  tanh_abs #(.IN_W(16)) dut (.x(x), .mag(mag), .sign(sign));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v, exp_mag;
    for (v = -32768; v < 32768; v++) begin
      x = 16'(v);
      #1;
      exp_mag = (v < 0) ? -v : v;
      checks++;
      if (mag !== 16'(exp_mag) || sign !== (v < 0)) begin
        failures++;
        if (failures < 10) $display("FAIL x=%0d mag=%0d sign=%0d", v, mag, sign);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
