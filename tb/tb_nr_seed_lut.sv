// tb_nr_seed_lut -- checks the Newton-Raphson starting guess for every 16-bit
// d in [0.5, 1): x0 must be the rounded value of 2 / (lo + hi) of d's quarter
// of the interval (computed here in real arithmetic), and its relative error
// |x0 * d - 1| must stay within 1/9.
module tb_nr_seed_lut;
  int checks = 0, failures = 0;
  logic [15:0] d;
  logic [17:0] x0;

  nr_seed_lut #(.W(16), .SEED_BITS(2)) dut (.d(d), .x0(x0));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real dv, lo, xv, err;
    int  q, e;
    for (int v = 32768; v < 65536; v++) begin
      d  = 16'(v);
      #1;
      dv = real'(v) / 65536.0;
      q  = int'($floor((dv - 0.5) * 8.0));
      lo = 0.5 + q / 8.0;
      e  = int'($floor(2.0 / (2.0 * lo + 0.125) * 65536.0 + 0.5));
      xv = real'(x0) / 65536.0;
      err = xv * dv - 1.0;
      if (err < 0) err = -err;
      checks++;
      if (int'(x0) != e || err > 1.0 / 9.0 + 1.0e-4) begin
        failures++;
        if (failures < 10) $display("FAIL d=%0d x0=%0d exp=%0d err=%f", v, x0, e, err);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
