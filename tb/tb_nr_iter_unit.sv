// tb_nr_iter_unit -- checks one Newton-Raphson step against real arithmetic:
// for random d in [0.5, 1) and x_in within +-12% of 1/d, x_out must equal
// x_in * (2 - d * x_in) to within 3 LSBs (2^-16 each) and must not exceed 1/d
// by more than three LSBs (truncating d * x_in can push it just above 1/d). The relative error must shrink as (error)^2.
module tb_nr_iter_unit;
  int checks = 0, failures = 0;
  logic [15:0] d;
  logic [17:0] x_in, x_out;

  nr_iter_unit #(.W(16)) dut (.d(d), .x_in(x_in), .x_out(x_out));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real dv, xv, ev, gv, e_in, e_out;
    for (int n = 0; n < 20000; n++) begin
      d    = 16'($urandom_range(32768, 65535));
      dv   = real'(d) / 65536.0;
      xv   = (1.0 / dv) * (1.0 + (real'($urandom_range(0, 24000)) - 12000.0) / 100000.0);
      x_in = 18'(int'($floor(xv * 65536.0)));
      xv   = real'(x_in) / 65536.0;
      #1;
      ev = xv * (2.0 - dv * xv);
      gv = real'(x_out) / 65536.0;
      e_in  = xv * dv - 1.0;
      e_out = gv * dv - 1.0;
      checks++;
      if (gv - ev > 3.0 / 65536.0 || ev - gv > 3.0 / 65536.0 || gv > 1.0 / dv + 3.0 / 65536.0 ||
          (e_out < 0 ? -e_out : e_out) > e_in * e_in + 4.0 / 65536.0) begin
        failures++;
        if (failures < 10) $display("FAIL d=%0d x_in=%0d x_out=%0d exp=%f", d, x_in, x_out, ev * 65536.0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
