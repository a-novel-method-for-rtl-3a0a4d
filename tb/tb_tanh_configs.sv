// tb_tanh_configs -- the configurations the method was evaluated at, each
// swept over every input code:
//   * arithmetic variants for s3.12 -> s.15: 3 or 2 Newton-Raphson steps,
//     1's or 2's complement subtractor (error bounds 7e-5 and 3e-4);
//   * pipeline depths of 1, 2 and 7 clocks for s3.12 -> s.15 and for
//     s3.5 -> s.7 (8-bit, LUT 10 bits, multipliers 8 bits, bound 2 LSBs).
// The measured maximum error of every configuration is printed, and two
// Newton-Raphson steps must come out clearly less accurate than three.
module tb_tanh_configs;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int NC = 10;
  logic done [NC];
  int   c [NC], f [NC], nm [NC];
  real  me [NC];

  tanh_sweep #(.NAME("s3.12 NR3 1's (main)"))                    u0 (.clk, .rst_n, .done(done[0]), .checks(c[0]), .failures(f[0]), .n_max(nm[0]), .max_err(me[0]));
  tanh_sweep #(.NAME("s3.12 NR3 2's"), .ONES_COMP(0))            u1 (.clk, .rst_n, .done(done[1]), .checks(c[1]), .failures(f[1]), .n_max(nm[1]), .max_err(me[1]));
  tanh_sweep #(.NAME("s3.12 NR2 1's"), .NR_ITERS(2), .PIPE_MASK(7'b1011111), .LATENCY(6), .MAX_ERR(3.0e-4))
                                                                 u2 (.clk, .rst_n, .done(done[2]), .checks(c[2]), .failures(f[2]), .n_max(nm[2]), .max_err(me[2]));
  tanh_sweep #(.NAME("s3.12 NR2 2's"), .NR_ITERS(2), .ONES_COMP(0), .PIPE_MASK(7'b1011111), .LATENCY(6), .MAX_ERR(3.0e-4))
                                                                 u3 (.clk, .rst_n, .done(done[3]), .checks(c[3]), .failures(f[3]), .n_max(nm[3]), .max_err(me[3]));
  tanh_sweep #(.NAME("s3.12 latency 1"), .PIPE_MASK(7'b1000000), .LATENCY(1))
                                                                 u4 (.clk, .rst_n, .done(done[4]), .checks(c[4]), .failures(f[4]), .n_max(nm[4]), .max_err(me[4]));
  tanh_sweep #(.NAME("s3.12 latency 2"), .PIPE_MASK(7'b1000100), .LATENCY(2))
                                                                 u5 (.clk, .rst_n, .done(done[5]), .checks(c[5]), .failures(f[5]), .n_max(nm[5]), .max_err(me[5]));
  tanh_sweep #(.NAME("s3.5 latency 7"), .IN_W(8), .FRAC_IN(5), .FRAC_OUT(7), .LUT_W(10), .MUL_W(8), .MAX_ERR(2.0 / 128.0))
                                                                 u6 (.clk, .rst_n, .done(done[6]), .checks(c[6]), .failures(f[6]), .n_max(nm[6]), .max_err(me[6]));
  tanh_sweep #(.NAME("s3.5 latency 2"), .IN_W(8), .FRAC_IN(5), .FRAC_OUT(7), .LUT_W(10), .MUL_W(8), .PIPE_MASK(7'b1000100), .LATENCY(2), .MAX_ERR(2.0 / 128.0))
                                                                 u7 (.clk, .rst_n, .done(done[7]), .checks(c[7]), .failures(f[7]), .n_max(nm[7]), .max_err(me[7]));
  tanh_sweep #(.NAME("s3.5 latency 1"), .IN_W(8), .FRAC_IN(5), .FRAC_OUT(7), .LUT_W(10), .MUL_W(8), .PIPE_MASK(7'b1000000), .LATENCY(1), .MAX_ERR(2.0 / 128.0))
                                                                 u8 (.clk, .rst_n, .done(done[8]), .checks(c[8]), .failures(f[8]), .n_max(nm[8]), .max_err(me[8]));
  tanh_sweep #(.NAME("s3.5 NR3 2's"), .IN_W(8), .FRAC_IN(5), .FRAC_OUT(7), .LUT_W(10), .MUL_W(8), .ONES_COMP(0), .MAX_ERR(2.0 / 128.0))
                                                                 u9 (.clk, .rst_n, .done(done[9]), .checks(c[9]), .failures(f[9]), .n_max(nm[9]), .max_err(me[9]));

  int checks = 0, failures = 0;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all_done;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    do begin
      @(posedge clk);
      all_done = 1;
      for (int i = 0; i < NC; i++) if (!done[i]) all_done = 0;
    end while (!all_done);
    for (int i = 0; i < NC; i++) begin checks += c[i]; failures += f[i]; end
    // two Newton-Raphson steps must be visibly less accurate than three
    checks++;
    if (!(me[2] > 2.0 * me[0])) begin failures++; $display("FAIL NR2 not less accurate than NR3"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
