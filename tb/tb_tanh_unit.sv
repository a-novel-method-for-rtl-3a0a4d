// tb_tanh_unit -- end-to-end test of the top at its default parameters
// (s3.12 in, s.15 out, 18-bit LUTs, 16-bit multipliers, 3 Newton-Raphson
// steps, 1's complement subtractor, latency 7).
//
// Every 16-bit input code is applied once, in random order and with random
// idle cycles between inputs. Each result is compared with the
// real-arithmetic tanh (bound 7e-5, about 2.3 LSBs of s.15) and must appear
// exactly 7 clocks after its input. Afterwards the stored results are checked
// for odd symmetry, y(-x) = -y(x). Finally a burst is sent and reset is
// asserted while it is in flight: nothing may come out afterwards.
// The events the design has to handle are counted and each must occur:
// negative inputs (sign path), the most negative code, results in the
// saturated region (tanh rounds to one), idle cycles and back-to-back inputs,
// and the pipeline flush by reset.
module tb_tanh_unit;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic               in_valid, out_valid;
  logic signed [15:0] x;
  logic        [15:0] y;

  tanh_unit dut (.clk, .rst_n, .in_valid, .x, .out_valid, .y);

  int x_q[$], c_q[$];
  int cycle = 0;
  always_ff @(posedge clk) cycle <= cycle + 1;

  int  result [65536];
  bit  seen   [65536];
  int  n_neg = 0, n_most_neg = 0, n_sat = 0, n_idle = 0, n_b2b = 0, n_flush = 0, n_after_flush = 0;
  bit  flushing = 0;
  real max_err = 0.0;

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    int xv, cv; real e;
    if (flushing) n_after_flush++;
    else begin
      checks++;
      if (x_q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
      else begin
        xv = x_q.pop_front(); cv = c_q.pop_front();
        e = real'($signed(y)) / 32768.0 - $tanh(real'(xv) / 4096.0);
        if (e < 0) e = -e;
        if (e > max_err) max_err = e;
        result[xv + 32768] = int'($signed(y));
        seen[xv + 32768]   = 1;
        if ($signed(y) >= 16'sd32766 || $signed(y) <= -16'sd32766) n_sat++;
        if (e > 7.0e-5 || cycle - cv != 7) begin
          failures++;
          if (failures < 10) $display("FAIL x=%0d y=%0d err=%e latency=%0d", xv, $signed(y), e, cycle - cv);
        end
      end
    end
  end

  initial begin
    int order [65536];
    int j, tmp;
    bit prev_valid;
    for (int i = 0; i < 65536; i++) order[i] = i - 32768;
    for (int i = 65535; i > 0; i--) begin
      j = $urandom_range(0, i);
      tmp = order[i]; order[i] = order[j]; order[j] = tmp;
    end
    in_valid = 0; x = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    prev_valid = 0;
    for (int i = 0; i < 65536; i++) begin
      while ($urandom_range(0, 4) == 0) begin
        @(negedge clk) in_valid = 0; n_idle++; prev_valid = 0;
      end
      @(negedge clk);
      in_valid = 1; x = 16'(order[i]);
      if (prev_valid) n_b2b++;
      prev_valid = 1;
      if (order[i] < 0) n_neg++;
      if (order[i] == -32768) n_most_neg++;
      x_q.push_back(order[i]); c_q.push_back(cycle);
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (x_q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", x_q.size()); end

    // odd symmetry of the stored results
    for (int v = 1; v < 32768; v++) begin
      checks++;
      if (!seen[v + 32768] || !seen[32768 - v] || result[32768 - v] != -result[32768 + v]) begin
        failures++;
        if (failures < 10) $display("FAIL symmetry x=%0d: %0d vs %0d", v, result[32768 + v], result[32768 - v]);
      end
    end

    // reset while a burst is in flight flushes the pipeline
    for (int i = 0; i < 4; i++) begin
      @(negedge clk) in_valid = 1; x = 16'($urandom);
    end
    @(negedge clk) in_valid = 0; rst_n = 0; flushing = 1;
    @(negedge clk) rst_n = 1;
    n_flush++;
    repeat (12) @(posedge clk);
    checks++;
    if (n_after_flush != 0) begin failures++; $display("FAIL %0d outputs after reset", n_after_flush); end

    // every event must have happened
    checks++;
    if (n_neg == 0 || n_most_neg == 0 || n_sat == 0 || n_idle == 0 || n_b2b == 0 || n_flush == 0) begin
      failures++;
      $display("FAIL an event never happened");
    end
    $display("max |error| %e", max_err);
    $display("events: negative %0d, most negative %0d, saturated %0d, idle %0d, back-to-back %0d, flush %0d",
             n_neg, n_most_neg, n_sat, n_idle, n_b2b, n_flush);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
