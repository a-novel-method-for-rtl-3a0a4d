// tb_tanh_core -- streams every s3.12 magnitude 0 .. 8.0 through the core at
// its default parameters (six pipeline registers) and compares tanh_mag with
// the real-arithmetic tanh: the error must stay below 7e-5 (about 2.3 LSBs of
// s.15). The latency (6 clocks) and the sideband are checked for each word,
// and the inputs whose result lies in the top two codes (tanh rounds to one)
// are counted; there must be some.
module tb_tanh_core;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid, out_valid;
  logic [0:0]  in_tag, out_tag;
  logic [15:0] mag;
  logic [14:0] tanh_mag;

  tanh_core dut (
    .clk, .rst_n, .in_valid, .in_tag, .mag, .out_valid, .out_tag, .tanh_mag
  );

  int m_q[$], t_q[$], c_q[$];
  int cycle = 0, saturated = 0;
  real max_err = 0.0;
  always_ff @(posedge clk) cycle <= cycle + 1;

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    int mv, tv, cv; real e;
    checks++;
    if (m_q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
    else begin
      mv = m_q.pop_front(); tv = t_q.pop_front(); cv = c_q.pop_front();
      e = real'(tanh_mag) / 32768.0 - $tanh(real'(mv) / 4096.0);
      if (e < 0) e = -e;
      if (e > max_err) max_err = e;
      if (tanh_mag >= 15'h7FFE) saturated++;
      if (e > 7.0e-5 || int'(out_tag) != tv || cycle - cv != 6) begin
        failures++;
        if (failures < 10) $display("FAIL mag=%0d tanh=%0d err=%e lat=%0d", mv, tanh_mag, e, cycle - cv);
      end
    end
  end

  initial begin
    in_valid = 0; mag = 0; in_tag = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int v = 0; v <= 32768; v++) begin
      @(negedge clk);
      in_valid = 1; mag = 16'(v); in_tag = 1'($urandom);
      m_q.push_back(v); t_q.push_back(int'(in_tag)); c_q.push_back(cycle);
    end
    @(negedge clk) in_valid = 0;
    repeat (8) @(posedge clk);
    checks++;
    if (m_q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", m_q.size()); end
    checks++;
    if (saturated == 0) begin failures++; $display("FAIL saturation region never reached"); end
    $display("max |error| %e, saturated outputs %0d", max_err, saturated);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
