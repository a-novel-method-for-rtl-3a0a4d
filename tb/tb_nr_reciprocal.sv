// tb_nr_reciprocal -- streams random denominators through the three-step
// reciprocal (a register after each step, latency 3) and a two-step
// combinational variant. 1/d is computed in real arithmetic: the three-step
// result must be within 8 LSBs (2^-16 each) of it, the two-step result within
// 2^-11; the latency and the sideband of the pipelined version are checked.
module tb_nr_reciprocal;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid, out_valid, v2;
  logic [15:0] d;
  logic [17:0] recip, recip2;
  logic [7:0]  in_side, out_side;
  logic [0:0]  s2;

  nr_reciprocal #(.W(16), .SEED_BITS(2), .NR_ITERS(3), .PIPE(3'b111), .SIDE_W(8)) dut (
    .clk, .rst_n, .in_valid, .d, .in_side, .out_valid, .recip, .out_side
  );
  nr_reciprocal #(.W(16), .SEED_BITS(2), .NR_ITERS(2), .PIPE(3'b000), .SIDE_W(1)) dut2 (
    .clk, .rst_n, .in_valid(1'b1), .d, .in_side(1'b0), .out_valid(v2), .recip(recip2), .out_side(s2)
  );

  int d_q[$], s_q[$], c_q[$];
  int cycle = 0;
  real max_err3 = 0.0, max_err2 = 0.0;
  always_ff @(posedge clk) cycle <= cycle + 1;

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    int dv, sv, cv; real r, e;
    checks++;
    if (d_q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
    else begin
      dv = d_q.pop_front(); sv = s_q.pop_front(); cv = c_q.pop_front();
      r = 65536.0 / real'(dv);
      e = real'(recip) / 65536.0 - r;
      if (e < 0) e = -e;
      if (e > max_err3) max_err3 = e;
      if (e > 8.0 / 65536.0 || int'(out_side) != sv || cycle - cv != 3) begin
        failures++;
        if (failures < 10) $display("FAIL d=%0d recip=%0d exp=%f lat=%0d", dv, recip, r * 65536.0, cycle - cv);
      end
    end
  end

  initial begin
    real e;
    in_valid = 0; d = 16'h8000; in_side = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 4) != 0);
      d        = 16'($urandom_range(32768, 65535));
      if (n == 1) d = 16'h8000;
      if (n == 2) d = 16'hFFFF;
      in_side  = 8'($urandom);
      if (in_valid) begin d_q.push_back(int'(d)); s_q.push_back(int'(in_side)); c_q.push_back(cycle); end
      #1;
      e = real'(recip2) / 65536.0 - 65536.0 / real'(d);
      if (e < 0) e = -e;
      if (e > max_err2) max_err2 = e;
      checks++;
      if (e > 1.0 / 2048.0) begin failures++; if (failures < 10) $display("FAIL 2-step d=%0d recip=%0d", d, recip2); end
    end
    @(negedge clk) in_valid = 0;
    repeat (6) @(posedge clk);
    checks++;
    if (d_q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", d_q.size()); end
    $display("max |error|: 3 steps %e, 2 steps %e", max_err3, max_err2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
