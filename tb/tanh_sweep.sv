// tanh_sweep -- applies every input code of one tanh_unit configuration, one
// per clock, and compares each result with the real-arithmetic tanh.
//
// A result passes when |y - tanh(x)| <= MAX_ERR and it appears exactly
// LATENCY clocks after its input. The largest error seen is printed with the
// configuration's name. Outputs equal to the largest positive code are
// counted in n_max (the clamp in the final stage can produce them). done rises
// when the sweep and the pipeline have drained.
module tanh_sweep #(
  parameter string       NAME      = "s3.12",
  parameter int unsigned IN_W      = 16,
  parameter int unsigned FRAC_IN   = 12,
  parameter int unsigned FRAC_OUT  = 15,
  parameter int unsigned LUT_W     = 18,
  parameter int unsigned MUL_W     = 16,
  parameter int unsigned NR_ITERS  = 3,
  parameter bit          ONES_COMP = 1'b1,
  parameter bit [6:0]    PIPE_MASK = 7'b1111111,
  parameter int          LATENCY   = 7,
  parameter real         MAX_ERR   = 7.0e-5
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_max,
  output real  max_err
);

  localparam int OUT_W = FRAC_OUT + 1;

  logic                   in_valid, out_valid;
  logic signed [IN_W-1:0] x;
  logic [OUT_W-1:0]       y;

  tanh_unit #(
    .IN_W(IN_W), .FRAC_IN(FRAC_IN), .FRAC_OUT(FRAC_OUT), .OUT_W(OUT_W),
    .LUT_W(LUT_W), .MUL_W(MUL_W), .NR_ITERS(NR_ITERS), .ONES_COMP(ONES_COMP),
    .PIPE_MASK(PIPE_MASK)
  ) dut (.clk, .rst_n, .in_valid, .x, .out_valid, .y);

  int x_q[$], c_q[$];
  int cycle = 0;
  always_ff @(posedge clk) cycle <= cycle + 1;

  initial begin
    done = 0; checks = 0; failures = 0; n_max = 0; max_err = 0.0;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    int xv, cv; real e;
    checks++;
    if (x_q.size() == 0) begin failures++; $display("%s FAIL unexpected output", NAME); end
    else begin
      xv = x_q.pop_front(); cv = c_q.pop_front();
      e = real'($signed(y)) / (2.0 ** FRAC_OUT) - $tanh(real'(xv) / (2.0 ** FRAC_IN));
      if (e < 0) e = -e;
      if (e > max_err) max_err = e;
      if ($signed(y) == (2 ** FRAC_OUT) - 1) n_max++;
      if (e > MAX_ERR || cycle - cv != LATENCY) begin
        failures++;
        if (failures < 6) $display("%s FAIL x=%0d y=%0d err=%e latency=%0d", NAME, xv, $signed(y), e, cycle - cv);
      end
    end
  end

  initial begin
    in_valid = 0; x = '0;
    @(posedge rst_n);
    for (int v = -(2 ** (IN_W - 1)); v < 2 ** (IN_W - 1); v++) begin
      @(negedge clk);
      in_valid = 1; x = IN_W'(v);
      x_q.push_back(v); c_q.push_back(cycle);
    end
    @(negedge clk) in_valid = 0;
    repeat (LATENCY + 2) @(posedge clk);
    checks++;
    if (x_q.size() != 0) begin failures++; $display("%s FAIL %0d outputs missing", NAME, x_q.size()); end
    $display("%-28s latency %0d  max |error| %e  (%0d checks, %0d failures)", NAME, LATENCY, max_err, checks, failures);
    done = 1;
  end

endmodule
