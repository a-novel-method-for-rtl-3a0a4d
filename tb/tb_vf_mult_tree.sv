// tb_vf_mult_tree -- streams random LUT words through the 4-input multiplier
// tree (both pipeline registers on, latency 2) and a 2-input tree without
// registers. Expected products are computed with integer arithmetic and the
// 4-input tree's latency is checked against its valid output.
module tb_vf_mult_tree;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic               in_valid;
  logic [7:0]         in_side;
  logic [3:0][17:0]   f_in;
  logic               out_valid;
  logic [7:0]         out_side;
  logic [15:0]        f_x;

  logic [1:0][17:0]   f2_in;
  logic [15:0]        f2_x;
  logic               v2;
  logic [0:0]         s2;

  vf_mult_tree #(.N(4), .LUT_W(18), .MUL_W(16), .SIDE_W(8), .PIPE_L1(1), .PIPE_OUT(1)) dut (
    .clk, .rst_n, .in_valid, .in_side, .f_in, .out_valid, .out_side, .f_x
  );
  vf_mult_tree #(.N(2), .LUT_W(18), .MUL_W(16), .SIDE_W(1), .PIPE_L1(0), .PIPE_OUT(0)) dut2 (
    .clk, .rst_n, .in_valid(1'b1), .in_side(1'b0), .f_in(f2_in), .out_valid(v2), .out_side(s2), .f_x(f2_x)
  );

  longint exp_q[$];
  int     side_q[$];
  int     cyc_q[$];
  int     cycle = 0;
  always_ff @(posedge clk) cycle <= cycle + 1;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint model4(logic [3:0][17:0] f);
    longint a, b;
    a = (longint'(f[0]) * longint'(f[1])) >> 20;
    b = (longint'(f[2]) * longint'(f[3])) >> 20;
    return (a * b) >> 16;
  endfunction

  // output monitor
  always @(posedge clk) if (rst_n && out_valid) begin
    longint e; int s, c;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
    else begin
      e = exp_q.pop_front(); s = side_q.pop_front(); c = cyc_q.pop_front();
      if (longint'(f_x) != e || int'(out_side) != s || cycle - c != 2) begin
        failures++;
        if (failures < 10) $display("FAIL f_x=%0d exp=%0d side=%0d/%0d lat=%0d", f_x, e, out_side, s, cycle - c);
      end
    end
  end

  initial begin
    in_valid = 0; in_side = 0; f_in = '0; f2_in = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      for (int k = 0; k < 4; k++) f_in[k] = 18'($urandom);
      if (n == 5) f_in = '1;
      in_side = 8'($urandom);
      f2_in[0] = 18'($urandom); f2_in[1] = 18'($urandom);
      if (in_valid) begin
        exp_q.push_back(model4(f_in)); side_q.push_back(int'(in_side)); cyc_q.push_back(cycle);
      end
      #1;
      checks++;
      if (longint'(f2_x) != ((longint'(f2_in[0]) * longint'(f2_in[1])) >> 20)) begin
        failures++;
        if (failures < 10) $display("FAIL N=2 f_x=%0d", f2_x);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
