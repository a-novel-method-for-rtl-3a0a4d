// tb_vf_lut -- checks every entry of the velocity-factor ROMs.
//
// For the four LUTs of the 16-bit s3.12 configuration (LUT_W = 18) and the two
// LUTs of the 8-bit s3.5 configuration (LUT_W = 10) the expected entry is
// exp(-2 * s) * 2^LUT_W rounded, with s the sum of the place values of the
// routed bits (bit lists written out here), computed with real arithmetic
// and clamped to the largest code. A difference of one code is tolerated for
// double-precision rounding.
module tb_vf_lut;
  int checks = 0, failures = 0;
  logic [3:0]  addr;
  logic [17:0] f16 [4];
  logic [9:0]  f8  [2];

  int map16 [4][4] = '{'{15, 8, 7, 0}, '{14, 9, 6, 1}, '{13, 10, 5, 2}, '{12, 11, 4, 3}};
  int map8  [2][4] = '{'{7, 4, 3, 0}, '{6, 5, 2, 1}};

  for (genvar l = 0; l < 4; l++) begin : g16
    vf_lut #(.IN_W(16), .FRAC_IN(12), .LUT_W(18), .LUT_IDX(l)) dut (.addr(addr), .f(f16[l]));
  end
  for (genvar l = 0; l < 2; l++) begin : g8
    vf_lut #(.IN_W(8), .FRAC_IN(5), .LUT_W(10), .LUT_IDX(l)) dut (.addr(addr), .f(f8[l]));
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint expect_entry(int bits[4], int frac, int w, int a);
    real s, v;
    longint e;
    s = 0.0;
    for (int j = 0; j < 4; j++) if (a[3-j]) s += 2.0 ** (bits[j] - frac);
    v = $exp(-2.0 * s) * (2.0 ** w);
    e = longint'($floor(v + 0.5));
    if (e > (longint'(1) << w) - 1) e = (longint'(1) << w) - 1;
    return e;
  endfunction

  task automatic cmp(longint got, longint e, string what, int l, int a);
    checks++;
    if (got > e + 1 || got < e - 1) begin
      failures++;
      if (failures < 20) $display("FAIL %s lut%0d addr=%0d got=%0d exp=%0d", what, l, a, got, e);
    end
  endtask

  initial begin
    for (int a = 0; a < 16; a++) begin
      addr = 4'(a);
      #1;
      for (int l = 0; l < 4; l++) cmp(longint'(f16[l]), expect_entry(map16[l], 12, 18, a), "s3.12", l, a);
      for (int l = 0; l < 2; l++) cmp(longint'(f8[l]),  expect_entry(map8[l],  5, 10, a), "s3.5", l, a);
    end
    // address 0 is 1.0, stored as the largest code
    addr = 4'd0;
    #1;
    checks++;
    if (f16[0] !== '1) begin failures++; $display("FAIL entry 0 is not the largest code"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
