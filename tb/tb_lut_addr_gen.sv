// tb_lut_addr_gen -- checks the magnitude-bit to LUT-address routing.
//
// The expected grouping for a 16-bit magnitude is written out as explicit
// bit lists (MSB first): LUT0 {15,8,7,0}, LUT1 {14,9,6,1}, LUT2 {13,10,5,2},
// LUT3 {12,11,4,3}. Every one-hot magnitude and random magnitudes are applied.
module tb_lut_addr_gen;
  int checks = 0, failures = 0;
  logic [15:0]       mag;
  logic [3:0][3:0]   addr;

  // bit list per LUT, index 0 = address MSB
  int map [4][4] = '{'{15, 8, 7, 0}, '{14, 9, 6, 1}, '{13, 10, 5, 2}, '{12, 11, 4, 3}};

  lut_addr_gen #(.IN_W(16)) dut (.mag(mag), .addr(addr));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    logic [3:0] e;
    for (int l = 0; l < 4; l++) begin
      for (int j = 0; j < 4; j++) e[3-j] = mag[map[l][j]];
      checks++;
      if (addr[l] !== e) begin
        failures++;
        if (failures < 10) $display("FAIL mag=%h lut%0d addr=%b exp=%b", mag, l, addr[l], e);
      end
    end
  endtask

  initial begin
    for (int b = 0; b < 16; b++) begin
      mag = 16'(1) << b;
      #1 check();
    end
    for (int n = 0; n < 2000; n++) begin
      mag = 16'($urandom);
      #1 check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
