// lut_addr_gen -- builds the four-bit address of every velocity-factor LUT.
//
// The magnitude is split over IN_W/4 LUTs. Instead of feeding each LUT four
// neighbouring bits, address bit j of LUT l takes magnitude bit
// tanh_pkg::lut_bit(IN_W, l, j), so that each LUT combines two large and two
// small place values and the product of the LUT outputs loses less precision.
// For a 16-bit magnitude LUT0 sees {x15, x8, x7, x0} (MSB first), as the
// method prescribes; LUT1..LUT3 see {x14,x9,x6,x1}, {x13,x10,x5,x2} and
// {x12,x11,x4,x3}, which extends the same pattern (this design's choice).
// Wiring only, no gates: combinational.
module lut_addr_gen
  import tanh_pkg::*;
#(
  parameter int unsigned IN_W  = 16,
  localparam int unsigned N_LUT = IN_W / 4
) (
  input  logic [IN_W-1:0]             mag,
  output logic [N_LUT-1:0][3:0]       addr
);

  for (genvar l = 0; l < N_LUT; l++) begin : g_lut
    for (genvar j = 0; j < 4; j++) begin : g_bit
      assign addr[l][j] = mag[lut_bit(IN_W, l, j)];
    end
  end

endmodule
