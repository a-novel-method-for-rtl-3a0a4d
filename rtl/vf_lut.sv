// vf_lut -- one 16-entry velocity-factor ROM.
//
// Entry a holds f = exp(-2 * s) = (1 - tanh s) / (1 + tanh s), where s is the
// sum of the place values of the magnitude bits that lut_addr_gen routes to
// the set bits of a. Address 0 is 1.0, a single set bit gives that bit's own
// factor and several set bits give the product of their factors, so one
// lookup replaces up to three multipliers. Entries are unsigned 0.LUT_W
// fractions, rounded to nearest; 1.0 does not fit and is stored as the largest
// code, 1 - 2^-LUT_W (this design's choice). The contents are computed while
// elaborating (tanh_pkg::vf_entry). Combinational read.
module vf_lut
  import tanh_pkg::*;
#(
  parameter int unsigned IN_W    = 16,
  parameter int unsigned FRAC_IN = 12,
  parameter int unsigned LUT_W   = 18,
  parameter int unsigned LUT_IDX = 0
) (
  input  logic [3:0]       addr,
  output logic [LUT_W-1:0] f
);

  typedef logic [LUT_W-1:0] rom_t [16];

  function automatic rom_t build_rom();
    rom_t r;
    for (int a = 0; a < 16; a++)
      r[a] = LUT_W'(vf_entry(IN_W, FRAC_IN, LUT_W, LUT_IDX, a));
    return r;
  endfunction

  localparam rom_t ROM = build_rom();

  assign f = ROM[addr];

endmodule
