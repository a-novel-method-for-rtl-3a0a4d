// nr_seed_lut -- starting guess x0 of the Newton-Raphson reciprocal.
//
// d is an unsigned 0.W fraction in [0.5, 1), so its MSB is always one. The
// SEED_BITS bits below the MSB select one of 2^SEED_BITS equal sub-intervals
// [lo, hi), and the table returns 2 / (lo + hi) as an unsigned 2.W number,
// whose relative error is at most (hi - lo) / (hi + lo) (1/9 for two bits).
// Each Newton-Raphson step squares that error. The table size and contents are
// this design's choice; the method only calls for a lookup table producing
// x0. Contents are computed while elaborating (tanh_pkg::nr_seed_entry).
// Combinational read.
module nr_seed_lut
  import tanh_pkg::*;
#(
  parameter int unsigned W         = 16,
  parameter int unsigned SEED_BITS = 2
) (
  input  logic [W-1:0] d,
  output logic [W+1:0] x0
);

  localparam int unsigned ENTRIES = 1 << SEED_BITS;

  typedef logic [W+1:0] rom_t [ENTRIES];

  function automatic rom_t build_rom();
    rom_t r;
    for (int i = 0; i < ENTRIES; i++) r[i] = (W + 2)'(nr_seed_entry(W, SEED_BITS, i));
    return r;
  endfunction

  localparam rom_t ROM = build_rom();

  assign x0 = ROM[d[W-2 -: SEED_BITS]];

endmodule
