// frac_mult -- unsigned fixed-point multiplier with truncation.
//
// p = (a * b) >> SHIFT, keeping the low P_W bits of the shifted product. With
// a and b holding fractions of FA and FB bits, SHIFT = FA + FB - FP yields a
// product with FP fraction bits; the discarded low bits are truncated, which
// is this design's choice. The caller picks P_W so that no high bit is lost.
// Purely combinational.
module frac_mult #(
  parameter int unsigned A_W   = 16,
  parameter int unsigned B_W   = 16,
  parameter int unsigned P_W   = 16,
  parameter int unsigned SHIFT = 16
) (
  input  logic [A_W-1:0] a,
  input  logic [B_W-1:0] b,
  output logic [P_W-1:0] p
);

  logic [A_W+B_W-1:0] full;

  always_comb begin
    full = a * b;
    p    = P_W'(full >> SHIFT);
  end

endmodule
