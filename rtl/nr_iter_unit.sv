// nr_iter_unit -- one Newton-Raphson step for the reciprocal of d.
//
// x_out = x_in * (2 - d * x_in). d is an unsigned 0.W fraction in [0.5, 1),
// x_in and x_out are unsigned 2.W numbers. The product t = d * x_in is kept as
// a 1.W number; it lies below 2 for any seed from nr_seed_lut. In exact
// arithmetic a step never lands above 1/d, so from the second step on t is at
// or just below 1 (truncation can move x an LSB or two above 1/d). 2 - t is
// the 2's complement of t in W+1 bits, as in the iterative unit of the method
// (multiplier, 2's complement, multiplier). Both products are truncated (this
// design's choice).
// Purely combinational.
module nr_iter_unit #(
  parameter int unsigned W = 16
) (
  input  logic [W-1:0] d,
  input  logic [W+1:0] x_in,
  output logic [W+1:0] x_out
);

  logic [W:0] t;        // d * x_in, 1.W
  logic [W:0] two_m_t;  // 2 - t,    1.W

  frac_mult #(.A_W(W), .B_W(W + 2), .P_W(W + 1), .SHIFT(W)) u_dx (
    .a(d), .b(x_in), .p(t)
  );

  assign two_m_t = ~t + 1'b1;

  frac_mult #(.A_W(W + 2), .B_W(W + 1), .P_W(W + 2), .SHIFT(W)) u_xr (
    .a(x_in), .b(two_m_t), .p(x_out)
  );

endmodule
