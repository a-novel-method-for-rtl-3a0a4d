// fx_operand_prep -- forms the halved numerator and denominator of
// tanh = (1 - f_x) / (1 + f_x).
//
// f is an unsigned 0.W fraction in [0, 1).
//   den = (1 + f) / 2 = {1, f[W-1:1]}: adding one is a concatenation and the
//         halving a shift, so den always lies in [0.5, 1), the range the
//         Newton-Raphson reciprocal needs.
//   num = (1 - f) / 2. With ONES_COMP = 1 the subtraction is the 1's
//         complement ~f, i.e. 1 - f - 2^-W, which costs only inverters; with
//         ONES_COMP = 0 it is the exact 2's complement 2^W - f, computed with
//         one extra bit so that f = 0 yields exactly 0.5.
// Both results are unsigned 0.W fractions; the shared factor 1/2 cancels in
// the quotient. Combinational. The halving and the 1's complement option
// follow the method; the exact bit layout is this design's choice.
module fx_operand_prep #(
  parameter int unsigned W         = 16,
  parameter bit          ONES_COMP = 1'b1
) (
  input  logic [W-1:0] f,
  output logic [W-1:0] num,
  output logic [W-1:0] den
);

  logic [W:0] two_c;

  always_comb begin
    den   = {1'b1, f[W-1:1]};
    two_c = {1'b1, {W{1'b0}}} - {1'b0, f};
    if (ONES_COMP) num = {1'b0, ~f[W-1:1]};
    else           num = W'(two_c >> 1);
  end

endmodule
