// tanh_sign_restore -- puts the input sign back on the result.
//
// mag is tanh(|x|) as an unsigned 0.FRAC_OUT fraction. A 2:1 multiplexer
// selects mag (sign = 0) or its 2's complement (sign = 1), and the signed
// 1.FRAC_OUT result is sign-extended to OUT_W bits; with the default
// OUT_W = FRAC_OUT + 1 = 16 (s.15) no bits are added. Combinational. The
// negate / select / sign-extend order follows the method's data flow; the
// output width parameter is this design's choice.
module tanh_sign_restore #(
  parameter int unsigned FRAC_OUT = 15,
  parameter int unsigned OUT_W    = 16
) (
  input  logic [FRAC_OUT-1:0] mag,
  input  logic                sign,
  output logic [OUT_W-1:0]    y
);

  if (OUT_W < FRAC_OUT + 1) begin : g_bad_w
    $error("tanh_sign_restore: OUT_W must be at least FRAC_OUT + 1");
  end

  logic [FRAC_OUT:0] pos, neg, sel;

  always_comb begin
    pos = {1'b0, mag};
    neg = ~pos + 1'b1;
    sel = sign ? neg : pos;
    y   = OUT_W'(signed'(sel));
  end

endmodule
