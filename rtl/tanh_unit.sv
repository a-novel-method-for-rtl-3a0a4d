// tanh_unit -- pipelined fixed-point hyperbolic tangent.
//
// y = tanh(x) for a signed input with FRAC_IN fraction bits (s3.12 by
// default) and a signed output with FRAC_OUT fraction bits (s.15). tanh is
// odd, so tanh_abs splits x into sign and magnitude, tanh_core computes
// tanh(|x|) from velocity factors exp(-2|x|) and a Newton-Raphson divider, and
// tanh_sign_restore negates the result for negative inputs. Inputs whose tanh
// rounds to one (|x| above about 5.55 for s.15) come out as the top code of
// the data path (+-32766 at the defaults) without any separate saturation
// logic.
//
// Interface: in_valid/x in, out_valid/y out. There is no back-pressure; a new
// input may be given on every clock. rst_n is an active-low synchronous reset
// that clears the pipeline.
//
// Timing: PIPE_MASK[5:0] places the core's registers (see tanh_core) and
// PIPE_MASK[6] an output register after the sign stage. The default, all
// seven registers, gives a latency of 7 clocks; 7'b1000000 gives 1 clock and
// 7'b1000100 gives 2 clocks, the three pipeline depths the method was
// evaluated at. The valid-only handshake, reset and exact register positions
// are this design's choices.
module tanh_unit #(
  parameter int unsigned IN_W      = 16,
  parameter int unsigned FRAC_IN   = 12,
  parameter int unsigned FRAC_OUT  = 15,
  parameter int unsigned OUT_W     = 16,
  parameter int unsigned LUT_W     = 18,
  parameter int unsigned MUL_W     = 16,
  parameter int unsigned NR_ITERS  = 3,
  parameter int unsigned SEED_BITS = 2,
  parameter bit          ONES_COMP = 1'b1,
  parameter bit [6:0]    PIPE_MASK = 7'b1111111
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] x,
  output logic                   out_valid,
  output logic [OUT_W-1:0]       y
);

  logic [IN_W-1:0]     mag;
  logic                sign, sign_c, v_c;
  logic [FRAC_OUT-1:0] tanh_mag;
  logic [OUT_W-1:0]    y_c;

  tanh_abs #(.IN_W(IN_W)) u_abs (.x(x), .mag(mag), .sign(sign));

  tanh_core #(
    .IN_W(IN_W), .FRAC_IN(FRAC_IN), .FRAC_OUT(FRAC_OUT), .LUT_W(LUT_W), .MUL_W(MUL_W),
    .NR_ITERS(NR_ITERS), .SEED_BITS(SEED_BITS), .ONES_COMP(ONES_COMP),
    .PIPE_MASK(PIPE_MASK[5:0]), .TAG_W(1)
  ) u_core (
    .clk, .rst_n,
    .in_valid (in_valid), .in_tag (sign),   .mag(mag),
    .out_valid(v_c),      .out_tag(sign_c), .tanh_mag(tanh_mag)
  );

  tanh_sign_restore #(.FRAC_OUT(FRAC_OUT), .OUT_W(OUT_W)) u_sign (
    .mag(tanh_mag), .sign(sign_c), .y(y_c)
  );

  pipe_stage #(.W(OUT_W), .EN(PIPE_MASK[6])) u_p_out (
    .clk, .rst_n,
    .in_valid (v_c),       .in_data (y_c),
    .out_valid(out_valid), .out_data(y)
  );

endmodule
