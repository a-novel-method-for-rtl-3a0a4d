// tanh_core -- tanh of a non-negative fixed-point magnitude.
//
// How it works: the velocity factor f = exp(-2|x|) = (1 - tanh|x|)/(1 + tanh|x|)
// of a sum of place values is the product of their factors. lut_addr_gen
// routes the IN_W magnitude bits to IN_W/4 four-bit LUT addresses, each
// vf_lut returns the factor of its four bits, and vf_mult_tree multiplies
// them to f_x (0.MUL_W). fx_operand_prep forms (1 - f_x)/2 and (1 + f_x)/2, the
// latter in [0.5, 1); nr_reciprocal inverts the denominator and a last
// multiplier gives tanh = (1 - f_x)/(1 + f_x). The result is truncated to an
// unsigned 0.FRAC_OUT fraction and clamped to 1 - 2^-FRAC_OUT.
//
// Interface: mag is |x| with FRAC_IN fraction bits; tanh_mag is an unsigned
// 0.FRAC_OUT fraction. in_tag is carried alongside (the top uses it for the
// input sign).
//
// Timing: PIPE_MASK selects registers after (bit 0) the LUT read, (1) the
// first multiplier level, (2) f_x, (3..5) Newton-Raphson units 1..3. The
// latency is the number of set bits that exist in the configuration; a new
// input is accepted every clock. The structure (LUTs, multiplier tree,
// shifted numerator and denominator, Newton-Raphson divider, final
// multiplier) follows the method; truncation, clamping and register
// positions are this design's choices.
module tanh_core #(
  parameter int unsigned IN_W      = 16,
  parameter int unsigned FRAC_IN   = 12,
  parameter int unsigned FRAC_OUT  = 15,
  parameter int unsigned LUT_W     = 18,
  parameter int unsigned MUL_W     = 16,
  parameter int unsigned NR_ITERS  = 3,
  parameter int unsigned SEED_BITS = 2,
  parameter bit          ONES_COMP = 1'b1,
  parameter bit [5:0]    PIPE_MASK = 6'b111111,
  parameter int unsigned TAG_W     = 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [TAG_W-1:0]    in_tag,
  input  logic [IN_W-1:0]     mag,
  output logic                out_valid,
  output logic [TAG_W-1:0]    out_tag,
  output logic [FRAC_OUT-1:0] tanh_mag
);

  localparam int unsigned N_LUT = IN_W / 4;

  if (IN_W % 4 != 0 || FRAC_OUT > 2 * MUL_W) begin : g_bad_cfg
    $error("tanh_core: IN_W must be a multiple of 4 and FRAC_OUT at most 2*MUL_W");
  end

  // ---- LUT address generation and velocity-factor lookup -------------------
  logic [N_LUT-1:0][3:0]       addr;
  logic [N_LUT-1:0][LUT_W-1:0] f_lut, f_lut_q;
  logic                        v1;
  logic [TAG_W-1:0]            tag1;

  lut_addr_gen #(.IN_W(IN_W)) u_addr (.mag(mag), .addr(addr));

  for (genvar l = 0; l < N_LUT; l++) begin : g_lut
    vf_lut #(.IN_W(IN_W), .FRAC_IN(FRAC_IN), .LUT_W(LUT_W), .LUT_IDX(l)) u_lut (
      .addr(addr[l]), .f(f_lut[l])
    );
  end

  pipe_stage #(.W(TAG_W + N_LUT * LUT_W), .EN(PIPE_MASK[0])) u_p_lut (
    .clk, .rst_n,
    .in_valid (in_valid), .in_data ({in_tag, f_lut}),
    .out_valid(v1),       .out_data({tag1, f_lut_q})
  );

  // ---- velocity factor product f_x --------------------------------------------
  logic             v2;
  logic [TAG_W-1:0] tag2;
  logic [MUL_W-1:0] f_x;

  vf_mult_tree #(
    .N(N_LUT), .LUT_W(LUT_W), .MUL_W(MUL_W), .SIDE_W(TAG_W),
    .PIPE_L1(PIPE_MASK[1]), .PIPE_OUT(PIPE_MASK[2])
  ) u_tree (
    .clk, .rst_n,
    .in_valid (v1),  .in_side (tag1), .f_in(f_lut_q),
    .out_valid(v2),  .out_side(tag2), .f_x (f_x)
  );

  // ---- numerator, denominator and reciprocal ----------------------------------
  logic [MUL_W-1:0] num, den, num_q;
  logic [MUL_W+1:0] recip;
  logic             v3;
  logic [TAG_W-1:0] tag3;

  fx_operand_prep #(.W(MUL_W), .ONES_COMP(ONES_COMP)) u_prep (
    .f(f_x), .num(num), .den(den)
  );

  nr_reciprocal #(
    .W(MUL_W), .SEED_BITS(SEED_BITS), .NR_ITERS(NR_ITERS),
    .PIPE(PIPE_MASK[5:3]), .SIDE_W(TAG_W + MUL_W)
  ) u_nr (
    .clk, .rst_n,
    .in_valid (v2), .d(den), .in_side ({tag2, num}),
    .out_valid(v3), .recip(recip), .out_side({tag3, num_q})
  );

  // ---- final multiplier: tanh = num * (1/den) ---------------------------------
  logic [FRAC_OUT+1:0] q;  // 2.FRAC_OUT

  frac_mult #(.A_W(MUL_W), .B_W(MUL_W + 2), .P_W(FRAC_OUT + 2), .SHIFT(2 * MUL_W - FRAC_OUT)) u_q (
    .a(num_q), .b(recip), .p(q)
  );

  always_comb begin
    if (q[FRAC_OUT+1:FRAC_OUT] != 2'b00) tanh_mag = '1;
    else                                 tanh_mag = q[FRAC_OUT-1:0];
  end

  assign out_valid = v3;
  assign out_tag   = tag3;

endmodule
