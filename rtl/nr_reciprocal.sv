// nr_reciprocal -- Newton-Raphson reciprocal of a denominator in [0.5, 1).
//
// A seed table (nr_seed_lut) gives x0 and NR_ITERS iterative units
// (nr_iter_unit) refine it, x_{i+1} = x_i * (2 - d * x_i), each step roughly
// squaring the relative error. The units form an unrolled chain; three steps
// are the method's main configuration, two steps its cheaper variant. d is an
// unsigned 0.W fraction, recip an unsigned 2.W number that approaches 1/d from
// below.
//
// Timing: PIPE[i] = 1 puts a register after iteration unit i (i < NR_ITERS),
// so the latency is the number of such registers; one result per clock. d and
// the sideband in_side travel with the data. Register positions are this
// design's choice. An assertion flags a valid d whose MSB is zero.
module nr_reciprocal #(
  parameter int unsigned W         = 16,
  parameter int unsigned SEED_BITS = 2,
  parameter int unsigned NR_ITERS  = 3,
  parameter bit [2:0]    PIPE      = 3'b111,
  parameter int unsigned SIDE_W    = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [W-1:0]      d,
  input  logic [SIDE_W-1:0] in_side,
  output logic              out_valid,
  output logic [W+1:0]      recip,
  output logic [SIDE_W-1:0] out_side
);

  if (NR_ITERS < 1 || NR_ITERS > 3) begin : g_bad_iters
    $error("nr_reciprocal: NR_ITERS must be 1, 2 or 3");
  end

  logic              v [NR_ITERS+1];
  logic [W-1:0]      dd[NR_ITERS+1];
  logic [W+1:0]      x [NR_ITERS+1];
  logic [SIDE_W-1:0] s [NR_ITERS+1];

  assign v[0]  = in_valid;
  assign dd[0] = d;
  assign s[0]  = in_side;

  nr_seed_lut #(.W(W), .SEED_BITS(SEED_BITS)) u_seed (.d(d), .x0(x[0]));

  for (genvar i = 0; i < NR_ITERS; i++) begin : g_iter
    logic [W+1:0] x_next;

    nr_iter_unit #(.W(W)) u_iter (.d(dd[i]), .x_in(x[i]), .x_out(x_next));

    pipe_stage #(.W(SIDE_W + W + W + 2), .EN(PIPE[i])) u_p (
      .clk, .rst_n,
      .in_valid (v[i]),   .in_data ({s[i],   dd[i],   x_next}),
      .out_valid(v[i+1]), .out_data({s[i+1], dd[i+1], x[i+1]})
    );
  end

  // The seed table and the error bound of the iterations assume d in [0.5, 1).
  a_d_normalised: assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> d[W-1])
    else $error("nr_reciprocal: denominator below 0.5");

  assign out_valid = v[NR_ITERS];
  assign recip     = x[NR_ITERS];
  assign out_side  = s[NR_ITERS];

endmodule
