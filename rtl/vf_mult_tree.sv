// vf_mult_tree -- balanced multiplier tree forming f_x from the LUT outputs.
//
// The velocity factor of |x| is the product of the N LUT outputs. The first
// tree level multiplies neighbouring LUT outputs (LUT_W x LUT_W bits) and
// keeps a MUL_W-bit fraction; every further level multiplies two MUL_W-bit
// fractions back to MUL_W bits. For N = 4 this takes the three multipliers of
// the method's optimised datapath. Products are truncated (this design's
// choice). Since all factors are below one, no product can overflow.
//
// Timing: PIPE_L1 puts a register after the first level and PIPE_OUT one
// after the last, so the latency is PIPE_L1 + PIPE_OUT cycles, one result per
// clock. in_side is a sideband word carried along with the same latency. The
// register positions are this design's choice.
module vf_mult_tree #(
  parameter int unsigned N        = 4,
  parameter int unsigned LUT_W    = 18,
  parameter int unsigned MUL_W    = 16,
  parameter int unsigned SIDE_W   = 1,
  parameter bit          PIPE_L1  = 1'b1,
  parameter bit          PIPE_OUT = 1'b1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic [SIDE_W-1:0]          in_side,
  input  logic [N-1:0][LUT_W-1:0]    f_in,
  output logic                       out_valid,
  output logic [SIDE_W-1:0]          out_side,
  output logic [MUL_W-1:0]           f_x
);

  localparam int unsigned H = N / 2;

  // The tree is only defined for a power-of-two number of LUTs.
  if (N < 2 || (N & (N - 1)) != 0) begin : g_bad_n
    $error("vf_mult_tree: N must be a power of two and at least 2");
  end

  logic [H-1:0][MUL_W-1:0] lvl1, lvl1_q;
  logic [SIDE_W-1:0]       side1_q;
  logic                    valid1_q;

  for (genvar k = 0; k < H; k++) begin : g_l1
    frac_mult #(.A_W(LUT_W), .B_W(LUT_W), .P_W(MUL_W), .SHIFT(2 * LUT_W - MUL_W)) u_mul (
      .a(f_in[2*k]), .b(f_in[2*k+1]), .p(lvl1[k])
    );
  end

  pipe_stage #(.W(SIDE_W + H * MUL_W), .EN(PIPE_L1)) u_p1 (
    .clk, .rst_n,
    .in_valid (in_valid),  .in_data ({in_side, lvl1}),
    .out_valid(valid1_q),  .out_data({side1_q, lvl1_q})
  );

  // Heap-ordered tree: node i is the product of nodes 2i and 2i+1; the first
  // level results sit at nodes H .. N-1 and the root is node 1.
  logic [MUL_W-1:0] node [1:N-1];

  for (genvar k = 0; k < H; k++) begin : g_leaf
    assign node[H+k] = lvl1_q[k];
  end
  for (genvar i = 1; i < H; i++) begin : g_node
    frac_mult #(.A_W(MUL_W), .B_W(MUL_W), .P_W(MUL_W), .SHIFT(MUL_W)) u_mul (
      .a(node[2*i]), .b(node[2*i+1]), .p(node[i])
    );
  end

  pipe_stage #(.W(SIDE_W + MUL_W), .EN(PIPE_OUT)) u_p2 (
    .clk, .rst_n,
    .in_valid (valid1_q),  .in_data ({side1_q, node[1]}),
    .out_valid(out_valid), .out_data({out_side, f_x})
  );

endmodule
