// tanh_abs -- sign detection and absolute value of the signed input.
//
// tanh is odd, so the datapath computes tanh(|x|) only and the sign is put
// back at the end. The magnitude is returned as an IN_W-bit unsigned number,
// so the most negative input (-2^(IN_W-1) LSBs, -8.0 in s3.12) is exact: its
// magnitude is the lone MSB. Purely combinational. Splitting sign and
// magnitude follows the method's data flow; the unsigned full-width magnitude
// is this design's choice.
module tanh_abs #(
  parameter int unsigned IN_W = 16
) (
  input  logic signed [IN_W-1:0] x,
  output logic        [IN_W-1:0] mag,
  output logic                   sign
);

  always_comb begin
    sign = x[IN_W-1];
    mag  = sign ? (~x + 1'b1) : x;
  end

endmodule
