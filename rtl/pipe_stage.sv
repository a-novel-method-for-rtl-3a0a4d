// pipe_stage -- optional pipeline register for a valid/data pair.
//
// With EN = 1 the valid bit and the data word are registered on the rising
// clock edge; an active-low synchronous reset clears both. With EN = 0 the
// stage is a plain wire, so one parameter moves a register boundary in or out
// of the datapath without changing its function. There is no back-pressure:
// a new word may enter on every clock.
module pipe_stage #(
  parameter int unsigned W  = 8,
  parameter bit          EN = 1'b1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  output logic [W-1:0] out_data
);

  if (EN) begin : g_reg
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        out_valid <= 1'b0;
        out_data  <= '0;
      end else begin
        out_valid <= in_valid;
        out_data  <= in_data;
      end
    end
  end else begin : g_wire
    assign out_valid = in_valid;
    assign out_data  = in_data;
  end

endmodule
