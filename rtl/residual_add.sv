// residual_add -- the skip connection at the end of a Mamba block.
//
// Joins the output-projection token a with the block's own input token r
// (both CH INT8 elements at the same scale) and registers
// out_e = sat8(a_e + r_e). The residual add follows the paper; the shared
// scale and the saturation are this design's choices.
//
// Timing: both inputs are taken in the same cycle when both are valid and
// the output register is free; the sum appears on the next edge and is held
// until out_ready.
module residual_add
  import emamba_pkg::*;
#(
  parameter int CH = 20
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              a_valid,
  output logic              a_ready,
  input  logic signed [7:0] a_data   [CH],
  input  logic              r_valid,
  output logic              r_ready,
  input  logic signed [7:0] r_data   [CH],
  output logic              out_valid,
  input  logic              out_ready,
  output logic signed [7:0] out_data [CH]
);
  logic take;

  assign take    = a_valid && r_valid && !out_valid;
  assign a_ready = take;
  assign r_ready = take;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int c = 0; c < CH; c++) out_data[c] <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        for (int c = 0; c < CH; c++)
          out_data[c] <= sat8(48'(a_data[c]) + 48'(r_data[c]));
        out_valid <= 1'b1;
      end
    end
  end

endmodule
