// gate_mul -- SiLU gate: the element-wise product that closes the SSM path.
//
// Joins two token streams of CH INT8 elements: y from the SSM layer and z
// from the gate-branch linear layer. When both are present it takes both and
// registers out_e = sat8((y_e * silu_pwl(z_e)) >>> SHIFT), the gating of the
// SSM output by the SiLU of the second branch. The gating itself follows the
// paper; evaluating SiLU here, on the buffered gate token, and the shift are
// this design's choices.
//
// Timing: both inputs are taken in the same cycle (y_ready = z_ready =
// both valid and output register free); the product appears on the next edge
// and is held until out_ready.
module gate_mul
  import emamba_pkg::*;
#(
  parameter int CH    = 40,
  parameter int SHIFT = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              y_valid,
  output logic              y_ready,
  input  logic signed [7:0] y_data   [CH],
  input  logic              z_valid,
  output logic              z_ready,
  input  logic signed [7:0] z_data   [CH],
  output logic              out_valid,
  input  logic              out_ready,
  output logic signed [7:0] out_data [CH]
);
  logic signed [7:0] sz  [CH];
  logic signed [7:0] prd [CH];
  logic              take;

  for (genvar c = 0; c < CH; c++) begin : g_ch
    silu_pwl #(.IN_FRAC(4), .OUT_FRAC(4)) u_silu (.x(z_data[c]), .y(sz[c]));
    assign prd[c] = sat8(48'((32'(y_data[c]) * 32'(sz[c])) >>> SHIFT));
  end

  assign take    = y_valid && z_valid && !out_valid;
  assign y_ready = take;
  assign z_ready = take;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int c = 0; c < CH; c++) out_data[c] <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        out_data  <= prd;
        out_valid <= 1'b1;
      end
    end
  end

endmodule
