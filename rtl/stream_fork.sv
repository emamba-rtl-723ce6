// stream_fork -- sends every token of one ready/valid stream to two consumers.
//
// The token is offered to both outputs at once; each output remembers
// whether it has already been taken, and the input is released in the cycle
// in which the last of the two takes it. Consumers may take the token in
// different cycles. Used where the paper's block diagram splits one token
// into two paths (the residual path and the normalised input; the gate and
// main branches after normalisation). The circuit is this design's own.
module stream_fork #(
  parameter int CH = 20
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic signed [7:0] in_data  [CH],
  output logic              a_valid,
  input  logic              a_ready,
  output logic signed [7:0] a_data   [CH],
  output logic              b_valid,
  input  logic              b_ready,
  output logic signed [7:0] b_data   [CH]
);
  logic a_taken, b_taken;
  logic a_fire, b_fire;

  assign a_valid  = in_valid && !a_taken;
  assign b_valid  = in_valid && !b_taken;
  assign a_data   = in_data;
  assign b_data   = in_data;
  assign a_fire   = a_valid && a_ready;
  assign b_fire   = b_valid && b_ready;
  assign in_ready = (a_taken || a_fire) && (b_taken || b_fire);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_taken <= 1'b0;
      b_taken <= 1'b0;
    end else if (in_valid && in_ready) begin
      a_taken <= 1'b0;
      b_taken <= 1'b0;
    end else begin
      if (a_fire) a_taken <= 1'b1;
      if (b_fire) b_taken <= 1'b1;
    end
  end

endmodule
