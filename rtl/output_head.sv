// output_head -- pooling and final projection to the pose outputs.
//
// Sums the SEQ tokens of a frame from the last Mamba block element by
// element, divides by SEQ with an arithmetic shift (SEQ must be a power of
// two) and saturates to INT8, then projects the pooled D-element vector to
// NOUT outputs (57 = 19 joints x 3 coordinates for the pose workload) with a
// linear layer that produces one output per cycle. The paper gives the 57
// outputs and the 58-cycle cost of this projection; mean pooling is this
// design's choice.
//
// Timing: in_ready is high while accumulating. The last token of a frame,
// taken on edge E0, completes the mean, which is registered on E0; the
// projection takes it on E0+1 and res_valid rises on E0+58, held until
// res_ready. Tokens of the next frame are accumulated meanwhile; its mean
// waits until the projection can take it.
// Parameter bus: the projection (IN = D, OUT = NOUT) at BASE.
module output_head
  import emamba_pkg::*;
#(
  parameter int          D     = 20,
  parameter int          SEQ   = 16,
  parameter int          NOUT  = 57,
  parameter int          SHIFT = 6,
  parameter int unsigned BASE  = 0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic signed [7:0]  in_data  [D],
  output logic               res_valid,
  input  logic               res_ready,
  output logic signed [7:0]  res_data [NOUT],
  input  logic               cfg_we,
  input  logic [CFG_AW-1:0]  cfg_addr,
  input  logic signed [7:0]  cfg_wdata
);
  localparam int TW = $clog2(SEQ + 1);
  localparam int LS = $clog2(SEQ);

  logic signed [15:0] acc  [D];
  logic signed [15:0] accn [D];
  logic signed [7:0]  mean [D];
  logic [TW-1:0]      tcnt;
  logic               mv, mr;       // pooled vector -> projection
  logic               take;

  assign in_ready = !mv;
  assign take     = in_valid && in_ready;

  always_comb
    for (int i = 0; i < D; i++) accn[i] = acc[i] + 16'(in_data[i]);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tcnt <= '0;
      mv   <= 1'b0;
      for (int i = 0; i < D; i++) begin
        acc[i]  <= '0;
        mean[i] <= '0;
      end
    end else begin
      if (mv && mr) mv <= 1'b0;
      if (take) begin
        if (32'(tcnt) == SEQ-1) begin
          tcnt <= '0;
          mv   <= 1'b1;
          for (int i = 0; i < D; i++) begin
            mean[i] <= sat8(48'(accn[i] >>> LS));
            acc[i]  <= '0;
          end
        end else begin
          tcnt <= tcnt + 1'b1;
          acc  <= accn;
        end
      end
    end
  end

  linear_layer #(.IN(D), .OUT(NOUT), .SHIFT(SHIFT), .BASE(BASE)) u_proj (
    .clk, .rst_n, .in_valid(mv), .in_ready(mr), .in_data(mean),
    .out_valid(res_valid), .out_ready(res_ready), .out_data(res_data),
    .cfg_we, .cfg_addr, .cfg_wdata);

endmodule
