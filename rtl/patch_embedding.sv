// patch_embedding -- turns one input frame into a sequence of tokens.
//
// A frame of H x W cells with C INT8 features each (element (r, c, ch) at
// index (r*W + c)*C + ch) is stored, cut into non-overlapping P x P patches
// taken in raster order, and each patch of P*P*C values (ordered
// (dr*P + dc)*C + ch) is projected by a linear layer to a D-element token.
// With the 8 x 8 x 5 frame and P = 2 this gives the L = 16 tokens of the pose
// workload, each of 20 values mapped to D = 20. The paper names the layer and
// the 16 non-overlapping patches; the frame size, the patch ordering and the
// linear projection without positional embedding are this design's choices.
//
// Timing: frame_ready is high while no frame is stored; a frame is taken on
// frame_valid && frame_ready. Patches are then offered to the projection one
// after the other (one per D+2 cycles when the output is taken at once: D cycles of
// projection, one to hand the token on, one to take the next patch), and
// tokens leave on the out_* stream. The next frame is taken after the last
// patch of the current one has entered the projection.
// Parameter bus: the projection (IN = P*P*C, OUT = D) at BASE.
module patch_embedding
  import emamba_pkg::*;
#(
  parameter int          H    = 8,
  parameter int          W    = 8,
  parameter int          C    = 5,
  parameter int          P    = 2,
  parameter int          D    = 20,
  parameter int unsigned BASE = 0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               frame_valid,
  output logic               frame_ready,
  input  logic signed [7:0]  frame    [H*W*C],
  output logic               out_valid,
  input  logic               out_ready,
  output logic signed [7:0]  out_data [D],
  input  logic               cfg_we,
  input  logic [CFG_AW-1:0]  cfg_addr,
  input  logic signed [7:0]  cfg_wdata
);
  localparam int PW  = W / P;                 // patches per row
  localparam int L   = (H / P) * PW;          // tokens per frame
  localparam int PIN = P * P * C;             // values per patch
  localparam int LW  = $clog2(L + 1);

  logic signed [7:0] fbuf  [H*W*C];
  logic signed [7:0] patch [PIN];
  logic              busy;
  logic [LW-1:0]     pidx;
  logic              pv, pr;

  always_comb begin
    int prow, pcol;
    prow = 32'(pidx) / PW;
    pcol = 32'(pidx) % PW;
    for (int dr = 0; dr < P; dr++)
      for (int dc = 0; dc < P; dc++)
        for (int ch = 0; ch < C; ch++)
          patch[(dr*P + dc)*C + ch] = fbuf[((prow*P + dr)*W + (pcol*P + dc))*C + ch];
  end

  assign frame_ready = !busy;
  assign pv          = busy;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      pidx <= '0;
      for (int i = 0; i < H*W*C; i++) fbuf[i] <= '0;
    end else begin
      if (frame_valid && frame_ready) begin
        fbuf <= frame;
        busy <= 1'b1;
        pidx <= '0;
      end else if (pv && pr) begin
        if (32'(pidx) == L-1) begin
          busy <= 1'b0;
          pidx <= '0;
        end else begin
          pidx <= pidx + 1'b1;
        end
      end
    end
  end

  linear_layer #(.IN(PIN), .OUT(D), .SHIFT(6), .BASE(BASE)) u_proj (
    .clk, .rst_n, .in_valid(pv), .in_ready(pr), .in_data(patch),
    .out_valid, .out_ready, .out_data,
    .cfg_we, .cfg_addr, .cfg_wdata);

endmodule
