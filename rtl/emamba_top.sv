// emamba_top -- the eMamba accelerator for the 3-D human pose workload.
//
// A frame of 8 x 8 x 5 INT8 features enters on the frame_* handshake. The
// patch embedding cuts it into L = 16 tokens of D = 20 values; the tokens
// flow one by one through M = 2 Mamba blocks (range norm, gated SSM path,
// output projection, residual) and into the output head, which pools the 16
// tokens and returns 57 INT8 pose values on the res_* handshake. All stages
// are chained with ready/valid on whole tokens, so a new token enters a layer
// as soon as the previous layer has it ready (layer-wise pipelining) and
// several frames can be in flight.
//
// All weights, biases, normalisation gammas/betas, SSM A and D values live in
// flip-flops and are written one INT8 value per cycle over the parameter bus
// (cfg_we, cfg_addr, cfg_wdata), the reconfigurable form of the design. The
// address map, in order: patch projection, block 0, block 1, head
// projection; the regions are laid out by the size functions of emamba_pkg
// (see PARAM_WORDS). Requantisation shifts are fixed at build time.
//
// The model sizes come from the paper's pose configuration; frame size,
// address map and all shift amounts are this design's choices.
module emamba_top
  import emamba_pkg::*;
#(
  parameter int M = N_BLOCKS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               frame_valid,
  output logic               frame_ready,
  input  logic signed [7:0]  frame    [FRAME_SZ],
  output logic               res_valid,
  input  logic               res_ready,
  output logic signed [7:0]  res_data [N_OUT],
  input  logic               cfg_we,
  input  logic [CFG_AW-1:0]  cfg_addr,
  input  logic signed [7:0]  cfg_wdata
);
  localparam int PIN         = PATCH*PATCH*IMG_C;
  localparam int BLK_WORDS   = mamba_block_size(D_MODEL, ED, N_STATE, DT_RANK, CONV_K);
  localparam int unsigned B_PE   = 0;
  localparam int unsigned B_BLK0 = B_PE + lin_size(PIN, D_MODEL);
  localparam int unsigned B_HEAD = B_BLK0 + M*BLK_WORDS;
  localparam int PARAM_WORDS = B_HEAD + lin_size(D_MODEL, N_OUT);

  logic              s_v [M+1];
  logic              s_r [M+1];
  logic signed [7:0] s_d [M+1][D_MODEL];

  patch_embedding #(.H(IMG_H), .W(IMG_W), .C(IMG_C), .P(PATCH), .D(D_MODEL),
                    .BASE(B_PE)) u_pe (
    .clk, .rst_n, .frame_valid, .frame_ready, .frame,
    .out_valid(s_v[0]), .out_ready(s_r[0]), .out_data(s_d[0]),
    .cfg_we, .cfg_addr, .cfg_wdata);

  for (genvar m = 0; m < M; m++) begin : g_blk
    mamba_block #(.D(D_MODEL), .ED(ED), .N(N_STATE), .R(DT_RANK), .K(CONV_K),
                  .SEQ(SEQ_LEN), .NU(RN_UNITS),
                  .BASE(B_BLK0 + m*BLK_WORDS)) u_blk (
      .clk, .rst_n,
      .in_valid(s_v[m]), .in_ready(s_r[m]), .in_data(s_d[m]),
      .out_valid(s_v[m+1]), .out_ready(s_r[m+1]), .out_data(s_d[m+1]),
      .cfg_we, .cfg_addr, .cfg_wdata);
  end

  output_head #(.D(D_MODEL), .SEQ(SEQ_LEN), .NOUT(N_OUT), .BASE(B_HEAD)) u_head (
    .clk, .rst_n,
    .in_valid(s_v[M]), .in_ready(s_r[M]), .in_data(s_d[M]),
    .res_valid, .res_ready, .res_data,
    .cfg_we, .cfg_addr, .cfg_wdata);

  // the whole parameter image must fit the bus
  if (PARAM_WORDS > (1 << CFG_AW)) begin : g_aw_check
    $error("parameter image does not fit CFG_AW");
  end

endmodule
