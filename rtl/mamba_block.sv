// mamba_block -- one Mamba block as a token-by-token dataflow pipeline.
//
//   in --+--> range_norm --+--> linear (D->ED) -> conv1d -> ssm_block --> gate_mul -> linear (ED->D) --> residual_add --> out
//        |                 +--> linear (D->ED) -> [gate FIFO] ------------^                                  ^
//        +--> [residual FIFO] ------------------------------------------------------------------------------+
//
// Every layer is one pipeline stage with a ready/valid handshake on whole
// tokens, so token t+1 can be normalised while token t is in the SSM, and a
// stage that finishes early holds its token until the next one is free. The
// layer order, the gate on the SSM output and the residual add follow the
// paper's block diagram; range normalisation replaces layer normalisation
// and ReLU replaces softplus inside ssm_block, as in the paper. The forks and
// the two 8-token FIFOs that carry the gate and residual operands are this
// design's own.
//
// Throughput is set by the slowest stage: about 54 cycles per token in
// ssm_block, 40 in each D->ED projection, 25 in range_norm with 20 units.
// Parameter bus, in order from BASE: range_norm (gamma, beta), main input
// projection, gate input projection, conv1d, ssm_block, output projection.
module mamba_block
  import emamba_pkg::*;
#(
  parameter int          D    = 20,
  parameter int          ED   = 40,
  parameter int          N    = 8,
  parameter int          R    = 2,
  parameter int          K    = 4,
  parameter int          SEQ  = 16,
  parameter int          NU   = 20,
  parameter int unsigned BASE = 0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic signed [7:0]  in_data  [D],
  output logic               out_valid,
  input  logic               out_ready,
  output logic signed [7:0]  out_data [D],
  input  logic               cfg_we,
  input  logic [CFG_AW-1:0]  cfg_addr,
  input  logic signed [7:0]  cfg_wdata
);
  localparam int unsigned B_RN   = BASE;
  localparam int unsigned B_INX  = B_RN   + rn_size(D);
  localparam int unsigned B_INZ  = B_INX  + lin_size(D, ED);
  localparam int unsigned B_CONV = B_INZ  + lin_size(D, ED);
  localparam int unsigned B_SSM  = B_CONV + conv_size(ED, K);
  localparam int unsigned B_OUT  = B_SSM  + ssm_block_size(ED, N, R);

  // stream wires: valid / ready / data
  logic f0a_v, f0a_r, f0b_v, f0b_r;
  logic signed [7:0] f0a_d [D], f0b_d [D];
  logic rn_v, rn_r;
  logic signed [7:0] rn_d [D];
  logic f1a_v, f1a_r, f1b_v, f1b_r;
  logic signed [7:0] f1a_d [D], f1b_d [D];
  logic ix_v, ix_r;
  logic signed [7:0] ix_d [ED];
  logic iz_v, iz_r;
  logic signed [7:0] iz_d [ED];
  logic zf_v, zf_r;
  logic signed [7:0] zf_d [ED];
  logic cv_v, cv_r;
  logic signed [7:0] cv_d [ED];
  logic ss_v, ss_r;
  logic signed [7:0] ss_d [ED];
  logic gm_v, gm_r;
  logic signed [7:0] gm_d [ED];
  logic op_v, op_r;
  logic signed [7:0] op_d [D];
  logic rf_v, rf_r;
  logic signed [7:0] rf_d [D];

  stream_fork #(.CH(D)) u_fork_in (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .a_valid(f0a_v), .a_ready(f0a_r), .a_data(f0a_d),
    .b_valid(f0b_v), .b_ready(f0b_r), .b_data(f0b_d));

  stream_fifo #(.CH(D), .DEPTH(8)) u_res_fifo (
    .clk, .rst_n, .in_valid(f0b_v), .in_ready(f0b_r), .in_data(f0b_d),
    .out_valid(rf_v), .out_ready(rf_r), .out_data(rf_d));

  range_norm #(.D(D), .NU(NU), .BASE(B_RN)) u_rn (
    .clk, .rst_n, .in_valid(f0a_v), .in_ready(f0a_r), .in_data(f0a_d),
    .out_valid(rn_v), .out_ready(rn_r), .out_data(rn_d),
    .cfg_we, .cfg_addr, .cfg_wdata);

  stream_fork #(.CH(D)) u_fork_rn (
    .clk, .rst_n, .in_valid(rn_v), .in_ready(rn_r), .in_data(rn_d),
    .a_valid(f1a_v), .a_ready(f1a_r), .a_data(f1a_d),
    .b_valid(f1b_v), .b_ready(f1b_r), .b_data(f1b_d));

  linear_layer #(.IN(D), .OUT(ED), .SHIFT(6), .BASE(B_INX)) u_in_x (
    .clk, .rst_n, .in_valid(f1a_v), .in_ready(f1a_r), .in_data(f1a_d),
    .out_valid(ix_v), .out_ready(ix_r), .out_data(ix_d),
    .cfg_we, .cfg_addr, .cfg_wdata);

  linear_layer #(.IN(D), .OUT(ED), .SHIFT(6), .BASE(B_INZ)) u_in_z (
    .clk, .rst_n, .in_valid(f1b_v), .in_ready(f1b_r), .in_data(f1b_d),
    .out_valid(iz_v), .out_ready(iz_r), .out_data(iz_d),
    .cfg_we, .cfg_addr, .cfg_wdata);

  stream_fifo #(.CH(ED), .DEPTH(8)) u_gate_fifo (
    .clk, .rst_n, .in_valid(iz_v), .in_ready(iz_r), .in_data(iz_d),
    .out_valid(zf_v), .out_ready(zf_r), .out_data(zf_d));

  conv1d #(.CH(ED), .K(K), .SEQ(SEQ), .BASE(B_CONV)) u_conv (
    .clk, .rst_n, .in_valid(ix_v), .in_ready(ix_r), .in_data(ix_d),
    .out_valid(cv_v), .out_ready(cv_r), .out_data(cv_d),
    .cfg_we, .cfg_addr, .cfg_wdata);

  ssm_block #(.ED(ED), .N(N), .R(R), .SEQ(SEQ), .BASE(B_SSM)) u_ssm (
    .clk, .rst_n, .in_valid(cv_v), .in_ready(cv_r), .in_data(cv_d),
    .out_valid(ss_v), .out_ready(ss_r), .out_data(ss_d),
    .cfg_we, .cfg_addr, .cfg_wdata);

  gate_mul #(.CH(ED)) u_gate (
    .clk, .rst_n,
    .y_valid(ss_v), .y_ready(ss_r), .y_data(ss_d),
    .z_valid(zf_v), .z_ready(zf_r), .z_data(zf_d),
    .out_valid(gm_v), .out_ready(gm_r), .out_data(gm_d));

  linear_layer #(.IN(ED), .OUT(D), .SHIFT(6), .BASE(B_OUT)) u_out (
    .clk, .rst_n, .in_valid(gm_v), .in_ready(gm_r), .in_data(gm_d),
    .out_valid(op_v), .out_ready(op_r), .out_data(op_d),
    .cfg_we, .cfg_addr, .cfg_wdata);

  residual_add #(.CH(D)) u_res (
    .clk, .rst_n,
    .a_valid(op_v), .a_ready(op_r), .a_data(op_d),
    .r_valid(rf_v), .r_ready(rf_r), .r_data(rf_d),
    .out_valid, .out_ready, .out_data);

endmodule
