// emamba_pkg -- shared constants, types and arithmetic helpers of the eMamba
// accelerator.
//
// Holds the model configuration used for the 3-D human pose workload (model
// width D=20, expansion E=2, state size N=8, patch size P=2, M=2 Mamba blocks,
// sequence length L=16, 57 outputs), the INT8 saturation helpers used by every
// datapath stage, the piecewise-linear tables of the SiLU and exponential
// approximations, and the sizes of each layer's parameter region on the runtime
// parameter write bus.
//
// The configuration numbers, the segment counts (17 for SiLU, 11 for exp), the
// clamping rules outside the approximated ranges and the INT8/INT17/INT24
// widths follow the paper. The breakpoints of the segments, the frame size
// 8x8x5, the dt rank, the convolution length and the address map are this
// design's own choices.
//
// Piecewise-linear tables: each segment k covers [bp[k], bp[k+1]) where bp is
// given in quarter units (bp_q2 = 4*x). Inside a segment the function is the
// chord through f(bp[k]) and f(bp[k+1]):
//   y = slope[k]*x + icpt[k],  slope and icpt in Q12 (value * 4096, rounded).
package emamba_pkg;

  // ---------------- model configuration (pose workload) ----------------
  localparam int D_MODEL  = 20;              // token size D
  localparam int EXPAND   = 2;               // expansion factor E
  localparam int ED       = D_MODEL*EXPAND;  // internal width
  localparam int N_STATE  = 8;               // state dimension N
  localparam int PATCH    = 2;               // patch size P
  localparam int N_BLOCKS = 2;               // Mamba blocks M
  localparam int IMG_H    = 8;               // input frame rows
  localparam int IMG_W    = 8;               // input frame columns
  localparam int IMG_C    = 5;               // features per cell
  localparam int SEQ_LEN  = (IMG_H/PATCH)*(IMG_W/PATCH); // L = 16 tokens
  localparam int DT_RANK  = 2;               // rank of the dt projection
  localparam int CONV_K   = 4;               // causal conv taps
  localparam int N_OUT    = 57;              // 19 joints x 3 coordinates
  localparam int RN_UNITS = 20;              // range-norm compute units
  localparam int FRAME_SZ = IMG_H*IMG_W*IMG_C;

  localparam int CFG_AW   = 16;              // parameter bus address width

  typedef logic signed [7:0] int8_t;

  // ---------------- saturation ----------------
  function automatic logic signed [7:0] sat8(input logic signed [47:0] v);
    if (v > 48'sd127)       return 8'sd127;
    else if (v < -48'sd128) return -8'sd128;
    else                    return v[7:0];
  endfunction

  function automatic logic signed [23:0] sat24(input logic signed [47:0] v);
    if (v > 48'sd8388607)       return 24'sd8388607;
    else if (v < -48'sd8388608) return -24'sd8388608;
    else                        return v[23:0];
  endfunction

  // ---------------- SiLU: 17 chords on [-7, 7] ----------------
  localparam int SILU_SEGS = 17;
  localparam int SILU_BP_Q2 [SILU_SEGS+1] = '{
    -28, -20, -16, -12, -10, -8, -6, -4, -2, 0, 2, 4, 6, 8, 12, 16, 20, 28};
  localparam int SILU_SLOPE [SILU_SEGS] = '{
    -55, -158, -288, -388, -399, -289, 38, 657, 1546, 2550, 3439, 4058, 4385,
    4490, 4384, 4254, 4151};
  localparam int SILU_ICPT [SILU_SEGS] = '{
    -414, -925, -1447, -1747, -1775, -1554, -1063, -445, 0, 0, -445, -1063,
    -1554, -1764, -1447, -925, -414};

  // ---------------- exp: 11 chords on [-4, 1] ----------------
  localparam int EXP_SEGS = 11;
  localparam int EXP_BP_Q2 [EXP_SEGS+1] = '{
    -16, -12, -10, -8, -6, -4, -3, -2, -1, 0, 2, 4};
  localparam int EXP_SLOPE [EXP_SEGS] = '{
    129, 265, 436, 719, 1186, 1712, 2198, 2822, 3624, 5314, 8762};
  localparam int EXP_ICPT [EXP_SEGS] = '{
    591, 998, 1427, 1993, 2693, 3219, 3583, 3896, 4096, 4096, 2372};
  localparam int EXP_TOP_Q12 = 11134;        // e^1 in Q12, used above x = 1

  // ---------------- parameter-bus region sizes ----------------
  function automatic int lin_size(input int n_in, input int n_out);
    return n_out*(n_in+1);                   // weights then biases
  endfunction
  function automatic int rn_size(input int d);
    return 2*d;                              // gamma then beta
  endfunction
  function automatic int conv_size(input int ch, input int k);
    return ch*(k+1);                         // taps then biases
  endfunction
  function automatic int ssm_core_size(input int ed, input int n);
    return ed*n + ed;                        // A then D
  endfunction
  function automatic int ssm_block_size(input int ed, input int n, input int r);
    return lin_size(ed, r) + 2*lin_size(ed, n) + lin_size(r, ed) + ssm_core_size(ed, n);
  endfunction
  function automatic int mamba_block_size(input int d, input int ed, input int n,
                                          input int r, input int k);
    return rn_size(d) + 2*lin_size(d, ed) + conv_size(ed, k)
         + ssm_block_size(ed, n, r) + lin_size(ed, d);
  endfunction

endpackage
