// ssm_core -- discretisation and state update of the selective state space
// model for one token.
//
// With Delta (ED), B_t (N), C_t (N) and x_t (ED) given, every one of the
// ED x N lanes computes
//   A-bar = exp_pwl(sat8((Delta_e * A_en) >>> DA_SHIFT))          (INT8, 2^-7)
//   B-bar = sat8((Delta_e * B_n) >>> DB_SHIFT)                    (INT8)
//   h_t   = sat24(A-bar * h_{t-1} + ((B-bar * x_e) <<< BX_SHIFT)) (INT24)
// and each channel e produces
//   y_e   = sat8(((sum_n C_n * h_t[e][n]) >>> Y_SHIFT) + ((D_e * x_e) >>> DX_SHIFT)).
// The 24-bit h_t feeds y_t; what is stored for the next token is
// h_t >>> H_SHIFT (INT17), which removes the 2^-7 scale A-bar added, so the
// state width does not grow along the sequence. The ED x N parallel lanes,
// the INT8/INT17/INT24 widths, the 7-bit shift and the use of h_t before the
// shift for y_t all follow the paper. The remaining shifts, the saturation to
// 24 bits and the alignment of the B-bar*x term are this design's choices.
// The state is cleared after SEQ tokens, i.e. at every frame boundary.
//
// Timing: on the edge S where start is high, A-bar and B-bar are formed from
// the inputs and registered; h and y are registered on S+1 together with a
// one-cycle done pulse (two cycles per token counting the start cycle).
// start must not be raised again before done.
// Parameter bus: BASE + e*N + n writes A[e][n]; BASE + ED*N + e writes D[e].
module ssm_core
  import emamba_pkg::*;
#(
  parameter int          ED       = 40,
  parameter int          N        = 8,
  parameter int          SEQ      = 16,
  parameter int          H_SHIFT  = 7,
  parameter int          DA_SHIFT = 4,
  parameter int          DB_SHIFT = 4,
  parameter int          BX_SHIFT = 7,
  parameter int          Y_SHIFT  = 15,
  parameter int          DX_SHIFT = 4,
  parameter int unsigned BASE     = 0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic signed [7:0]  x     [ED],
  input  logic signed [7:0]  delta [ED],
  input  logic signed [7:0]  b     [N],
  input  logic signed [7:0]  c     [N],
  output logic               done,
  output logic signed [7:0]  y     [ED],
  input  logic               cfg_we,
  input  logic [CFG_AW-1:0]  cfg_addr,
  input  logic signed [7:0]  cfg_wdata
);
  localparam int TW = $clog2(SEQ + 1);

  logic signed [7:0]  a_par [ED*N];       // A[e][n] at e*N + n
  logic signed [7:0]  d_par [ED];
  logic [31:0]        cfg_off;
  assign cfg_off = 32'(cfg_addr) - 32'(BASE);
  logic signed [16:0] h     [ED][N];      // stored state, INT17
  logic signed [7:0]  abar  [ED][N];
  logic signed [7:0]  bbar  [ED][N];
  logic signed [7:0]  da_q  [ED][N];      // exp input
  logic signed [7:0]  abar_c[ED][N];
  logic signed [7:0]  x_s   [ED];
  logic signed [7:0]  c_s   [N];
  logic signed [23:0] hnew  [ED][N];      // INT24 h_t
  logic signed [7:0]  y_c   [ED];
  logic               stage2;
  logic [TW-1:0]      tcnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int e = 0; e < ED; e++) begin
        d_par[e] <= '0;
        for (int n = 0; n < N; n++) a_par[e*N + n] <= '0;
      end
    end else if (cfg_we && (cfg_off < 32'(ED*N + ED))) begin   // below BASE wraps high
      if (cfg_off < 32'(ED*N)) a_par[cfg_off] <= cfg_wdata;
      else                     d_par[cfg_off - 32'(ED*N)] <= cfg_wdata;
    end
  end

  // stage 1: discretisation, ED x N lanes
  for (genvar e = 0; e < ED; e++) begin : g_ch
    for (genvar n = 0; n < N; n++) begin : g_st
      assign da_q[e][n] = sat8(48'((32'(delta[e]) * 32'(a_par[e*N + n])) >>> DA_SHIFT));
      exp_pwl #(.IN_FRAC(4), .OUT_FRAC(7)) u_exp (.x(da_q[e][n]), .y(abar_c[e][n]));
    end
  end

  // stage 2: state update and output
  always_comb begin
    for (int e = 0; e < ED; e++) begin
      logic signed [47:0] ysum;
      ysum = '0;
      for (int n = 0; n < N; n++) begin
        hnew[e][n] = sat24(48'(abar[e][n]) * 48'(h[e][n])
                         + ((48'(bbar[e][n]) * 48'(x_s[e])) <<< BX_SHIFT));
        ysum += 48'(c_s[n]) * 48'(hnew[e][n]);
      end
      y_c[e] = sat8((ysum >>> Y_SHIFT) + ((48'(d_par[e]) * 48'(x_s[e])) >>> DX_SHIFT));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      stage2 <= 1'b0;
      done   <= 1'b0;
      tcnt   <= '0;
      for (int e = 0; e < ED; e++) begin
        x_s[e] <= '0;
        y[e]   <= '0;
        for (int n = 0; n < N; n++) begin
          h[e][n]    <= '0;
          abar[e][n] <= '0;
          bbar[e][n] <= '0;
        end
      end
      for (int n = 0; n < N; n++) c_s[n] <= '0;
    end else begin
      done   <= 1'b0;
      stage2 <= 1'b0;
      if (start) begin
        for (int e = 0; e < ED; e++)
          for (int n = 0; n < N; n++) begin
            abar[e][n] <= abar_c[e][n];
            bbar[e][n] <= sat8(48'((32'(delta[e]) * 32'(b[n])) >>> DB_SHIFT));
          end
        x_s    <= x;
        c_s    <= c;
        stage2 <= 1'b1;
      end
      if (stage2) begin
        y    <= y_c;
        done <= 1'b1;
        if (32'(tcnt) == SEQ-1) begin
          tcnt <= '0;
          for (int e = 0; e < ED; e++)
            for (int n = 0; n < N; n++) h[e][n] <= '0;
        end else begin
          tcnt <= tcnt + 1'b1;
          for (int e = 0; e < ED; e++)
            for (int n = 0; n < N; n++) h[e][n] <= 17'(hnew[e][n] >>> H_SHIFT);
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) start |-> !stage2);

endmodule
