// range_norm -- range normalisation, the accelerator's replacement for layer
// normalisation.
//
// For one token x of D INT8 elements it computes
//   y_i = sat8(((gamma_i * q_i) >>> SHIFT) + beta_i),
//   q_i = ((x_i - mu) << QF) / (max(x) - min(x)),   mu = mean(x),
// i.e. gamma*(x-mu)/range(x-mu) + beta with only adders, comparators and
// dividers (range(x-mu) equals max(x)-min(x)). As in the paper the work is
// split into a mean cycle, a range cycle and an element phase run by NU
// parallel compute units (rn_compute_unit), each with its own divider and 23
// cycles per element. Units take elements u, u+NU, u+2NU, ... so a token costs
// 2 + 23*ceil(D/NU) cycles: 25 with the paper's 20 units, 48 with 10, 462
// with 1. The mean uses a constant reciprocal, mu = (sum * round(2^16/D))
// >>> 16 (floor); that, QF and SHIFT are this design's choices.
//
// Timing: a token is taken on in_valid && in_ready (edge E0); mu is registered
// on E0+1, the range is formed during the next cycle and the first batch loads
// its units on E0+2; out_valid rises on edge E0 + 2 + 23*ceil(D/NU) and the
// token is held until out_ready. in_ready is high only while idle with an
// empty output register.
// Parameter bus: BASE + i writes gamma_i, BASE + D + i writes beta_i.
module range_norm
  import emamba_pkg::*;
#(
  parameter int          D     = 20,
  parameter int          NU    = 20,
  parameter int          QF    = 12,
  parameter int          SHIFT = 13,
  parameter int unsigned BASE  = 0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic signed [7:0]   in_data  [D],
  output logic                out_valid,
  input  logic                out_ready,
  output logic signed [7:0]   out_data [D],
  input  logic                cfg_we,
  input  logic [CFG_AW-1:0]   cfg_addr,
  input  logic signed [7:0]   cfg_wdata
);
  localparam int NB    = (D + NU - 1) / NU;       // batches per token
  localparam int BW    = (NB > 1) ? $clog2(NB) : 1;
  localparam int RECIP = (65536 + D/2) / D;

  typedef enum logic [1:0] {S_IDLE, S_MEAN, S_RUN} state_t;
  state_t state;

  logic signed [7:0] gamma [D];
  logic signed [7:0] beta  [D];
  logic signed [7:0] x_q   [D];
  logic signed [8:0] mu;
  logic              first;
  logic [BW-1:0]     batch;

  // ---------------- parameters ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < D; i++) begin
        gamma[i] <= '0;
        beta[i]  <= '0;
      end
    end else if (cfg_we) begin
      for (int i = 0; i < D; i++) begin
        if (32'(cfg_addr) == BASE + 32'(i))     gamma[i] <= cfg_wdata;
        if (32'(cfg_addr) == BASE + 32'(D + i)) beta[i]  <= cfg_wdata;
      end
    end
  end

  // ---------------- mean and range ----------------
  logic signed [31:0] sum_x;
  logic signed [31:0] mu_full;
  logic signed [7:0]  xmax, xmin;
  logic        [8:0]  range_x;

  always_comb begin
    sum_x = '0;
    xmax  = x_q[0];
    xmin  = x_q[0];
    for (int i = 0; i < D; i++) begin
      sum_x += 32'(x_q[i]);
      if (x_q[i] > xmax) xmax = x_q[i];
      if (x_q[i] < xmin) xmin = x_q[i];
    end
    mu_full = (sum_x * RECIP) >>> 16;
    range_x = 9'(10'(xmax) - 10'(xmin));
  end

  // ---------------- compute units ----------------
  logic              u_start  [NU];
  logic              u_fin    [NU];
  logic signed [7:0] u_ynext  [NU];
  logic              u_done   [NU];
  logic signed [7:0] u_y      [NU];
  logic signed [8:0] u_num    [NU];
  logic signed [7:0] u_gamma  [NU];
  logic signed [7:0] u_beta   [NU];
  logic              launch;
  logic [BW-1:0]     lbatch;                       // batch being launched
  logic              last_batch;

  assign last_batch = (32'(batch) == NB-1);
  // first batch launches in the range cycle, later ones on the finishing edge
  assign launch = (state == S_RUN) && (first || (u_fin[0] && !last_batch));
  assign lbatch = first ? '0 : BW'(batch + 1'b1);

  for (genvar u = 0; u < NU; u++) begin : g_unit
    int e;
    always_comb begin
      e          = 32'(lbatch) * NU + u;
      u_start[u] = launch && (e < D);
      u_num[u]   = (e < D) ? 9'(10'(x_q[e]) - 10'(mu)) : '0;
      u_gamma[u] = (e < D) ? gamma[e] : '0;
      u_beta[u]  = (e < D) ? beta[e]  : '0;
    end
    rn_compute_unit #(.QF(QF), .SHIFT(SHIFT)) u_cu (
      .clk      (clk),
      .rst_n    (rst_n),
      .start    (u_start[u]),
      .num      (u_num[u]),
      .den      (range_x),
      .gamma    (u_gamma[u]),
      .beta     (u_beta[u]),
      .finishing(u_fin[u]),
      .y_next   (u_ynext[u]),
      .done     (u_done[u]),
      .y        (u_y[u])
    );
  end

  // ---------------- control ----------------
  assign in_ready = (state == S_IDLE) && !out_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      out_valid <= 1'b0;
      first     <= 1'b0;
      batch     <= '0;
      mu        <= '0;
      for (int i = 0; i < D; i++) begin
        x_q[i]      <= '0;
        out_data[i] <= '0;
      end
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (in_valid && in_ready) begin
          x_q   <= in_data;
          state <= S_MEAN;
        end
        S_MEAN: begin
          mu    <= 9'(mu_full);
          first <= 1'b1;
          batch <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          first <= 1'b0;
          if (!first && u_fin[0]) begin
            for (int u = 0; u < NU; u++)
              if (32'(batch) * NU + u < D) out_data[32'(batch) * NU + u] <= u_ynext[u];
            if (last_batch) begin
              out_valid <= 1'b1;
              state     <= S_IDLE;
            end else begin
              batch <= batch + 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid);

endmodule
