// conv1d -- causal depthwise 1-D convolution along the token sequence.
//
// Each of the CH channels has its own K-tap kernel and bias. For token t,
//   y_t[c] = sat8(((sum_{k=0}^{K-1} w[c][k] * x_{t-K+1+k}[c]) >>> SHIFT) + b[c]),
// where tokens before the start of the frame count as zero. The block keeps
// the last K-1 tokens of the frame in a shift register and clears it after
// SEQ tokens, so every frame starts from an empty history. The paper only
// names this layer ("1D Conv." / "Conv. Layer"); the depthwise causal form
// and K = 4 follow the usual Mamba layer, and, as the paper's block diagram
// draws it, no activation follows the convolution.
//
// Timing: one token per cycle. A token taken on in_valid && in_ready is
// convolved in that cycle and appears registered on the next edge with
// out_valid; it is held until out_ready. in_ready = !out_valid.
// Parameter bus: BASE + c*K + k writes w[c][k] (k = K-1 multiplies the
// current token); BASE + CH*K + c writes b[c].
module conv1d
  import emamba_pkg::*;
#(
  parameter int          CH    = 40,
  parameter int          K     = 4,
  parameter int          SEQ   = 16,
  parameter int          SHIFT = 4,
  parameter int unsigned BASE  = 0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic signed [7:0]  in_data  [CH],
  output logic               out_valid,
  input  logic               out_ready,
  output logic signed [7:0]  out_data [CH],
  input  logic               cfg_we,
  input  logic [CFG_AW-1:0]  cfg_addr,
  input  logic signed [7:0]  cfg_wdata
);
  localparam int TW = $clog2(SEQ + 1);

  logic signed [7:0] w    [CH*K];       // w[c][k] at c*K + k
  logic [31:0]       cfg_off;
  assign cfg_off = 32'(cfg_addr) - 32'(BASE);
  logic signed [7:0] bias [CH];
  logic signed [7:0] hist [K-1][CH];   // hist[K-2] is the previous token
  logic [TW-1:0]     tcnt;
  logic signed [7:0] y    [CH];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int c = 0; c < CH; c++) begin
        bias[c] <= '0;
        for (int k = 0; k < K; k++) w[c*K + k] <= '0;
      end
    end else if (cfg_we && (cfg_off < 32'(CH*K + CH))) begin   // below BASE wraps high
      if (cfg_off < 32'(CH*K)) w[cfg_off] <= cfg_wdata;
      else                     bias[cfg_off - 32'(CH*K)] <= cfg_wdata;
    end
  end

  always_comb begin
    for (int c = 0; c < CH; c++) begin
      logic signed [31:0] acc;
      acc = 32'(w[c*K + K-1]) * 32'(in_data[c]);
      for (int k = 0; k < K-1; k++)
        acc += 32'(w[c*K + k]) * 32'(hist[k][c]);
      y[c] = sat8(48'((acc >>> SHIFT) + 32'(bias[c])));
    end
  end

  assign in_ready = !out_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      tcnt      <= '0;
      for (int c = 0; c < CH; c++) begin
        out_data[c] <= '0;
        for (int k = 0; k < K-1; k++) hist[k][c] <= '0;
      end
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        out_data  <= y;
        out_valid <= 1'b1;
        if (32'(tcnt) == SEQ-1) begin
          tcnt <= '0;
          for (int c = 0; c < CH; c++)
            for (int k = 0; k < K-1; k++) hist[k][c] <= '0;
        end else begin
          tcnt <= tcnt + 1'b1;
          for (int c = 0; c < CH; c++) begin
            for (int k = 0; k < K-2; k++) hist[k][c] <= hist[k+1][c];
            hist[K-2][c] <= in_data[c];
          end
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid);

endmodule
