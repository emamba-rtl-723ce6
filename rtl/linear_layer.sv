// linear_layer -- INT8 fully connected layer with runtime-writable weights.
//
// Computes y[j] = sat8(((sum_i W[j][i] * x[i]) >>> SHIFT) + b[j]) for
// j = 0..OUT-1, optionally followed by ReLU. The IN products of one output
// neuron are formed in parallel and summed in one cycle, so a token takes OUT
// cycles: 40 cycles for the ED=40 projections and 57 cycles (+1 for the output
// handshake) for the 57-output head, which is the per-token cost the paper
// reports for these layers. Weights and biases live in flip-flops and are
// written one INT8 value at a time over the parameter bus, as in the
// reconfigurable build the paper describes. The shift amount (a power-of-two
// requantisation scale) and the place where the bias is added (after the
// shift, at output scale) are this design's choices.
//
// Interface: ready/valid token streams. in_ready is high only while the layer
// is idle and its output register is empty; a token is taken on
// in_valid && in_ready. out_valid rises OUT cycles later and out_data is held
// until out_ready.
// Parameter bus: address BASE + j*IN + i writes W[j][i]; BASE + OUT*IN + j
// writes b[j].
module linear_layer
  import emamba_pkg::*;
#(
  parameter int          IN    = 20,
  parameter int          OUT   = 40,
  parameter int          SHIFT = 6,
  parameter bit          RELU  = 1'b0,
  parameter int unsigned BASE  = 0
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic signed [7:0]        in_data  [IN],
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic signed [7:0]        out_data [OUT],
  input  logic                     cfg_we,
  input  logic [CFG_AW-1:0]        cfg_addr,
  input  logic signed [7:0]        cfg_wdata
);
  localparam int SIZE = OUT*(IN+1);
  localparam int CW   = (OUT > 1) ? $clog2(OUT) : 1;

  logic signed [7:0] w    [OUT*IN];       // W[j][i] at j*IN + i
  logic signed [7:0] bias [OUT];
  logic signed [7:0] x_q  [IN];
  logic              busy;
  logic [CW-1:0]     cnt;
  logic signed [31:0] dot;
  logic signed [7:0]  y_now;

  // parameter writes: the bus offset indexes the weight or bias store directly
  logic [31:0] cfg_off;
  assign cfg_off = 32'(cfg_addr) - 32'(BASE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < OUT*IN; k++) w[k] <= '0;
      for (int j = 0; j < OUT; j++) bias[j] <= '0;
    end else if (cfg_we && (cfg_off < 32'(SIZE))) begin   // below BASE wraps high
      if (cfg_off < 32'(OUT*IN)) w[cfg_off] <= cfg_wdata;
      else                       bias[cfg_off - 32'(OUT*IN)] <= cfg_wdata;
    end
  end

  // one output neuron per cycle
  always_comb begin
    dot = '0;
    for (int i = 0; i < IN; i++)
      dot += 32'(w[32'(cnt)*IN + i]) * 32'(x_q[i]);
    y_now = sat8(48'((dot >>> SHIFT) + 32'(bias[cnt])));
    if (RELU && y_now[7]) y_now = '0;
  end

  assign in_ready = !busy && !out_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      out_valid <= 1'b0;
      cnt       <= '0;
      for (int i = 0; i < IN; i++)  x_q[i]      <= '0;
      for (int j = 0; j < OUT; j++) out_data[j] <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        x_q  <= in_data;
        busy <= 1'b1;
        cnt  <= '0;
      end else if (busy) begin
        out_data[cnt] <= y_now;
        if (32'(cnt) == OUT-1) begin
          busy      <= 1'b0;
          out_valid <= 1'b1;
          cnt       <= '0;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

  // a presented token is held until it is taken
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid);

endmodule
