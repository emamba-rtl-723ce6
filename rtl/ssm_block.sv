// ssm_block -- the selective SSM layer of a Mamba block.
//
// From the token x_t (ED elements) three linear layers produce, at the same
// time, the low-rank step input dt (R elements, followed by ReLU, which
// replaces softplus), B_t (N) and C_t (N). A second linear layer expands dt
// to Delta (ED). ssm_core then discretises A and B with Delta, updates the
// ED x N state and returns y_t. The order L -> ReLU -> L -> Delta and the
// ReLU-for-softplus swap follow the paper's block diagram and text; the
// sequencing (the block takes one token, waits for all three projections,
// then runs the Delta projection and the core) is this design's own.
//
// Timing with one output neuron per cycle in every linear layer: a token is
// taken on edge E0 (the three projections start on the same edge), they
// finish after max(R, N) cycles, one cycle hands them to Delta, Delta takes ED
// cycles, one cycle starts the core, the core takes one and the result is
// registered on the next: out_valid rises max(R, N) + ED + 4 cycles after E0
// (52 at ED=40, N=8). The output is held
// until out_ready; no new token is taken before that.
// Parameter bus, in order from BASE: dt projection (ED->R), B projection
// (ED->N), C projection (ED->N), Delta projection (R->ED), then ssm_core
// (A, D).
module ssm_block
  import emamba_pkg::*;
#(
  parameter int          ED   = 40,
  parameter int          N    = 8,
  parameter int          R    = 2,
  parameter int          SEQ  = 16,
  parameter int unsigned BASE = 0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic signed [7:0]  in_data  [ED],
  output logic               out_valid,
  input  logic               out_ready,
  output logic signed [7:0]  out_data [ED],
  input  logic               cfg_we,
  input  logic [CFG_AW-1:0]  cfg_addr,
  input  logic signed [7:0]  cfg_wdata
);
  localparam int unsigned B_DT   = BASE;
  localparam int unsigned B_B    = B_DT  + lin_size(ED, R);
  localparam int unsigned B_C    = B_B   + lin_size(ED, N);
  localparam int unsigned B_DEL  = B_C   + lin_size(ED, N);
  localparam int unsigned B_CORE = B_DEL + lin_size(R, ED);

  typedef enum logic [1:0] {S_IDLE, S_PROJ, S_DELTA, S_CORE} state_t;
  state_t state;

  logic signed [7:0] x_s   [ED];
  logic signed [7:0] b_s   [N];
  logic signed [7:0] c_s   [N];
  logic              go;

  logic dt_iv, dt_ir, dt_ov, b_iv, b_ir, b_ov, c_iv, c_ir, c_ov, p_pop;
  logic signed [7:0] dt_o [R];
  logic signed [7:0] b_o  [N];
  logic signed [7:0] c_o  [N];
  logic del_ir, del_ov, del_pop;
  logic signed [7:0] del_o [ED];
  logic core_done;
  logic signed [7:0] core_y [ED];

  assign in_ready = (state == S_IDLE) && !out_valid;
  assign go       = in_valid && in_ready;
  assign dt_iv    = go;
  assign b_iv     = go;
  assign c_iv     = go;
  assign p_pop    = (state == S_PROJ) && dt_ov && b_ov && c_ov;
  assign del_pop  = (state == S_DELTA) && del_ov;

  linear_layer #(.IN(ED), .OUT(R), .SHIFT(6), .RELU(1'b1), .BASE(B_DT)) u_dt (
    .clk, .rst_n, .in_valid(dt_iv), .in_ready(dt_ir), .in_data(in_data),
    .out_valid(dt_ov), .out_ready(p_pop), .out_data(dt_o),
    .cfg_we, .cfg_addr, .cfg_wdata);
  linear_layer #(.IN(ED), .OUT(N), .SHIFT(6), .RELU(1'b0), .BASE(B_B)) u_b (
    .clk, .rst_n, .in_valid(b_iv), .in_ready(b_ir), .in_data(in_data),
    .out_valid(b_ov), .out_ready(p_pop), .out_data(b_o),
    .cfg_we, .cfg_addr, .cfg_wdata);
  linear_layer #(.IN(ED), .OUT(N), .SHIFT(6), .RELU(1'b0), .BASE(B_C)) u_c (
    .clk, .rst_n, .in_valid(c_iv), .in_ready(c_ir), .in_data(in_data),
    .out_valid(c_ov), .out_ready(p_pop), .out_data(c_o),
    .cfg_we, .cfg_addr, .cfg_wdata);
  linear_layer #(.IN(R), .OUT(ED), .SHIFT(4), .RELU(1'b0), .BASE(B_DEL)) u_delta (
    .clk, .rst_n, .in_valid(p_pop), .in_ready(del_ir), .in_data(dt_o),
    .out_valid(del_ov), .out_ready(del_pop), .out_data(del_o),
    .cfg_we, .cfg_addr, .cfg_wdata);
  ssm_core #(.ED(ED), .N(N), .SEQ(SEQ), .BASE(B_CORE)) u_core (
    .clk, .rst_n, .start(del_pop), .x(x_s), .delta(del_o), .b(b_s), .c(c_s),
    .done(core_done), .y(core_y), .cfg_we, .cfg_addr, .cfg_wdata);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      out_valid <= 1'b0;
      for (int e = 0; e < ED; e++) begin
        x_s[e]      <= '0;
        out_data[e] <= '0;
      end
      for (int n = 0; n < N; n++) begin
        b_s[n] <= '0;
        c_s[n] <= '0;
      end
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      unique case (state)
        S_IDLE:  if (go) begin
          x_s   <= in_data;
          state <= S_PROJ;
        end
        S_PROJ:  if (p_pop) begin
          b_s   <= b_o;
          c_s   <= c_o;
          state <= S_DELTA;
        end
        S_DELTA: if (del_pop) state <= S_CORE;
        S_CORE:  if (core_done) begin
          out_data  <= core_y;
          out_valid <= 1'b1;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the projections are idle whenever a token is taken
  assert property (@(posedge clk) disable iff (!rst_n) go |-> dt_ir && b_ir && c_ir);
  assert property (@(posedge clk) disable iff (!rst_n) p_pop |-> del_ir);
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid);

endmodule
