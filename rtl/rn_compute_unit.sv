// rn_compute_unit -- one element engine of the range normalisation layer.
//
// Produces y = sat8(((gamma * q) >>> SHIFT) + beta) with
// q = round-toward-zero((num << QF) / den), i.e. gamma*(x-mu)/range + beta with
// the quotient in QF fractional bits. The division is a restoring divider on
// the magnitude of num that retires one quotient bit per cycle (8+QF = 20
// cycles), then one cycle multiplies by gamma, one shifts and adds beta and
// one saturates: 23 cycles per element, the count the paper gives for
// "division, multiplication, addition, and bit-shifting". The divider form, QF
// and SHIFT are this design's choices; den = 0 gives q = 0.
//
// Timing: start is sampled on a clock edge (the load edge L); y and the done
// pulse are registered on edge L+23. During the last of those cycles
// `finishing` is high and y_next shows the value about to be registered; a
// start sampled on that same edge (L+23) loads the next element, so
// back-to-back elements cost exactly 23 cycles each.
module rn_compute_unit
  import emamba_pkg::*;
#(
  parameter int QF    = 12,
  parameter int SHIFT = 13
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic signed [8:0] num,     // x_i - mu
  input  logic        [8:0] den,     // range, 0..255
  input  logic signed [7:0] gamma,
  input  logic signed [7:0] beta,
  output logic              finishing,
  output logic signed [7:0] y_next,
  output logic              done,
  output logic signed [7:0] y
);
  localparam int NB = 8 + QF;               // numerator bits = divide steps

  typedef enum logic [2:0] {S_IDLE, S_DIV, S_MUL, S_ADD, S_SAT} state_t;
  state_t state;

  logic [NB-1:0]      nreg;                 // numerator, shifted out MSB first
  logic [NB-1:0]      q;                    // quotient
  logic [9:0]         rem;
  logic [8:0]         den_q;
  logic               neg;
  logic signed [7:0]  gamma_q, beta_q;
  logic [$clog2(NB+1)-1:0] step;
  logic signed [31:0] prod;
  logic signed [31:0] sum, sum_q;
  logic [9:0]         rem_sh;
  logic [8:0]         mag;

  assign mag    = num[8] ? 9'(-num) : 9'(num);
  assign rem_sh = {rem[8:0], nreg[NB-1]};
  assign finishing = (state == S_SAT);
  assign y_next    = sat8(48'(sum_q));

  always_comb sum = (prod >>> SHIFT) + 32'(beta_q);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      nreg    <= '0;
      q       <= '0;
      rem     <= '0;
      den_q   <= '0;
      neg     <= 1'b0;
      gamma_q <= '0;
      beta_q  <= '0;
      step    <= '0;
      prod    <= '0;
      sum_q   <= '0;
      done    <= 1'b0;
      y       <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: ;
        S_DIV: begin
          nreg <= nreg << 1;
          if (rem_sh >= {1'b0, den_q}) begin
            rem <= rem_sh - {1'b0, den_q};
            q   <= {q[NB-2:0], 1'b1};
          end else begin
            rem <= rem_sh;
            q   <= {q[NB-2:0], 1'b0};
          end
          if (32'(step) == NB-1) state <= S_MUL;
          step <= step + 1'b1;
        end
        S_MUL: begin
          if (den_q == '0)
            prod <= '0;
          else if (neg)
            prod <= 32'(gamma_q) * -$signed({1'b0, q});
          else
            prod <= 32'(gamma_q) * $signed({1'b0, q});
          state <= S_ADD;
        end
        S_ADD: begin
          sum_q <= sum;
          state <= S_SAT;
        end
        S_SAT: begin
          y     <= y_next;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
      if (start) begin
        nreg    <= NB'(mag) << QF;
        q       <= '0;
        rem     <= '0;
        step    <= '0;
        den_q   <= den;
        neg     <= num[8];
        gamma_q <= gamma;
        beta_q  <= beta;
        state   <= S_DIV;
      end
    end
  end

endmodule
