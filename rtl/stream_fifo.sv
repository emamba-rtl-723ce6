// stream_fifo -- small first-in first-out buffer of whole tokens.
//
// Holds up to DEPTH tokens of CH INT8 elements between a ready/valid producer
// and consumer. The Mamba block uses it for the two operands that travel
// around the long middle of the block: the block input kept for the residual
// add, and the gate-branch token kept for the SiLU gate. Because each of
// those paths can hold several tokens while the other path is still
// computing, the buffer lets the layers stall and resume without deadlock.
// The buffers are this design's own; the paper only states that stages are
// synchronised by ready/valid and stall until the next stage accepts.
//
// Timing: a write on in_valid && in_ready and a read on out_valid && out_ready
// can happen in the same cycle; out_data shows the oldest token
// combinationally from the storage array; a token written on an edge can be
// read in the cycle after it. DEPTH must be a power of two.
module stream_fifo #(
  parameter int CH    = 20,
  parameter int DEPTH = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic signed [7:0] in_data  [CH],
  output logic              out_valid,
  input  logic              out_ready,
  output logic signed [7:0] out_data [CH]
);
  localparam int AW = $clog2(DEPTH);

  logic signed [7:0] mem [DEPTH][CH];
  logic [AW-1:0]     wp, rp;
  logic [AW:0]       cnt;

  assign in_ready  = (32'(cnt) < DEPTH);
  assign out_valid = (cnt != '0);
  assign out_data  = mem[rp];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
      for (int d = 0; d < DEPTH; d++)
        for (int c = 0; c < CH; c++) mem[d][c] <= '0;
    end else begin
      if (in_valid && in_ready) begin
        mem[wp] <= in_data;
        wp      <= wp + 1'b1;
      end
      if (out_valid && out_ready) rp <= rp + 1'b1;
      cnt <= cnt + (AW+1)'(in_valid && in_ready) - (AW+1)'(out_valid && out_ready);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) 32'(cnt) <= DEPTH);

endmodule
