// wl_block_check -- testbench helper: runs one Mamba block of a given size
// against emamba_model and reports its check and failure counts.
//
// Used by tb_workload_blocks to run the block at the sizes of the paper's
// other workloads. It writes a random parameter image for one block (gamma
// positive, A negative) over its own parameter bus, then streams NFRAMES
// frames of SEQ random INT8 tokens with random input gaps and random output
// stalls, and compares every output token with emamba_model.block. The SSM
// state clears after SEQ tokens in both the block and the model. Ports: clk
// in, rst_n in, start in (level; the run begins when it is high), done out
// (high after the last token was checked), checks and failures out. The
// output stall count is folded into the checks: a run without any stall
// counts as a failure.
module wl_block_check
  import emamba_pkg::*;
  import emamba_ref_pkg::*;
  import emamba_model_pkg::*;
#(
  parameter int D = 20, ED = 40, N = 8, R = 2, SEQ = 16, NFRAMES = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int unsigned BASE = (PATCH*PATCH*IMG_C + 1) * D;   // first block
  logic iv = 1'b0, ir, ov, ordy = 1'b0;
  logic signed [7:0] id [D], od [D];
  logic cfg_we = 1'b0; logic [CFG_AW-1:0] cfg_addr = '0; logic signed [7:0] cfg_wdata = '0;
  mamba_block #(.D(D), .ED(ED), .N(N), .R(R), .SEQ(SEQ), .BASE(BASE)) dut (
    .clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_data(id),
    .out_valid(ov), .out_ready(ordy), .out_data(od), .cfg_we, .cfg_addr, .cfg_wdata);

  emamba_model model;
  int expq [$][];
  int nrecv = 0, n_stall = 0;
  initial begin done = 1'b0; checks = 0; failures = 0; end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 6) $display("FAIL D=%0d: %s", D, what);
    end
  endtask

  always @(posedge clk) if (rst_n && start) begin
    ordy <= ($urandom_range(3, 0) != 0);
    if (ov && !ordy) n_stall++;
    if (ov && ordy) begin
      int e[];
      e = expq.pop_front();
      for (int c = 0; c < D; c++)
        chk(int'(od[c]) == e[c],
            $sformatf("tok %0d ch %0d got %0d exp %0d", nrecv, c, od[c], e[c]));
      nrecv++;
    end
  end

  initial begin
    int b0, a0;
    model = new(D, ED, N, R);
    model.SEQ = SEQ;
    b0 = model.blk_base(0);
    a0 = b0 + 2*D + 2*model.lsz(D, ED) + ED*(CONV_K+1) + model.lsz(ED, R) +
         2*model.lsz(ED, N) + model.lsz(R, ED);
    for (int i = 0; i < model.blk_sz(); i++)
      model.img[b0 + i] = $signed($urandom_range(60, 0)) - 30;
    for (int i = 0; i < D; i++) model.img[b0 + i] = $urandom_range(100, 30);
    for (int i = 0; i < ED*N; i++) model.img[a0 + i] = -$signed($urandom_range(60, 1));
    wait (rst_n && start);
    @(posedge clk);
    for (int i = 0; i < model.blk_sz(); i++) begin
      cfg_we <= 1'b1; cfg_addr <= CFG_AW'(b0 + i); cfg_wdata <= 8'(model.img[b0 + i]);
      @(posedge clk);
    end
    cfg_we <= 1'b0;
    for (int t = 0; t < NFRAMES*SEQ; t++) begin
      int x[], y[];
      x = new[D];
      foreach (x[i]) x[i] = $signed($urandom_range(255, 0)) - 128;
      model.block(0, x, y);
      expq.push_back(y);
      @(negedge clk);
      repeat ($urandom_range(3, 0) == 0 ? $urandom_range(30, 0) : 0) @(negedge clk);
      foreach (x[i]) id[i] = 8'(x[i]);
      iv = 1'b1;
      // in_ready of the block's input fork depends on in_valid: let it settle
      #1;
      while (!ir) begin @(negedge clk); #1; end
      @(negedge clk);
      iv = 1'b0;
    end
    while (nrecv < NFRAMES*SEQ) @(negedge clk);
    $display("D=%0d ED=%0d N=%0d SEQ=%0d: %0d tokens checked, stalls=%0d",
             D, ED, N, SEQ, nrecv, n_stall);
    chk(n_stall > 0, "output stall exercised");
    done = 1'b1;
  end
endmodule
