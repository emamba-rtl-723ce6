// tb_mamba_block -- checks one complete Mamba block against emamba_model.
//
// The block sits at the parameter address it has as the first block of the
// accelerator. Random parameters (gamma positive, A negative, wide gate
// weights), then three frames of 16 random tokens with random gaps and output
// stalls; each output token is compared with emamba_model.block, which runs
// range norm, both projections, convolution, SSM, SiLU gate, output
// projection and residual. A second run with the consumer always ready and
// tokens always offered measures the steady-state token interval, which must
// equal the SSM layer's occupancy, the slowest stage: its max(R, N) + ED + 4
// cycle latency, one cycle for the gate to take the result and one for the
// next token to enter (54 cycles at ED = 40, N = 8). Counts the internal mechanisms: range norm and residual FIFO
// holding tokens, overlap of range norm with the SSM layer, and both SiLU
// clamp regions.
module tb_mamba_block;
  import emamba_pkg::*;
  import emamba_ref_pkg::*;
  import emamba_model_pkg::*;

  localparam int D = 20, ED = 40, N = 8, R = 2, SEQ = 16;
  localparam int unsigned BASE = lin_size(PATCH*PATCH*IMG_C, D);
  localparam int INTERVAL = N + ED + 6;
  logic clk = 0, rst_n = 0, iv = 0, ir, ov, ordy = 0;
  logic signed [7:0] id [D], od [D];
  logic cfg_we = 0; logic [CFG_AW-1:0] cfg_addr = 0; logic signed [7:0] cfg_wdata = 0;
  mamba_block #(.BASE(BASE)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_data(id),
    .out_valid(ov), .out_ready(ordy), .out_data(od), .cfg_we, .cfg_addr, .cfg_wdata);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  emamba_model model;
  int expq [$][];
  int nrecv = 0, n_stall = 0, n_rn_hold = 0, n_overlap = 0;
  bit rand_ready = 1;
  longint t_out [$];
  always @(posedge clk) if (rst_n) begin
    ordy <= rand_ready ? ($urandom_range(2, 0) != 0) : 1'b1;
    if (ov && !ordy) n_stall++;
    if (dut.u_rn.out_valid && !dut.u_rn.out_ready) n_rn_hold++;
    if (!dut.u_rn.in_ready && !dut.u_rn.out_valid &&
        !dut.u_ssm.in_ready && !dut.u_ssm.out_valid) n_overlap++;
    if (ov && ordy) begin
      int e[];
      e = expq.pop_front();
      for (int c = 0; c < D; c++)
        chk(int'(od[c]) == e[c], $sformatf("tok %0d ch %0d got %0d exp %0d", nrecv, c, od[c], e[c]));
      if (!rand_ready) t_out.push_back(cyc);
      nrecv++;
    end
  end

  task automatic send(input int nt, input bit gaps);
    int x[], y[];
    for (int t = 0; t < nt; t++) begin
      x = new[D];
      foreach (x[i]) x[i] = $signed($urandom_range(255, 0)) - 128;
      model.block(0, x, y);
      expq.push_back(y);
      @(negedge clk);
      if (gaps) repeat ($urandom_range(40, 0)) @(negedge clk);
      foreach (x[i]) id[i] = 8'(x[i]);
      iv = 1;
      // in_ready of the input fork depends on in_valid: let it settle
      #1;
      while (!ir) begin @(negedge clk); #1; end
      @(negedge clk);
      iv = 0;
    end
  endtask

  initial begin
    int b0, a0, z0;
    model = new();
    b0 = model.blk_base(0);
    a0 = b0 + 2*D + 2*model.lsz(D, ED) + ED*(CONV_K+1) + model.lsz(ED, R) +
         2*model.lsz(ED, N) + model.lsz(R, ED);
    z0 = b0 + 2*D + model.lsz(D, ED);
    for (int i = 0; i < model.blk_sz(); i++)
      model.img[b0 + i] = $signed($urandom_range(60, 0)) - 30;
    for (int i = 0; i < D; i++) model.img[b0 + i] = $urandom_range(100, 30);
    for (int i = 0; i < ED*N; i++) model.img[a0 + i] = -$signed($urandom_range(60, 1));
    for (int i = 0; i < D*ED; i++) model.img[z0 + i] = $signed($urandom_range(254, 0)) - 127;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < model.blk_sz(); i++) begin
      cfg_we <= 1; cfg_addr <= CFG_AW'(b0 + i); cfg_wdata <= 8'(model.img[b0 + i]); @(posedge clk);
    end
    cfg_we <= 0;
    send(2*SEQ, 1'b1);
    while (nrecv < 2*SEQ) @(negedge clk);
    // steady state: always offered, always taken
    rand_ready = 0;
    send(SEQ, 1'b0);
    while (nrecv < 3*SEQ) @(negedge clk);
    for (int k = 8; k < SEQ; k++)
      chk(t_out[k] - t_out[k-1] == INTERVAL,
          $sformatf("token interval %0d, expected %0d", t_out[k] - t_out[k-1], INTERVAL));
    $display("mechanisms: stall=%0d rn_hold=%0d overlap=%0d silu<-7=%0d silu>7=%0d",
             n_stall, n_rn_hold, n_overlap, model.n_silu_low, model.n_silu_high);
    chk(n_stall > 0, "output stall exercised");
    chk(n_rn_hold > 0, "range norm held a finished token");
    chk(n_overlap > 0, "range norm overlapped the SSM layer");
    chk(model.n_silu_low > 0, "SiLU clamp below -7 exercised");
    chk(model.n_silu_high > 0, "SiLU identity above 7 exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
