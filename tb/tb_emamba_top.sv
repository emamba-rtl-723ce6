// tb_emamba_top -- end-to-end test of the accelerator at its default size.
//
// Writes a random parameter image over the parameter bus, streams several
// random frames back to back while the result consumer stalls at random, and
// compares every 57-value result with emamba_model. It then rewrites all
// parameters (runtime reconfiguration) and runs more frames. It measures the
// frame latency (frame taken -> result valid, with an idle pipeline) and the
// steady-state frame interval, and counts how often each mechanism of the
// design was exercised: result back-pressure, a stage holding a finished
// token, overlap of layers on different tokens, a new frame entering while an
// older one is in flight, the exp clamps below -4 and above 1, the SiLU
// clamps below -7 and above 7, state clearing between frames, and
// reconfiguration. A mechanism that never happens counts as a failure.
module tb_emamba_top;
  import emamba_pkg::*;
  import emamba_ref_pkg::*;
  import emamba_model_pkg::*;

  localparam int NFRAMES_A = 3;
  localparam int NFRAMES_B = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic frame_valid = 1'b0, frame_ready;
  logic signed [7:0] frame [FRAME_SZ];
  logic res_valid, res_ready = 1'b0;
  logic signed [7:0] res_data [N_OUT];
  logic cfg_we = 1'b0;
  logic [CFG_AW-1:0] cfg_addr = '0;
  logic signed [7:0] cfg_wdata = '0;

  emamba_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  emamba_model model;
  int frames [$][];         // frames sent, in order
  int expect_q [$][];       // expected results, in order
  int n_sent = 0, n_recv = 0;
  longint t_sent [$];
  longint first_latency = -1, t_first_res = -1, t_last_res = -1;
  bit rand_ready = 1'b1;

  // mechanism counters
  int m_res_stall = 0, m_rn_hold = 0, m_overlap = 0, m_inflight = 0;
  int m_reconfig = 0, m_frames_after_first = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // random parameter image; A negative, gamma positive, wide gate weights
  task automatic make_image(input int seed_mix);
    int a0;
    for (int i = 0; i < model.total_words(); i++)
      model.img[i] = $signed($urandom_range(40, 0)) - 20;
    for (int b = 0; b < model.M; b++) begin
      for (int i = 0; i < model.D; i++)
        model.img[model.blk_base(b) + i] = $urandom_range(96, 32);
      a0 = model.blk_base(b) + 2*model.D + 2*model.lsz(model.D, model.ED)
         + model.ED*(model.K+1) + model.lsz(model.ED, model.R)
         + 2*model.lsz(model.ED, model.N) + model.lsz(model.R, model.ED);
      for (int i = 0; i < model.ED*model.N; i++)
        model.img[a0 + i] = -$signed($urandom_range(60, 1));
      // wide gate-branch weights so that z reaches both SiLU clamp regions
      for (int i = 0; i < model.D*model.ED; i++)
        model.img[model.blk_base(b) + 2*model.D + model.lsz(model.D, model.ED) + i] =
          $signed($urandom_range(254, 0)) - 127;
    end
  endtask

  task automatic load_image();
    for (int i = 0; i < model.total_words(); i++) begin
      cfg_we    <= 1'b1;
      cfg_addr  <= CFG_AW'(i);
      cfg_wdata <= 8'(model.img[i]);
      @(posedge clk);
    end
    cfg_we <= 1'b0;
    @(posedge clk);
  endtask

  task automatic new_frame(ref int f[]);
    f = new[FRAME_SZ];
    foreach (f[i]) f[i] = $signed($urandom_range(200, 0)) - 100;
  endtask

  // producer: sends nf frames as fast as the design takes them
  task automatic send_frames(input int nf);
    int f[], r[];
    for (int k = 0; k < nf; k++) begin
      new_frame(f);
      model.run_frame(f, r);
      expect_q.push_back(r);
      // drive on the falling edge; the frame is taken on the next rising
      // edge at which frame_ready is high
      @(negedge clk);
      foreach (frame[i]) frame[i] = 8'(f[i]);
      frame_valid = 1'b1;
      while (!frame_ready) @(negedge clk);
      @(negedge clk);
      frame_valid = 1'b0;
    end
  endtask

  always @(posedge clk) if (rst_n && frame_valid && frame_ready) begin
    if (n_sent > n_recv) m_inflight++;
    t_sent.push_back(cyc);
    n_sent++;
  end

  // consumer
  always @(posedge clk) begin
    res_ready <= rand_ready ? ($urandom_range(3, 0) != 0) : 1'b1;
    if (res_valid && !res_ready) m_res_stall++;
    if (res_valid && res_ready) begin
      int r[];
      longint ts;
      r  = expect_q.pop_front();
      ts = t_sent.pop_front();
      if (n_recv == 0) begin
        first_latency = cyc - ts - 1;   // monitor sees res_valid one edge late
        t_first_res   = cyc;
      end
      t_last_res = cyc;
      for (int j = 0; j < N_OUT; j++)
        chk(int'(res_data[j]) == r[j],
            $sformatf("frame %0d out %0d: got %0d exp %0d", n_recv, j, res_data[j], r[j]));
      n_recv++;
    end
  end

  // internal mechanisms
  always @(posedge clk) if (rst_n) begin
    if (dut.g_blk[0].u_blk.u_rn.out_valid && !dut.g_blk[0].u_blk.u_rn.out_ready) m_rn_hold++;
    if (!dut.g_blk[0].u_blk.u_rn.in_ready && !dut.g_blk[0].u_blk.u_rn.out_valid &&
        !dut.g_blk[0].u_blk.u_ssm.in_ready && !dut.g_blk[0].u_blk.u_ssm.out_valid) m_overlap++;
  end

  initial begin
    model = new();
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);

    // ---- single frame, idle pipeline, consumer always ready: latency ----
    make_image(0);
    load_image();
    rand_ready = 1'b0;
    send_frames(1);
    wait (n_recv == 1);
    $display("frame latency = %0d cycles (paper reports 1643 for its build)", first_latency);
    chk(first_latency > 0 && first_latency < 3000, "frame latency within 3000 cycles");

    // ---- back-to-back frames with random back-pressure ----
    rand_ready = 1'b1;
    send_frames(NFRAMES_A);
    wait (n_recv == 1 + NFRAMES_A);
    m_frames_after_first = n_recv - 1;
    $display("interval over %0d frames = %0d cycles/frame", NFRAMES_A,
             (t_last_res - t_first_res) / NFRAMES_A);

    // ---- reconfigure every parameter and run again ----
    repeat (5) @(posedge clk);
    make_image(1);
    load_image();
    m_reconfig++;
    send_frames(NFRAMES_B);
    wait (n_recv == 1 + NFRAMES_A + NFRAMES_B);
    repeat (5) @(posedge clk);

    $display("mechanisms: res_stall=%0d rn_hold=%0d overlap=%0d inflight=%0d reconfig=%0d",
             m_res_stall, m_rn_hold, m_overlap, m_inflight, m_reconfig);
    $display("            exp<-4=%0d exp>=1=%0d silu<-7=%0d silu>7=%0d h_sat=%0d",
             model.n_exp_low, model.n_exp_high, model.n_silu_low, model.n_silu_high,
             model.n_h_sat);
    chk(m_res_stall > 0, "result back-pressure happened");
    chk(m_rn_hold > 0, "a stage held a finished token");
    chk(m_overlap > 0, "layers overlapped on different tokens");
    chk(m_inflight > 0, "a frame entered while another was in flight");
    chk(m_frames_after_first > 0, "state cleared between frames");
    chk(m_reconfig > 0, "parameters rewritten at run time");
    chk(model.n_exp_low > 0, "exp clamp below -4 exercised");
    chk(model.n_exp_high > 0, "exp saturation at 1 exercised");
    chk(model.n_silu_low > 0, "SiLU clamp below -7 exercised");
    chk(model.n_silu_high > 0, "SiLU identity above 7 exercised");
    chk(n_recv == 1 + NFRAMES_A + NFRAMES_B, "all results received");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
