// tb_ssm_core -- checks discretisation, state update and output of the SSM
// core over several frames.
//
// Random A and D, then 40 tokens (two and a half frames of SEQ = 16) with
// random x, Delta, B and C. A reference written here from the update
// equations (exp_ref for exp, 24-bit saturation, 7-bit state shift, state
// cleared at the frame boundary) gives every y. done must be registered on
// the edge after the one that samples start. Counts that the exp input reached both clamp regions and that
// h saturated at least once.
module tb_ssm_core;
  import emamba_pkg::*;
  import emamba_ref_pkg::*;

  localparam int ED = 40, N = 8, SEQ = 16, NT = 40;
  logic clk = 0, rst_n = 0, start = 0, done;
  logic signed [7:0] x [ED], delta [ED], b [N], c [N], y [ED];
  logic cfg_we = 0; logic [CFG_AW-1:0] cfg_addr = 0; logic signed [7:0] cfg_wdata = 0;
  ssm_core #(.ED(ED), .N(N), .SEQ(SEQ)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int a_w [ED][N], d_w [ED];
  longint h [ED][N];
  int n_low = 0, n_high = 0, n_sat = 0;

  initial begin
    int xs[ED], ds[ED], bs[N], cs[N], ye[ED];
    int da, abar, bbar, n;
    longint hn, ysum;
    foreach (a_w[e, k]) a_w[e][k] = $signed($urandom_range(255, 0)) - 128;
    foreach (d_w[e]) d_w[e] = $signed($urandom_range(255, 0)) - 128;
    // channel 0 keeps A = 0 (A-bar = 1) so its state can grow to saturation
    foreach (a_w[0][k]) a_w[0][k] = 0;
    foreach (h[e, k]) h[e][k] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int e = 0; e < ED; e++)
      for (int k = 0; k < N; k++) begin
        cfg_we <= 1; cfg_addr <= CFG_AW'(e*N + k); cfg_wdata <= 8'(a_w[e][k]); @(posedge clk);
      end
    for (int e = 0; e < ED; e++) begin
      cfg_we <= 1; cfg_addr <= CFG_AW'(ED*N + e); cfg_wdata <= 8'(d_w[e]); @(posedge clk);
    end
    cfg_we <= 0;
    for (int t = 0; t < NT; t++) begin
      foreach (xs[i]) xs[i] = $signed($urandom_range(255, 0)) - 128;
      foreach (ds[i]) ds[i] = $signed($urandom_range(255, 0)) - 128;
      foreach (bs[i]) bs[i] = $signed($urandom_range(255, 0)) - 128;
      foreach (cs[i]) cs[i] = $signed($urandom_range(255, 0)) - 128;
      if (t < 8) begin
        xs[0] = 127; ds[0] = 127;
        foreach (bs[i]) bs[i] = 127;
      end
      for (int e = 0; e < ED; e++) begin
        ysum = 0;
        for (int k = 0; k < N; k++) begin
          da = s8(fdiv2(longint'(ds[e]) * a_w[e][k], 4));
          if (da < -64) n_low++;
          if (da >= 16) n_high++;
          abar = exp_ref(da);
          bbar = s8(fdiv2(longint'(ds[e]) * bs[k], 4));
          hn   = longint'(abar) * h[e][k] + longint'(bbar) * xs[e] * 128;
          if (hn != s24(hn)) n_sat++;
          hn   = s24(hn);
          ysum += longint'(cs[k]) * hn;
          h[e][k] = fdiv2(hn, 7);
        end
        ye[e] = s8(fdiv2(ysum, 15) + fdiv2(longint'(d_w[e]) * xs[e], 4));
      end
      if (t % SEQ == SEQ-1) foreach (h[e, k]) h[e][k] = 0;
      @(negedge clk);
      repeat ($urandom_range(2, 0)) @(negedge clk);
      foreach (xs[i]) x[i] = 8'(xs[i]);
      foreach (ds[i]) delta[i] = 8'(ds[i]);
      foreach (bs[i]) b[i] = 8'(bs[i]);
      foreach (cs[i]) c[i] = 8'(cs[i]);
      start = 1;
      @(negedge clk);
      start = 0;
      n = 1;
      while (!done) begin @(negedge clk); n++; end
      chk(n - 1 == 1, $sformatf("core latency %0d, expected 1", n - 1));
      for (int e = 0; e < ED; e++)
        chk(int'(y[e]) == ye[e], $sformatf("tok %0d ch %0d got %0d exp %0d", t, e, y[e], ye[e]));
    end
    chk(n_low > 0, "exp input below -4 exercised");
    chk(n_high > 0, "exp input at or above 1 exercised");
    chk(n_sat > 0, "24-bit state saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
