// tb_ssm_block -- checks the selective SSM layer (projections, Delta, core).
//
// Random parameters for the dt, B, C and Delta projections and for A and D
// (A mostly negative), then 40 tokens (two and a half frames) with random
// gaps and output stalls. Each output token is compared with
// emamba_model.ssm. The latency from taking a token to out_valid must be the
// same for every token and equal to max(R, N) + ED + 4 cycles: projections
// in parallel at one neuron per cycle, one cycle to hand them to Delta, ED
// Delta cycles, one to start the core, the core cycle and the output
// register.
module tb_ssm_block;
  import emamba_pkg::*;
  import emamba_ref_pkg::*;
  import emamba_model_pkg::*;

  localparam int ED = 40, N = 8, R = 2, SEQ = 16, NT = 40;
  localparam int LAT = ((R > N) ? R : N) + ED + 4;
  logic clk = 0, rst_n = 0, iv = 0, ir, ov, ordy = 0;
  logic signed [7:0] id [ED], od [ED];
  logic cfg_we = 0; logic [CFG_AW-1:0] cfg_addr = 0; logic signed [7:0] cfg_wdata = 0;
  ssm_block #(.ED(ED), .N(N), .R(R), .SEQ(SEQ)) dut (.clk, .rst_n, .in_valid(iv),
    .in_ready(ir), .in_data(id), .out_valid(ov), .out_ready(ordy), .out_data(od),
    .cfg_we, .cfg_addr, .cfg_wdata);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
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

  emamba_model model;
  int expq [$][];
  longint tq [$];
  int nrecv = 0, n_stall = 0;
  logic ov_d = 0;
  always @(posedge clk) if (rst_n) begin
    ordy <= ($urandom_range(2, 0) != 0);
    ov_d <= ov && !ordy;
    if (iv && ir) tq.push_back(cyc);
    if (ov && !ordy) n_stall++;
    if (ov && !ov_d) begin
      longint t;
      t = tq.pop_front();
      chk(cyc - t - 1 == LAT, $sformatf("latency %0d, expected %0d", cyc - t - 1, LAT));
    end
    if (ov && ordy) begin
      int e[];
      e = expq.pop_front();
      for (int c = 0; c < ED; c++)
        chk(int'(od[c]) == e[c], $sformatf("tok %0d ch %0d got %0d exp %0d", nrecv, c, od[c], e[c]));
      nrecv++;
    end
  end

  initial begin
    int x[], y[];
    int a0;
    model = new();
    a0 = model.lsz(ED, R) + 2*model.lsz(ED, N) + model.lsz(R, ED);
    for (int i = 0; i < model.ssm_sz(); i++)
      model.img[i] = $signed($urandom_range(80, 0)) - 40;
    for (int i = 0; i < ED*N; i++) model.img[a0 + i] = -$signed($urandom_range(100, 1));
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < model.ssm_sz(); i++) begin
      cfg_we <= 1; cfg_addr <= CFG_AW'(i); cfg_wdata <= 8'(model.img[i]); @(posedge clk);
    end
    cfg_we <= 0;
    for (int t = 0; t < NT; t++) begin
      x = new[ED];
      foreach (x[i]) x[i] = $signed($urandom_range(255, 0)) - 128;
      model.ssm(0, 0, x, y);
      expq.push_back(y);
      @(negedge clk);
      repeat ($urandom_range(3, 0)) @(negedge clk);
      foreach (x[i]) id[i] = 8'(x[i]);
      iv = 1;
      while (!ir) @(negedge clk);
      @(negedge clk);
      iv = 0;
    end
    while (nrecv < NT) @(negedge clk);
    chk(n_stall > 0, "output stall exercised");
    chk(model.n_exp_low > 0, "exp clamp below -4 exercised");
    $display("exp<-4=%0d exp>=1=%0d h_sat=%0d", model.n_exp_low, model.n_exp_high, model.n_h_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
