// tb_conv1d -- checks the causal depthwise convolution.
//
// Random kernels and biases, then three frames of SEQ = 16 random tokens with
// random input gaps and output stalls; each output token is compared with
// emamba_model.conv, which keeps its own history and clears it at the frame
// boundary. The result must be registered on the same edge that takes the
// token (one token per cycle).
module tb_conv1d;
  import emamba_pkg::*;
  import emamba_ref_pkg::*;
  import emamba_model_pkg::*;

  localparam int CH = 40, K = 4, SEQ = 16, NT = 3*SEQ;
  logic clk = 0, rst_n = 0, iv = 0, ir, ov, ordy = 0;
  logic signed [7:0] id [CH], od [CH];
  logic cfg_we = 0; logic [CFG_AW-1:0] cfg_addr = 0; logic signed [7:0] cfg_wdata = 0;
  conv1d #(.CH(CH), .K(K), .SEQ(SEQ)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir),
    .in_data(id), .out_valid(ov), .out_ready(ordy), .out_data(od), .cfg_we, .cfg_addr, .cfg_wdata);
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
  always @(posedge clk) begin
    ordy <= ($urandom_range(2, 0) != 0);
    ov_d <= rst_n && ov && !ordy ? 1'b1 : 1'b0;
    if (rst_n && iv && ir) tq.push_back(cyc);
    if (rst_n && ov && !ordy) n_stall++;
    if (rst_n && ov && !ov_d) begin
      longint t;
      t = tq.pop_front();
      chk(cyc - t - 1 == 0, $sformatf("latency %0d, expected 0", cyc - t - 1));
    end
    if (rst_n && ov && ordy) begin
      int e[];
      e = expq.pop_front();
      for (int c = 0; c < CH; c++)
        chk(int'(od[c]) == e[c], $sformatf("tok %0d ch %0d got %0d exp %0d", nrecv, c, od[c], e[c]));
      nrecv++;
    end
  end

  initial begin
    int x[], y[];
    model = new();
    for (int i = 0; i < CH*(K+1); i++) model.img[i] = $signed($urandom_range(255, 0)) - 128;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < CH*(K+1); i++) begin
      cfg_we <= 1; cfg_addr <= CFG_AW'(i); cfg_wdata <= 8'(model.img[i]); @(posedge clk);
    end
    cfg_we <= 0;
    for (int t = 0; t < NT; t++) begin
      x = new[CH];
      foreach (x[i]) x[i] = $signed($urandom_range(255, 0)) - 128;
      model.conv(0, 0, x, y);
      expq.push_back(y);
      @(negedge clk);
      repeat ($urandom_range(2, 0)) @(negedge clk);
      foreach (x[i]) id[i] = 8'(x[i]);
      iv = 1;
      while (!ir) @(negedge clk);
      @(negedge clk);
      iv = 0;
    end
    while (nrecv < NT) @(negedge clk);
    chk(n_stall > 0, "output stall exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
