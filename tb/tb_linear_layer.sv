// tb_linear_layer -- checks the INT8 linear layer against emamba_model.
//
// Two instances share the parameter bus: the default 20->40 layer and a
// 5->3 layer with ReLU at another base address. Random weights, biases and
// tokens are written/driven, the consumer stalls at random, and each output
// token is compared with the model. The latency from taking a token to
// out_valid must be OUT cycles (one output neuron per cycle).
module tb_linear_layer;
  import emamba_pkg::*;
  import emamba_ref_pkg::*;
  import emamba_model_pkg::*;

  localparam int IN = 20, OUT = 40, B2 = 2000;
  logic clk = 0, rst_n = 0;
  logic iv = 0, ir, ov, ordy = 0;
  logic signed [7:0] id [IN], od [OUT];
  logic iv2 = 0, ir2, ov2, ordy2 = 1;
  logic signed [7:0] id2 [5], od2 [3];
  logic cfg_we = 0; logic [CFG_AW-1:0] cfg_addr = 0; logic signed [7:0] cfg_wdata = 0;

  linear_layer #(.IN(IN), .OUT(OUT)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir),
    .in_data(id), .out_valid(ov), .out_ready(ordy), .out_data(od), .cfg_we, .cfg_addr, .cfg_wdata);
  linear_layer #(.IN(5), .OUT(3), .SHIFT(4), .RELU(1'b1), .BASE(B2)) dut2 (.clk, .rst_n,
    .in_valid(iv2), .in_ready(ir2), .in_data(id2), .out_valid(ov2), .out_ready(ordy2),
    .out_data(od2), .cfg_we, .cfg_addr, .cfg_wdata);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  emamba_model model;
  int expq [$][];
  longint tq [$];
  int nrecv = 0, nrelu0 = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    ordy <= ($urandom_range(2, 0) != 0);
    if (iv && ir) tq.push_back(cyc);
    if (ov && ordy) begin
      int e[];
      e = expq.pop_front();
      for (int j = 0; j < OUT; j++)
        chk(int'(od[j]) == e[j], $sformatf("tok %0d out %0d got %0d exp %0d", nrecv, j, od[j], e[j]));
      nrecv++;
    end
  end
  // latency: out_valid rises OUT cycles after the token is taken (the monitor
  // sees it one edge later)
  logic ov_d = 0;
  always @(posedge clk) begin
    ov_d <= ov;
    if (rst_n && ov && !ov_d) begin
      longint t;
      t = tq.pop_front();
      chk(cyc - t - 1 == OUT, $sformatf("latency %0d, expected %0d (at %0d, q %0d)", cyc - t - 1, OUT, cyc, tq.size()));
    end
  end

  initial begin
    int x[], y[];
    model = new();
    for (int i = 0; i < OUT*(IN+1); i++) model.img[i] = $signed($urandom_range(255, 0)) - 128;
    for (int i = 0; i < 3*6; i++) model.img[B2 + i] = $signed($urandom_range(60, 0)) - 30;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < OUT*(IN+1); i++) begin
      cfg_we <= 1; cfg_addr <= CFG_AW'(i); cfg_wdata <= 8'(model.img[i]); @(posedge clk);
    end
    for (int i = 0; i < 18; i++) begin
      cfg_we <= 1; cfg_addr <= CFG_AW'(B2 + i); cfg_wdata <= 8'(model.img[B2 + i]); @(posedge clk);
    end
    cfg_we <= 0;
    for (int t = 0; t < 30; t++) begin
      x = new[IN];
      foreach (x[i]) x[i] = $signed($urandom_range(255, 0)) - 128;
      model.linear(0, IN, OUT, 6, 1'b0, x, y);
      expq.push_back(y);
      @(negedge clk);
      foreach (x[i]) id[i] = 8'(x[i]);
      iv = 1;
      while (!ir) @(negedge clk);
      @(negedge clk);
      iv = 0;
    end
    wait (nrecv == 30);
    // ReLU instance
    for (int t = 0; t < 20; t++) begin
      x = new[5];
      foreach (x[i]) x[i] = $signed($urandom_range(255, 0)) - 128;
      model.linear(B2, 5, 3, 4, 1'b1, x, y);
      @(negedge clk);
      foreach (x[i]) id2[i] = 8'(x[i]);
      iv2 = 1;
      while (!ir2) @(negedge clk);
      @(negedge clk);
      iv2 = 0;
      while (!ov2) @(negedge clk);
      for (int j = 0; j < 3; j++) begin
        chk(int'(od2[j]) == y[j], $sformatf("relu out %0d got %0d exp %0d", j, od2[j], y[j]));
        if (y[j] == 0) nrelu0++;
      end
    end
    chk(nrelu0 > 0, "ReLU clipped at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
