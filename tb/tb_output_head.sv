// tb_output_head -- checks mean pooling and the 57-output projection.
//
// Random projection weights, then five frames of 16 random tokens with random
// gaps while the result consumer stalls at random. Each 57-value result is
// compared with the reference: element-wise mean of the frame's tokens
// (floor shift by 4, saturated) followed by the linear projection. With the
// consumer ready, res_valid must rise 58 cycles after the last token of a
// frame is taken (57 outputs at one per cycle plus the hand-over), the
// projection cost the paper gives.
module tb_output_head;
  import emamba_pkg::*;
  import emamba_ref_pkg::*;
  import emamba_model_pkg::*;

  localparam int D = 20, SEQ = 16, NOUT = 57, NF = 5;
  logic clk = 0, rst_n = 0, iv = 0, ir, rv, rr = 0;
  logic signed [7:0] id [D], rd [NOUT];
  logic cfg_we = 0; logic [CFG_AW-1:0] cfg_addr = 0; logic signed [7:0] cfg_wdata = 0;
  output_head dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_data(id),
    .res_valid(rv), .res_ready(rr), .res_data(rd), .cfg_we, .cfg_addr, .cfg_wdata);
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
  longint tlast [$];
  int nrecv = 0, n_stall = 0, ntok = 0;
  bit rand_ready = 0;
  logic rv_d = 0;
  always @(posedge clk) if (rst_n) begin
    rr   <= rand_ready ? ($urandom_range(3, 0) == 0) : 1'b1;
    rv_d <= rv && !rr;
    if (rv && !rr) n_stall++;
    if (iv && ir) begin
      ntok++;
      if (ntok % SEQ == 0) tlast.push_back(cyc);
    end
    if (rv && !rv_d) begin
      longint t;
      t = tlast.pop_front();
      if (!rand_ready)
        chk(cyc - t - 1 == NOUT + 1, $sformatf("result latency %0d, expected %0d",
            cyc - t - 1, NOUT + 1));
    end
    if (rv && rr) begin
      int e[];
      e = expq.pop_front();
      for (int j = 0; j < NOUT; j++)
        chk(int'(rd[j]) == e[j], $sformatf("frame %0d out %0d got %0d exp %0d", nrecv, j, rd[j], e[j]));
      nrecv++;
    end
  end

  initial begin
    int x[], mean[], y[];
    model = new();
    for (int i = 0; i < NOUT*(D+1); i++) model.img[i] = $signed($urandom_range(255, 0)) - 128;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < NOUT*(D+1); i++) begin
      cfg_we <= 1; cfg_addr <= CFG_AW'(i); cfg_wdata <= 8'(model.img[i]); @(posedge clk);
    end
    cfg_we <= 0;
    for (int k = 0; k < NF; k++) begin
      mean = new[D];
      foreach (mean[i]) mean[i] = 0;
      rand_ready = (k >= 2);
      for (int t = 0; t < SEQ; t++) begin
        x = new[D];
        foreach (x[i]) x[i] = $signed($urandom_range(255, 0)) - 128;
        foreach (mean[i]) mean[i] += x[i];
        @(negedge clk);
        repeat ($urandom_range(2, 0)) @(negedge clk);
        foreach (x[i]) id[i] = 8'(x[i]);
        iv = 1;
        while (!ir) @(negedge clk);
        @(negedge clk);
        iv = 0;
      end
      foreach (mean[i]) mean[i] = s8(fdiv2(mean[i], 4));
      model.linear(0, D, NOUT, 6, 1'b0, mean, y);
      expq.push_back(y);
      // the first frames wait for their result so the latency is measured idle
      if (k < 2) while (nrecv <= k) @(negedge clk);
    end
    while (nrecv < NF) @(negedge clk);
    chk(n_stall > 0, "result stall exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
