// tb_range_norm -- checks range normalisation and its timing against the
// compute-unit count.
//
// Three instances with D = 20 share the parameter bus: NU = 20 (the paper's
// build, 25 cycles per token), NU = 10 (48 cycles) and NU = 1 (462 cycles),
// three points of the paper's latency-vs-units curve 2 + 23*ceil(D/NU).
// Random tokens (some constant, so the range is zero) are sent with random
// output stalls; outputs are compared with emamba_model.rnorm and the cycles
// from taking a token to out_valid are checked against the formula.
module tb_range_norm;
  import emamba_pkg::*;
  import emamba_ref_pkg::*;
  import emamba_model_pkg::*;

  localparam int D = 20;
  localparam int NI = 3;
  localparam int NUS [NI] = '{20, 10, 1};

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0; logic [CFG_AW-1:0] cfg_addr = 0; logic signed [7:0] cfg_wdata = 0;
  logic iv [NI], ir [NI], ov [NI], ordy [NI];
  logic signed [7:0] id [NI][D], od [NI][D];
  always #5 clk = ~clk;

  for (genvar g = 0; g < NI; g++) begin : g_dut
    range_norm #(.D(D), .NU(NUS[g])) dut (.clk, .rst_n, .in_valid(iv[g]), .in_ready(ir[g]),
      .in_data(id[g]), .out_valid(ov[g]), .out_ready(ordy[g]), .out_data(od[g]),
      .cfg_we, .cfg_addr, .cfg_wdata);
  end

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
  int nrecv [NI];
  int expq [NI][$][];
  longint tq [NI][$];
  logic ov_d [NI];
  int n_const = 0, n_stall = 0;
  int tokens [$][];
  bit go = 0;

  // one producer per instance, driving on the falling edge
  for (genvar g = 0; g < NI; g++) begin : g_prod
    initial begin
      iv[g] = 0;
      nrecv[g] = 0;
      while (!go) @(negedge clk);
      for (int t = 0; t < tokens.size(); t++) begin
        @(negedge clk);
        foreach (id[g][i]) id[g][i] = 8'(tokens[t][i]);
        iv[g] = 1;
        while (!ir[g]) @(negedge clk);
        @(negedge clk);
        iv[g] = 0;
      end
    end
  end

  for (genvar g = 0; g < NI; g++) begin : g_mon
    always @(posedge clk) begin
      ordy[g] <= ($urandom_range(3, 0) != 0);
      ov_d[g] <= rst_n && ov[g];
      if (rst_n && iv[g] && ir[g]) tq[g].push_back(cyc);
      if (rst_n && ov[g] && !ov_d[g]) begin
        longint t;
        int lat;
        t   = tq[g].pop_front();
        lat = int'(cyc - t - 1);
        chk(lat == 2 + 23*((D + NUS[g] - 1) / NUS[g]),
            $sformatf("NU=%0d latency %0d", NUS[g], lat));
      end
      if (rst_n && ov[g] && !ordy[g]) n_stall++;
      if (rst_n && ov[g] && ordy[g]) begin
        int e[];
        e = expq[g].pop_front();
        for (int i = 0; i < D; i++)
          chk(int'(od[g][i]) == e[i], $sformatf("NU=%0d tok %0d el %0d got %0d exp %0d",
              NUS[g], nrecv[g], i, od[g][i], e[i]));
        nrecv[g]++;
      end
    end
  end

  initial begin
    int x[], y[];
    model = new();
    for (int i = 0; i < 2*D; i++) model.img[i] = $signed($urandom_range(255, 0)) - 128;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < 2*D; i++) begin
      cfg_we <= 1; cfg_addr <= CFG_AW'(i); cfg_wdata <= 8'(model.img[i]); @(posedge clk);
    end
    cfg_we <= 0;
    for (int t = 0; t < 40; t++) begin
      x = new[D];
      if (t % 8 == 5) begin
        int c;
        c = $signed($urandom_range(255, 0)) - 128;
        foreach (x[i]) x[i] = c;
        n_const++;
      end else begin
        int a;
        a = $urandom_range(128, 1);
        foreach (x[i]) x[i] = $signed($urandom_range(2*a - 1, 0)) - a;
      end
      model.rnorm(0, D, x, y);
      tokens.push_back(x);
      for (int g = 0; g < NI; g++) expq[g].push_back(y);
    end
    go = 1;
    while (!(nrecv[0] == 40 && nrecv[1] == 40 && nrecv[2] == 40)) @(negedge clk);
    chk(n_const > 0, "zero range exercised");
    chk(n_stall > 0, "output stall exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
