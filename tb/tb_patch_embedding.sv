// tb_patch_embedding -- checks frame storage, patch order and projection.
//
// Random projection weights, then four random 8 x 8 x 5 frames offered back
// to back. Each of the 16 tokens per frame is compared with
// emamba_model.patch followed by the linear projection. With the consumer
// always ready (first two frames) tokens must leave every D + 2 = 22 cycles;
// the last two frames run with random consumer stalls. Checks that a new
// frame is taken while the tokens of the previous one are still leaving.
module tb_patch_embedding;
  import emamba_pkg::*;
  import emamba_ref_pkg::*;
  import emamba_model_pkg::*;

  localparam int H = 8, W = 8, C = 5, P = 2, D = 20, NF = 4;
  localparam int NP = (H/P)*(W/P), PIN = P*P*C;
  logic clk = 0, rst_n = 0, fv = 0, fr, ov, ordy = 0;
  logic signed [7:0] frame [H*W*C], od [D];
  logic cfg_we = 0; logic [CFG_AW-1:0] cfg_addr = 0; logic signed [7:0] cfg_wdata = 0;
  patch_embedding dut (.clk, .rst_n, .frame_valid(fv), .frame_ready(fr), .frame,
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
    repeat (100000) @(posedge clk);
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  emamba_model model;
  int expq [$][];
  int nrecv = 0, n_stall = 0, n_overlap = 0, n_taken = 0;
  bit rand_ready = 0;
  longint t_prev = 0;
  always @(posedge clk) if (rst_n) begin
    ordy <= rand_ready ? ($urandom_range(2, 0) != 0) : 1'b1;
    if (ov && !ordy) n_stall++;
    if (fv && fr) begin
      if (n_taken > 0 && nrecv < n_taken*NP) n_overlap++;
      n_taken++;
    end
    if (ov && ordy) begin
      int e[];
      e = expq.pop_front();
      for (int i = 0; i < D; i++)
        chk(int'(od[i]) == e[i], $sformatf("tok %0d el %0d got %0d exp %0d", nrecv, i, od[i], e[i]));
      if (!rand_ready && nrecv % NP != 0)
        chk(cyc - t_prev == D + 2, $sformatf("token interval %0d, expected %0d", cyc - t_prev, D + 2));
      t_prev = cyc;
      nrecv++;
    end
  end

  initial begin
    int f[], v[], y[];
    model = new();
    for (int i = 0; i < D*(PIN+1); i++) model.img[i] = $signed($urandom_range(255, 0)) - 128;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < D*(PIN+1); i++) begin
      cfg_we <= 1; cfg_addr <= CFG_AW'(i); cfg_wdata <= 8'(model.img[i]); @(posedge clk);
    end
    cfg_we <= 0;
    for (int k = 0; k < NF; k++) begin
      f = new[H*W*C];
      foreach (f[i]) f[i] = $signed($urandom_range(255, 0)) - 128;
      for (int p = 0; p < NP; p++) begin
        model.patch(f, p, v);
        model.linear(0, PIN, D, 6, 1'b0, v, y);
        expq.push_back(y);
      end
      @(negedge clk);
      rand_ready = (k >= 2);
      foreach (f[i]) frame[i] = 8'(f[i]);
      fv = 1;
      while (!fr) @(negedge clk);
      @(negedge clk);
      fv = 0;
    end
    while (nrecv < NF*NP) @(negedge clk);
    chk(n_stall > 0, "output stall exercised");
    chk(n_overlap > 0, "next frame taken while tokens were leaving");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
