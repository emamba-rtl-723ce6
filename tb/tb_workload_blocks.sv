// tb_workload_blocks -- runs a Mamba block at the sizes of the paper's other
// vision workloads.
//
// The accelerator top is built for MARS only (see README), but mamba_block is
// parameterised in D, ED, N, R and SEQ. This testbench instantiates the block
// at the Fashion-MNIST size of the paper's Table 2 (D = 24, ED = 48, N = 16,
// dt rank 2) with 196 tokens per frame (28x28 image, 2x2 patches), and at the
// CIFAR-10 size (D = 64, ED = 128, N = 32, dt rank 4) with 64 tokens per frame
// (32x32 image, 4x4 patches), and checks two frames of each against the
// model (wl_block_check). Only one block of each model is run; the front end,
// the other blocks and the classifier head of those workloads are not built.
// The two runs go one after the other on the same clock.
module tb_workload_blocks;
  logic clk = 1'b0, rst_n = 1'b0;
  logic go_f = 1'b0, go_c = 1'b0;
  logic done_f, done_c;
  int checks_f, failures_f, checks_c, failures_c;

  always #5 clk = ~clk;

  wl_block_check #(.D(24), .ED(48), .N(16), .R(2), .SEQ(196), .NFRAMES(2)) u_fmnist (
    .clk, .rst_n, .start(go_f), .done(done_f), .checks(checks_f), .failures(failures_f));
  wl_block_check #(.D(64), .ED(128), .N(32), .R(4), .SEQ(64), .NFRAMES(2)) u_cifar (
    .clk, .rst_n, .start(go_c), .done(done_c), .checks(checks_c), .failures(failures_c));

  initial begin
    repeat (600000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks_f + checks_c,
             failures_f + failures_c + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    go_f  <= 1'b1;
    wait (done_f);
    go_c  <= 1'b1;
    wait (done_c);
    $display("TB_RESULT checks=%0d failures=%0d", checks_f + checks_c,
             failures_f + failures_c);
    $finish;
  end
endmodule
