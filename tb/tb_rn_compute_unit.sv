// tb_rn_compute_unit -- checks one range-norm element engine.
//
// Random numerators, ranges (including zero), gamma and beta are applied and
// y is compared with the integer reference rn_elem. Every isolated element
// must take exactly 23 cycles from the load edge to done (the per-element
// cost the paper gives for division, multiplication, addition and shift), and
// a run of elements started on the `finishing` cycle of the previous one must
// take 23 cycles per element.
module tb_rn_compute_unit;
  import emamba_pkg::*;
  import emamba_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, finishing, done;
  logic signed [8:0] num = 0;
  logic        [8:0] den = 0;
  logic signed [7:0] gamma = 0, beta = 0, y_next, y;
  rn_compute_unit dut (.*);
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

  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int exp_q [$];
  int n_den0 = 0;
  always @(posedge clk) if (rst_n && done) begin
    int e;
    e = exp_q.pop_front();
    chk(int'(y) == e, $sformatf("y=%0d expected %0d", y, e));
  end

  task automatic pick();
    int r;
    den   = 9'($urandom_range(255, 0));
    if ($urandom_range(15, 0) == 0) den = 0;
    r     = int'(den);
    num   = 9'($signed($urandom_range(2*r, 0)) - r);
    gamma = 8'($urandom_range(255, 0));
    beta  = 8'($urandom_range(255, 0));
    if (den == 0) n_den0++;
    exp_q.push_back(rn_elem(int'(num), int'(den), int'(gamma), int'(beta), 12, 13));
  endtask

  initial begin
    int n;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // isolated elements: done seen at the 23rd falling edge after the load
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      pick();
      start = 1;
      @(negedge clk);
      start = 0;
      n = 1;
      while (!done) begin @(negedge clk); n++; end
      // done was registered on the edge just before this falling edge
      chk(n - 1 == 23, $sformatf("element latency %0d, expected 23", n - 1));
    end
    // back-to-back elements: the next load happens on the finishing edge
    begin
      longint t0;
      @(negedge clk);
      t0 = cyc;
      for (int t = 0; t < 100; t++) begin
        pick();
        start = 1;
        @(negedge clk);
        start = 0;
        while (!finishing) @(negedge clk);
      end
      @(negedge clk);
      // 100 elements of 23 cycles, counted from the falling edge before the
      // first load to the falling edge after the last done
      chk(cyc - t0 == 100*23 + 1, $sformatf("100 elements took %0d cycles, expected %0d",
          cyc - t0 - 1, 100*23));
    end
    repeat (3) @(negedge clk);
    chk(exp_q.size() == 0, "every element produced a result");
    chk(n_den0 > 0, "zero range exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
