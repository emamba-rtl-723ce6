// tb_gate_mul -- checks the SiLU gate join.
//
// Two independent producers offer y and z tokens with random gaps and the
// consumer stalls at random. Each output must equal
// sat8((y * silu_ref(z)) >>> 4) for the pair taken together, tokens must stay
// in order, and the product must be registered on the edge that takes both
// inputs. Counts both SiLU clamp regions and cycles where only one side was
// present (the join must wait).
module tb_gate_mul;
  import emamba_pkg::*;
  import emamba_ref_pkg::*;

  localparam int CH = 40, NT = 200;
  logic clk = 0, rst_n = 0;
  logic av = 0, ar, bv = 0, br, ov, ordy = 0;
  logic signed [7:0] ad [CH], bd [CH], od [CH];
  gate_mul #(.CH(CH)) dut (.clk, .rst_n, .y_valid(av), .y_ready(ar), .y_data(ad),
    .z_valid(bv), .z_ready(br), .z_data(bd), .out_valid(ov), .out_ready(ordy),
    .out_data(od));
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

  int aq [$][], bq [$][];
  int expq [$][];
  longint tq [$];
  int na_taken = 0, nb_taken = 0;
  int nrecv = 0, n_wait = 0, n_stall = 0, n_lo = 0, n_hi = 0;
  logic ov_d = 0;

  // pair tokens in the order they are taken
  always @(posedge clk) if (rst_n) begin
    ordy <= ($urandom_range(2, 0) != 0);
    ov_d <= ov && !ordy;
    if (av != bv) n_wait++;
    if (ov && !ordy) n_stall++;
    chk((av && ar) == (bv && br), "both inputs taken together");
    if (av && ar) na_taken++;
    if (bv && br) nb_taken++;
    if (av && ar) begin
      int e[];
      int va[], vb[];
      va = aq.pop_front();
      vb = bq.pop_front();
      e = new[CH];
      foreach (e[i]) begin
        int av_i, bv_i;
        av_i = va[i]; bv_i = vb[i];
        e[i] = ref_op(av_i, bv_i);
        if (vb[i] < -112) n_lo++; if (vb[i] >= 112) n_hi++;
      end
      expq.push_back(e);
      tq.push_back(cyc);
    end
    if (ov && !ov_d) begin
      longint t;
      t = tq.pop_front();
      chk(cyc - t - 1 == 0, $sformatf("latency %0d, expected 0", cyc - t - 1));
    end
    if (ov && ordy) begin
      int e[];
      e = expq.pop_front();
      for (int i = 0; i < CH; i++)
        chk(int'(od[i]) == e[i], $sformatf("tok %0d el %0d got %0d exp %0d", nrecv, i, od[i], e[i]));
      nrecv++;
    end
  end

  function automatic int ref_op(input int a, input int b);
    int av [1], bv [1];
    int i;
    av[0] = a; bv[0] = b; i = 0;
    return s8(fdiv2(longint'(av[i]) * silu_ref(bv[i]), 4));
  endfunction

  function automatic int rnd8(); return $signed($urandom_range(255, 0)) - 128; endfunction

  initial begin
    int v[];
    int ka, kb;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    fork
      for (int t = 0; t < NT; t++) begin
        v = new[CH];
        foreach (v[i]) v[i] = rnd8();
        aq.push_back(v);
        @(negedge clk);
        repeat ($urandom_range(3, 0)) @(negedge clk);
        foreach (v[i]) ad[i] = 8'(v[i]);
        // ready depends on the other side, so acceptance is read from the
        // monitor's count of taken tokens
        ka = na_taken;
        av = 1;
        while (na_taken == ka) @(negedge clk);
        av = 0;
      end
      for (int t = 0; t < NT; t++) begin
        int w[];
        w = new[CH];
        foreach (w[i]) w[i] = rnd8();
        bq.push_back(w);
        @(negedge clk);
        repeat ($urandom_range(3, 0)) @(negedge clk);
        foreach (w[i]) bd[i] = 8'(w[i]);
        // ready depends on the other side, so acceptance is read from the
        // monitor's count of taken tokens
        kb = nb_taken;
        bv = 1;
        while (nb_taken == kb) @(negedge clk);
        bv = 0;
      end
    join
    while (nrecv < NT) @(negedge clk);
    chk(n_wait > 0, "join waited for one side");
    chk(n_stall > 0, "output stall exercised");
    chk(n_lo > 0 && n_hi > 0, "both clamp regions exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
