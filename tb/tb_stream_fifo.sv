// tb_stream_fifo -- checks the token FIFO used for the residual and gate
// branches.
//
// A producer with random gaps and a consumer with random stalls move 300
// random tokens through an 8-deep FIFO; tokens must come out unchanged and in
// order. The FIFO must fill (in_ready low with DEPTH tokens stored) and
// empty, and a token written into an empty FIFO must be visible on the next
// cycle.
module tb_stream_fifo;
  localparam int CH = 20, DEPTH = 8, NT = 300;
  logic clk = 0, rst_n = 0, iv = 0, ir, ov, ordy = 0;
  logic signed [7:0] id [CH], od [CH];
  stream_fifo #(.CH(CH), .DEPTH(DEPTH)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir),
    .in_data(id), .out_valid(ov), .out_ready(ordy), .out_data(od));
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

  int q [$][];
  int nrecv = 0, n_full = 0, n_empty = 0, occ = 0;
  bit slow = 0;
  logic was_empty_write = 0;
  always @(posedge clk) if (rst_n) begin
    // phases: consumer slower than producer, then faster
    ordy <= slow ? ($urandom_range(4, 0) == 0) : ($urandom_range(3, 0) != 0);
    if (!ir) begin
      n_full++;
      chk(occ == DEPTH, $sformatf("in_ready low with %0d tokens stored", occ));
    end
    if (occ == 0) begin
      n_empty++;
      chk(!ov, "out_valid low when empty");
    end
    if (was_empty_write) chk(ov, "token visible one cycle after write into empty FIFO");
    was_empty_write <= (occ == 0) && iv && ir;
    if (ov && ordy) begin
      int e[];
      e = q.pop_front();
      for (int i = 0; i < CH; i++)
        chk(int'(od[i]) == e[i], $sformatf("tok %0d el %0d got %0d exp %0d", nrecv, i, od[i], e[i]));
      nrecv++;
    end
    occ <= occ + int'(iv && ir) - int'(ov && ordy);
  end

  initial begin
    int v[];
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < NT; t++) begin
      slow = (t < NT/2);
      v = new[CH];
      foreach (v[i]) v[i] = $signed($urandom_range(255, 0)) - 128;
      q.push_back(v);
      @(negedge clk);
      repeat ($urandom_range(slow ? 0 : 3, 0)) @(negedge clk);
      foreach (v[i]) id[i] = 8'(v[i]);
      iv = 1;
      while (!ir) @(negedge clk);
      @(negedge clk);
      iv = 0;
    end
    while (nrecv < NT) @(negedge clk);
    chk(n_full > 0, "FIFO filled");
    chk(n_empty > 0, "FIFO emptied");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
