// tb_pwl_units -- exhaustive check of the SiLU and exp approximations.
//
// Drives all 256 INT8 codes into silu_pwl (Q4 in, Q4 out) and exp_pwl (Q4 in,
// Q7 out) and compares each output with the chord model rebuilt from the real
// functions in emamba_ref_pkg; also checks that the Q12 tables of emamba_pkg
// are the chords of SiLU and exp, that the clamping regions behave as
// specified (0 below -7 / -4, identity above 7, saturation at 1.0 for exp)
// and that the approximation stays within 0.1 of the true SiLU.
module tb_pwl_units;
  import emamba_pkg::*;
  import emamba_ref_pkg::*;

  int checks = 0, failures = 0;
  logic signed [7:0] x, ys, ye;

  silu_pwl #(.IN_FRAC(4), .OUT_FRAC(4)) u_silu (.x(x), .y(ys));
  exp_pwl  #(.IN_FRAC(4), .OUT_FRAC(7)) u_exp  (.x(x), .y(ye));

  function automatic real rabs(input real r); return r < 0.0 ? -r : r; endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #1000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < SILU_SEGS; k++) begin
      chk(SILU_SLOPE[k] == chord_slope(1'b0, k), $sformatf("silu slope %0d", k));
      chk(SILU_ICPT[k]  == chord_icpt(1'b0, k),  $sformatf("silu icpt %0d", k));
    end
    for (int k = 0; k < EXP_SEGS; k++) begin
      chk(EXP_SLOPE[k] == chord_slope(1'b1, k), $sformatf("exp slope %0d", k));
      chk(EXP_ICPT[k]  == chord_icpt(1'b1, k),  $sformatf("exp icpt %0d", k));
    end
    for (int v = -128; v < 128; v++) begin
      x = 8'(v);
      #1;
      chk(int'(ys) == silu_ref(v), $sformatf("silu(%0d)=%0d exp %0d", v, ys, silu_ref(v)));
      chk(int'(ye) == exp_ref(v),  $sformatf("exp(%0d)=%0d exp %0d", v, ye, exp_ref(v)));
      // accuracy against the true functions
      chk(rabs(real'(ys)/16.0 - silu_r(real'(v)/16.0)) < 0.1 || v < -112,
          $sformatf("silu accuracy at %0d", v));
      if (v >= -64 && v < 0)
        chk(rabs(real'(ye)/128.0 - $exp(real'(v)/16.0)) < 0.04,
            $sformatf("exp accuracy at %0d: %0d", v, ye));
      // clamping regions
      if (v < -112) chk(ys == 0, "silu below -7 is 0");
      if (v >= 112) chk(ys == x, "silu above 7 is identity");
      if (v >= 16)  chk(ye == 127, "exp at or above 1 saturates");
      if (v < -64)  chk(ye == 0, "exp below -4 is 0");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
