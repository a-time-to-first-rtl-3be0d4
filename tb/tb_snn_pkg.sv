// tb_snn_pkg: checks the fractional LUT and the threshold LUT of snn_pkg against
// 2^(-(t-1)/4) computed with real arithmetic.
module tb_snn_pkg;
  import snn_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  initial begin
    for (int f = 0; f < 4; f++) begin
      checks++;
      if (int'(frac_lut(2'(f))) != int'(pow2_q16(f))) begin
        failures++;
        $display("frac_lut(%0d)=%0d expected %0d", f, frac_lut(2'(f)), pow2_q16(f));
      end
    end
    for (int t = 1; t <= int'(T_STEPS); t++) begin
      checks++;
      if (int'(threshold(TS_W'(t))) != int'(ref_threshold(t))) begin
        failures++;
        $display("threshold(%0d)=%0d expected %0d", t, threshold(TS_W'(t)), ref_threshold(t));
      end
      // thresholds decrease monotonically
      if (t > 1) begin
        checks++;
        if (threshold(TS_W'(t)) >= threshold(TS_W'(t - 1))) failures++;
      end
    end
    checks++;
    if (N_PE != 128 || T_STEPS != 24 || TAU != 4 || W_BITS != 5) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
