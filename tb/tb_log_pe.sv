// tb_log_pe: drives random (timestep, weight) pairs into one log PE and compares
// the accumulated Vmem, cycle by cycle, with a real-arithmetic reference. Also
// checks the zero-weight code, clr, idle cycles, and the 1-cycle latency.
module tb_log_pe;
  import snn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic [TS_W-1:0] ts = 1;
  logic [4:0] w = 0;
  vmem_t vmem;
  int checks = 0, failures = 0;
  longint acc;

  log_pe dut (.clk, .rst_n, .clr, .en, .ts, .wcode(wcode_t'(w)), .vmem);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input longint exp, input string what);
    checks++;
    if (longint'(vmem) != exp) begin
      failures++;
      if (failures < 10) $display("%s: vmem=%0d expected %0d", what, vmem, exp);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(0, "reset");
    for (int run = 0; run < 20; run++) begin
      clr = 1; @(negedge clk); clr = 0;
      acc = 0;
      check(0, "clr");
      for (int k = 0; k < 100; k++) begin
        en = ($urandom_range(4) != 0);
        ts = TS_W'($urandom_range(T_STEPS, 1));
        w  = 5'($urandom);
        if (k % 17 == 0) w[3:0] = 4'hf;
        if (en) acc += ref_term(ts, w);
        @(negedge clk);   // result visible one cycle after en
        check(acc, "accumulate");
      end
      en = 0;
    end
    // single spike: t = 1, w = +1.0 -> 1.0 (65536)
    clr = 1; @(negedge clk); clr = 0;
    en = 1; ts = 1; w = 5'b0_0000; @(negedge clk); en = 0;
    check(65536, "unit");
    // negative weight 2^-1 at t = 5 -> -(2^-1 * 2^-1) = -16384
    en = 1; ts = 5; w = 5'b1_0010; @(negedge clk); en = 0;
    check(65536 - 16384, "neg");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
