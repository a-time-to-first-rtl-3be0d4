// tb_prio_enc: random and corner request vectors into the 128-to-7 priority
// encoder; the expected index is the lowest set bit found by a scan.
module tb_prio_enc;
  localparam int N = 128;
  logic [N-1:0] req;
  logic [6:0] idx;
  logic valid;
  int checks = 0, failures = 0;

  prio_enc dut (.req, .idx, .valid);

  task automatic check();
    int exp;
    exp = -1;
    for (int i = 0; i < N; i++) if (req[i] && exp < 0) exp = i;
    #1;
    checks++;
    if ((exp < 0 && valid) || (exp >= 0 && (!valid || int'(idx) != exp))) begin
      failures++;
      $display("req=%h idx=%0d valid=%0b expected %0d", req, idx, valid, exp);
    end
  endtask

  initial begin
    req = '0; check();
    for (int i = 0; i < N; i++) begin req = '0; req[i] = 1'b1; check(); end
    for (int i = 0; i < N; i++) begin req = '1 << i; check(); end
    for (int k = 0; k < 2000; k++) begin
      for (int j = 0; j < N / 32; j++) req[j*32 +: 32] = $urandom;
      if (k % 2 == 0) req &= {N{1'b1}} << $urandom_range(N - 1);
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
