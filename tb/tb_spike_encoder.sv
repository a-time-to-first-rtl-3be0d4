// tb_spike_encoder: random Vmems (negative, zero, above theta0, between thresholds,
// below the last threshold) into the encoder. The reference fires each neuron at the
// first t with Vmem >= 2^(-(t-1)/4) (real arithmetic), orders spikes by (t, ID), and
// predicts the cycle count: one cycle per spike plus one per timestep advance plus
// the final cycle. Checks the spike sequence, done, and the cycle count.
module tb_spike_encoder;
  import snn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  vmem_t vmem_in [N_PE];
  logic spk_valid, busy, done;
  logic [6:0] spk_id;
  logic [4:0] spk_ts;
  int checks = 0, failures = 0;

  spike_encoder dut (.clk, .rst_n, .start, .vmem_in, .spk_valid, .spk_id, .spk_ts, .busy, .done);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int mode);
    int fire_t [N_PE];
    int exp_id [$], exp_ts [$];
    int nspk, t_end, exp_cycles, cycles, k;
    for (int i = 0; i < N_PE; i++) begin
      case (mode)
        0: vmem_in[i] = vmem_t'(0);
        1: vmem_in[i] = vmem_t'(70000);                    // all fire at t = 1
        2: vmem_in[i] = (i == 5) ? vmem_t'(1000) : vmem_t'(0); // below last threshold
        default:
          case ($urandom_range(5))
            0: vmem_in[i] = vmem_t'(-$urandom_range(100000));
            1: vmem_in[i] = vmem_t'(ref_threshold($urandom_range(24, 1)));   // exactly on
            2: vmem_in[i] = vmem_t'(ref_threshold($urandom_range(24, 1)) - 1); // just under
            3: vmem_in[i] = vmem_t'($urandom_range(90000));
            default: vmem_in[i] = vmem_t'($urandom_range(1500));
          endcase
      endcase
    end
    // reference
    nspk = 0;
    for (int i = 0; i < N_PE; i++) begin
      fire_t[i] = 0;
      for (int t = int'(T_STEPS); t >= 1; t--)
        if (int'(vmem_in[i]) >= int'(ref_threshold(t))) fire_t[i] = t;
    end
    t_end = 1;
    for (int t = 1; t <= int'(T_STEPS); t++)
      for (int i = 0; i < N_PE; i++)
        if (fire_t[i] == t) begin
          exp_id.push_back(i);
          exp_ts.push_back(t);
          nspk++;
          t_end = t;
        end
    begin
      bit left;
      left = 0;
      for (int i = 0; i < N_PE; i++) if (vmem_in[i] > 0 && fire_t[i] == 0) left = 1;
      if (left) t_end = int'(T_STEPS);
    end
    exp_cycles = nspk + (t_end - 1) + 1;
    start = 1; @(negedge clk); start = 0;
    cycles = 0; k = 0;
    while (!done && cycles < 1000) begin
      @(negedge clk);
      cycles++;
      if (spk_valid) begin
        checks++;
        if (k >= nspk || int'(spk_id) != exp_id[k] || int'(spk_ts) != exp_ts[k]) begin
          failures++;
          if (failures < 8) $display("spike %0d: id %0d t %0d, expected id %0d t %0d", k, spk_id, spk_ts,
                                     k < nspk ? exp_id[k] : -1, k < nspk ? exp_ts[k] : -1);
        end
        k++;
      end
    end
    checks++;
    if (k != nspk) begin failures++; $display("mode %0d: %0d spikes, expected %0d", mode, k, nspk); end
    checks++;
    if (cycles != exp_cycles) begin
      failures++;
      $display("mode %0d: %0d cycles, expected %0d", mode, cycles, exp_cycles);
    end
    @(negedge clk);
  endtask

  initial begin
    foreach (vmem_in[i]) vmem_in[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    run(0); run(1); run(2);
    for (int r = 0; r < 20; r++) run(3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
