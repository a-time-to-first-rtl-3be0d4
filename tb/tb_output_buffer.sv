// tb_output_buffer: appends random spikes, reads them back in order, checks count,
// clr, and the 1-cycle read latency; fills all 128 entries once.
module tb_output_buffer;
  import snn_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, we = 0, re = 0;
  out_spike_t wdata = '0, rdata;
  logic [6:0] raddr = 0;
  logic [7:0] count;
  out_spike_t model [$];
  int checks = 0, failures = 0;

  output_buffer dut (.clk, .rst_n, .clr, .we, .wdata, .re, .raddr, .rdata, .count);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int run = 0; run < 10; run++) begin
      clr = 1; @(negedge clk); clr = 0;
      checks++;
      if (count != 0) failures++;
      model.delete();
      n = (run == 0) ? 128 : $urandom_range(127, 1);
      for (int i = 0; i < n; i++) begin
        we = ($urandom_range(3) != 0);
        wdata = out_spike_t'(12'($urandom));
        if (we) model.push_back(wdata);
        @(negedge clk);
        if (model.size() == 128) break;
      end
      we = 0;
      checks++;
      if (int'(count) != model.size()) begin
        failures++;
        $display("count %0d expected %0d", count, model.size());
      end
      foreach (model[i]) begin
        re = 1; raddr = 7'(i); @(negedge clk); re = 0;
        checks++;
        if (rdata != model[i]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
