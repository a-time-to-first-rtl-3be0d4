// tb_ppu: writes random biases, loads random Vmems and checks vmem_out = saturated
// Vmem + bias for active PEs and 0 for gated ones, the 1-cycle out_valid, and
// saturation at both ends of the 24-bit range.
module tb_ppu;
  import snn_pkg::*;
  logic clk = 0, rst_n = 0, load = 0, bias_we = 0, out_valid;
  logic [7:0] active_pes = 128;
  logic [6:0] bias_waddr = 0;
  logic [31:0] bias_wdata = 0;
  vmem_t vmem_in [N_PE];
  vmem_t vmem_out [N_PE];
  int bias [N_PE];
  int checks = 0, failures = 0;
  localparam int VMAX = (1 << (ACC_W - 1)) - 1;
  localparam int VMIN = -(1 << (ACC_W - 1));

  ppu dut (.clk, .rst_n, .load, .active_pes, .vmem_in, .bias_we, .bias_waddr, .bias_wdata,
           .vmem_out, .out_valid);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e;
    foreach (vmem_in[i]) vmem_in[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < N_PE; i++) begin
      bias[i] = $urandom_range(200000) - 100000;
      bias_we = 1; bias_waddr = 7'(i); bias_wdata = 32'(bias[i]);
      @(negedge clk);
    end
    bias_we = 0;
    for (int run = 0; run < 20; run++) begin
      active_pes = (run % 3 == 0) ? 8'($urandom_range(128)) : 8'd128;
      for (int i = 0; i < N_PE; i++) begin
        case ($urandom_range(9))
          0: vmem_in[i] = vmem_t'(VMAX - 10);
          1: vmem_in[i] = vmem_t'(VMIN + 10);
          default: vmem_in[i] = vmem_t'($urandom_range(2000000) - 1000000);
        endcase
      end
      load = 1; @(negedge clk); load = 0;
      checks++;
      if (!out_valid) failures++;
      for (int i = 0; i < N_PE; i++) begin
        e = int'(vmem_in[i]) + bias[i];
        if (e > VMAX) e = VMAX;
        if (e < VMIN) e = VMIN;
        if (i >= int'(active_pes)) e = 0;
        checks++;
        if (int'(vmem_out[i]) != e) begin
          failures++;
          if (failures < 8) $display("PE %0d: %0d expected %0d", i, vmem_out[i], e);
        end
      end
      @(negedge clk);
      checks++;
      if (out_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
