// tb_pe_array: loads random weights into all four weight buffers, streams random
// spikes, and compares all 128 Vmems with a real-arithmetic reference. A second run
// with active_pes = 45 checks input gating: gated PEs must stay at zero. Also checks
// the two-cycle spike-to-Vmem latency.
module tb_pe_array;
  import snn_pkg::*;
  import tb_ref_pkg::*;
  localparam int NROW = 64;   // rows used by the test
  logic clk = 0, rst_n = 0, clr = 0, spk_valid = 0;
  logic [7:0] active_pes = 128;
  spike_t spk = '0;
  logic wb_we = 0;
  logic [1:0] wb_group = 0;
  logic [NID_W-1:0] wb_waddr = 0;
  logic [2:0] wb_wsel = 0;
  logic [31:0] wb_wdata = 0;
  vmem_t vmem [N_PE];
  logic [4:0] wt [N_PE][NROW];
  longint acc [N_PE];
  int checks = 0, failures = 0;

  pe_array dut (.clk, .rst_n, .clr, .active_pes, .spk_valid, .spk, .wb_we, .wb_group,
                .wb_waddr, .wb_wsel, .wb_wdata, .vmem);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(input string what);
    for (int p = 0; p < N_PE; p++) begin
      checks++;
      if (longint'(vmem[p]) != acc[p]) begin
        failures++;
        if (failures < 8) $display("%s: PE %0d vmem=%0d expected %0d", what, p, vmem[p], acc[p]);
      end
    end
  endtask

  task automatic run(input int npe, input int nspk);
    int row, t;
    clr = 1; active_pes = 8'(npe); @(negedge clk); clr = 0;
    foreach (acc[p]) acc[p] = 0;
    for (int k = 0; k < nspk; k++) begin
      spk_valid = ($urandom_range(5) != 0);
      row = $urandom_range(NROW - 1);
      t = $urandom_range(T_STEPS, 1);
      spk = '{ts: TS_W'(t), nid: NID_W'(row * 71 % WB_DEPTH)};
      if (spk_valid)
        for (int p = 0; p < npe; p++) acc[p] += ref_term(t, wt[p][row]);
      @(negedge clk);
    end
    spk_valid = 0;
    @(negedge clk);
    @(negedge clk);
    compare("run");
  endtask

  initial begin
    logic [159:0] r;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int g = 0; g < 4; g++)
      for (int row = 0; row < NROW; row++) begin
        for (int p = 0; p < 32; p++) begin
          wt[g*32+p][row] = 5'($urandom);
          r[p*5 +: 5] = wt[g*32+p][row];
        end
        for (int k = 0; k < 5; k++) begin
          wb_we = 1; wb_group = 2'(g); wb_waddr = NID_W'(row * 71 % WB_DEPTH);
          wb_wsel = 3'(k); wb_wdata = r[k*32 +: 32];
          @(negedge clk);
        end
      end
    wb_we = 0;
    run(128, 400);
    run(45, 400);
    // latency: one spike, value appears two cycles later, not one
    clr = 1; active_pes = 128; @(negedge clk); clr = 0;
    spk_valid = 1; spk = '{ts: 1, nid: 0}; @(negedge clk); spk_valid = 0;
    checks++;
    if (vmem[0] != 0) failures++;
    @(negedge clk);
    checks++;
    if (longint'(vmem[0]) != longint'(ref_term(1, wt[0][0]))) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
