// tb_top_control: drives the register port and plays the datapath (minfind done
// after a random delay, encoder done after a random delay, a DMA that accepts and
// completes commands). Checks the register file, that a RUN walks CLR -> INTEG ->
// PPU -> ENC -> STORE in order with the right DMA store command (out_addr, length =
// output-buffer count), that a RUN with no output spike skips the store, that a
// direct DMA command is forwarded with its operands, the cycle counters, and that
// writes while busy are ignored.
module tb_top_control;
  import snn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [4:0] cfg_addr = 0;
  logic [31:0] cfg_wdata = 0;
  logic busy, done;
  logic [7:0] spike_count;
  logic [31:0] integ_cycles, enc_cycles;
  logic [IB_EA_W-1:0] list_base [N_LIST];
  logic [IB_EA_W-1:0] list_len  [N_LIST];
  logic [PE_ID_W:0] active_pes;
  logic pe_clr, ob_clr, mf_start, mf_done = 0, ppu_load, enc_start, enc_done = 0;
  logic [PE_ID_W:0] ob_count = 0;
  logic dma_valid, dma_ready = 1, dma_done = 0;
  dma_op_e dma_op;
  logic [31:0] dma_dram_addr;
  logic [15:0] dma_buf_addr, dma_len;
  logic [1:0] dma_group;
  int checks = 0, failures = 0;
  string trace;

  top_control dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int a, input int d);
    cfg_we = 1; cfg_addr = 5'(a); cfg_wdata = d; @(negedge clk); cfg_we = 0;
  endtask

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // datapath stand-in: records the order of phase strobes
  int mf_delay, enc_delay, dma_cmds;
  logic [31:0] st_addr; logic [15:0] st_len; dma_op_e st_op;
  always @(posedge clk) begin
    if (pe_clr && ob_clr && mf_start) trace = {trace, "C"};
    if (ppu_load)  trace = {trace, "P"};
    if (enc_start) trace = {trace, "E"};
    if (dma_valid && dma_ready) begin
      trace = {trace, "D"};
      st_addr = dma_dram_addr; st_len = dma_len; st_op = dma_op;
      dma_cmds++;
    end
  end
  initial begin
    forever begin
      @(negedge clk);
      mf_done = 0; enc_done = 0; dma_done = 0;
      if (mf_start) begin
        repeat (mf_delay) @(negedge clk);
        mf_done = 1;
      end else if (enc_start) begin
        repeat (enc_delay) @(negedge clk);
        enc_done = 1;
      end else if (dma_valid) begin
        repeat (5) @(negedge clk);
        dma_done = 1;
      end
    end
  end

  initial begin
    mf_delay = 10; enc_delay = 7; dma_cmds = 0; trace = "";
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(active_pes == 128, "active_pes resets to 128");
    trace = "";
    for (int l = 0; l < 9; l++) begin wr(l, 100 * l + 3); wr(9 + l, 10 + l); end
    wr(18, 77); wr(19, 32'h1234);
    for (int l = 0; l < 9; l++)
      chk(list_base[l] == IB_EA_W'(100 * l + 3) && list_len[l] == IB_EA_W'(10 + l), "list registers");
    chk(active_pes == 77, "active_pes");
    wr(18, 500);
    chk(active_pes == 128, "active_pes clamps to 128");
    // RUN with 9 output spikes
    ob_count = 9;
    wr(24, 4);
    chk(busy, "busy after RUN");
    wr(18, 3);   // ignored while busy
    while (!done) @(negedge clk);
    chk(active_pes == 128, "write while busy ignored");
    chk(trace == "CPED", $sformatf("phase order %s", trace));
    chk(st_op == DMA_STORE_OB && st_addr == 32'h1234 && st_len == 9, "store command");
    chk(spike_count == 9, "spike count");
    chk(integ_cycles == 32'(mf_delay), $sformatf("integ_cycles %0d", integ_cycles));
    chk(enc_cycles == 32'(enc_delay), $sformatf("enc_cycles %0d", enc_cycles));
    @(negedge clk);
    chk(!busy, "idle after done");
    // RUN with no output spike: no store
    trace = ""; ob_count = 0; mf_delay = 3; enc_delay = 2;
    wr(24, 4);
    while (!done) @(negedge clk);
    chk(trace == "CPE", $sformatf("phase order without spikes %s", trace));
    // direct DMA command
    trace = "";
    wr(20, 32'h55); wr(21, 17); wr(22, 40); wr(23, 3); wr(24, 1);
    while (!done) @(negedge clk);
    chk(trace == "D" && st_op == DMA_LOAD_WB && st_addr == 32'h55 && st_len == 40, "direct DMA command");
    chk(dma_group == 3 && dma_buf_addr == 17, "DMA operands");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
