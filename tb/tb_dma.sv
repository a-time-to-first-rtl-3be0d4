// tb_dma: runs each DMA command against the behavioural DRAM (random stalls, 3-cycle
// read latency) and checks every buffer write (address, word select, data, order),
// the DRAM contents after a store, the zero-length command, and that a load of N
// words takes no more than 2N + 10 cycles.
module tb_dma;
  import snn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, done;
  dma_op_e cmd_op = DMA_LOAD_IB;
  logic [31:0] cmd_dram_addr = 0;
  logic [15:0] cmd_buf_addr = 0, cmd_len = 0;
  logic [1:0] cmd_group = 0;
  logic req_valid, req_ready, req_we, rsp_valid;
  logic [31:0] req_addr, req_wdata, rsp_rdata;
  logic ib_we, wb_we, bias_we, ob_re;
  logic [IB_WA_W-1:0] ib_waddr;
  logic [31:0] ib_wdata, wb_wdata, bias_wdata;
  logic [1:0] wb_group;
  logic [NID_W-1:0] wb_waddr;
  logic [2:0] wb_wsel;
  logic [PE_ID_W-1:0] bias_waddr, ob_raddr;
  out_spike_t ob_rdata;
  out_spike_t ob_mem [128];
  int checks = 0, failures = 0;
  int nwr;
  logic [31:0] wr_data [$];
  int wr_addr [$];

  dma dut (.*);
  dram_model #(.WORDS(4096)) u_dram (.clk, .req_valid, .req_ready, .req_we, .req_addr,
                                     .req_wdata, .rsp_valid, .rsp_rdata);

  always #5 clk = ~clk;

  // output buffer model: synchronous read
  always @(posedge clk) if (ob_re) ob_rdata <= ob_mem[ob_raddr];

  // log every buffer write as (target*1e6 + address, data)
  always @(posedge clk) begin
    if (ib_we)   begin wr_addr.push_back(1000000 + int'(ib_waddr));                 wr_data.push_back(ib_wdata);   end
    if (wb_we)   begin wr_addr.push_back(2000000 + int'(wb_group) * 100000 + int'(wb_waddr) * 8 + int'(wb_wsel)); wr_data.push_back(wb_wdata); end
    if (bias_we) begin wr_addr.push_back(3000000 + int'(bias_waddr));               wr_data.push_back(bias_wdata); end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic command(input dma_op_e op, input int daddr, input int baddr, input int grp,
                         input int len, output int cycles);
    wr_addr.delete(); wr_data.delete();
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd_op = op; cmd_dram_addr = daddr; cmd_buf_addr = 16'(baddr);
    cmd_group = 2'(grp); cmd_len = 16'(len);
    @(negedge clk);
    cmd_valid = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  task automatic expect_writes(input int tgt_base, input int daddr, input int n, input bit wb, input int row0);
    checks++;
    if (wr_addr.size() != n) begin
      failures++;
      $display("%0d writes, expected %0d", wr_addr.size(), n);
      return;
    end
    for (int i = 0; i < n; i++) begin
      int a;
      a = wb ? tgt_base + (row0 + i / 5) * 8 + i % 5 : tgt_base + row0 + i;
      checks++;
      if (wr_addr[i] != a || wr_data[i] != u_dram.mem[daddr + i]) begin
        failures++;
        if (failures < 8) $display("write %0d: addr %0d data %h, expected %0d %h", i, wr_addr[i], wr_data[i], a, u_dram.mem[daddr + i]);
      end
    end
  endtask

  initial begin
    int cyc;
    for (int i = 0; i < 4096; i++) u_dram.mem[i] = $urandom;
    for (int i = 0; i < 128; i++) ob_mem[i] = out_spike_t'(12'($urandom));
    ob_rdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    command(DMA_LOAD_IB, 100, 7, 0, 50, cyc);
    expect_writes(1000000, 100, 50, 0, 7);
    checks++;
    if (cyc > 2 * 50 + 10) begin failures++; $display("load took %0d cycles", cyc); end
    command(DMA_LOAD_WB, 300, 10, 2, 23, cyc);
    expect_writes(2200000, 300, 23, 1, 10);
    command(DMA_LOAD_BIAS, 500, 0, 0, 128, cyc);
    expect_writes(3000000, 500, 128, 0, 0);
    command(DMA_LOAD_IB, 0, 0, 0, 0, cyc);
    checks++;
    if (wr_addr.size() != 0 || cyc > 3) failures++;
    command(DMA_STORE_OB, 2000, 0, 0, 37, cyc);
    for (int i = 0; i < 37; i++) begin
      checks++;
      if (u_dram.mem[2000 + i] != 32'(ob_mem[i])) begin
        failures++;
        if (failures < 8) $display("store %0d: %h expected %h", i, u_dram.mem[2000 + i], ob_mem[i]);
      end
    end
    checks++;
    if (u_dram.mem[2037] == 32'(ob_mem[37])) failures++;  // no write past the end (random data)
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
