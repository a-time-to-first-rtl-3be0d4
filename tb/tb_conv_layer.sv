// tb_conv_layer: runs a whole (small) VGG-style 3x3 convolution layer, stride 1,
// zero padding 1, on the processor: a 6x6x8 input spike map and 20 output channels
// (so 108 PEs are input-gated). Every input pixel's time-sorted spike list is loaded
// into the input buffer once and then reused by up to nine output positions: for
// each of the 36 output positions the host only points the nine lists at the right
// pixels (empty lists at the border) and issues RUN. The output spikes of every
// position are compared with a real-arithmetic reference, and the DRAM words read
// for input spikes are counted to show the reuse.
module tb_conv_layer;
  import snn_pkg::*;
  import tb_ref_pkg::*;

  localparam int H = 6, W = 6, CI = 8, CO = 20;
  localparam int DW = 1 << 16;
  localparam int WB_AT = 4096, BIAS_AT = 8192, OUT_AT = 16384;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [4:0] cfg_addr = 0;
  logic [31:0] cfg_wdata = 0;
  logic busy, done;
  logic [7:0] spike_count;
  logic [31:0] integ_cycles, enc_cycles;
  logic dram_req_valid, dram_req_ready, dram_req_we, dram_rsp_valid;
  logic [31:0] dram_req_addr, dram_req_wdata, dram_rsp_rdata;

  snn_top dut (.*);
  dram_model #(.WORDS(DW)) u_dram (.clk, .req_valid(dram_req_valid), .req_ready(dram_req_ready),
    .req_we(dram_req_we), .req_addr(dram_req_addr), .req_wdata(dram_req_wdata),
    .rsp_valid(dram_rsp_valid), .rsp_rdata(dram_rsp_rdata));

  always #2 clk = ~clk;

  int checks = 0, failures = 0;
  int in_ts [H][W][CI];          // 0 = no spike
  logic [4:0] wt [CO][9][CI];
  int bias [CO];
  int pix_base [H][W], pix_len [H][W];
  int ib_reads = 0;

  always @(posedge clk)
    if (dram_req_valid && dram_req_ready && !dram_req_we && dram_req_addr < WB_AT) ib_reads++;

  initial begin
    #(4 * 2_000_000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int a, input int d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = 5'(a); cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic command(input int c);
    wr(24, c);
    while (!done) @(negedge clk);
  endtask

  task automatic dma_cmd(input dma_op_e op, input int daddr, input int baddr, input int grp, input int len);
    wr(20, daddr); wr(21, baddr); wr(22, len); wr(23, grp);
    command(int'(op));
  endtask

  initial begin
    logic [15:0] ent [$];
    int w, nspk_total;
    // input spikes and their sorted per-pixel lists
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        int order [$];
        for (int c = 0; c < CI; c++) in_ts[y][x][c] = ($urandom_range(9) < 7) ? $urandom_range(T_STEPS, 1) : 0;
        pix_base[y][x] = ent.size();
        for (int t = 1; t <= int'(T_STEPS); t++)
          for (int c = 0; c < CI; c++)
            if (in_ts[y][x][c] == t) ent.push_back({2'b00, 5'(t), 9'(c)});
        pix_len[y][x] = ent.size() - pix_base[y][x];
      end
    if (ent.size() % 2) ent.push_back('0);
    for (int i = 0; i < ent.size() / 2; i++) u_dram.mem[i] = {ent[2*i+1], ent[2*i]};
    // weights: group 0 rows k*512 + c, lanes 0..CO-1
    w = WB_AT;
    for (int k = 0; k < 9; k++)
      for (int c = 0; c < CI; c++) begin
        logic [159:0] row;
        row = '0;
        for (int o = 0; o < CO; o++) begin
          wt[o][k][c] = {1'($urandom), 4'($urandom_range(14, 1))};
          row[o*5 +: 5] = wt[o][k][c];
        end
        for (int q = 0; q < 5; q++) u_dram.mem[w + q] = row[q*32 +: 32];
        w += 5;
      end
    for (int o = 0; o < CO; o++) begin
      bias[o] = $urandom_range(30000) - 10000;
      u_dram.mem[BIAS_AT + o] = 32'(bias[o]);
    end

    repeat (3) @(posedge clk);
    rst_n = 1;
    dma_cmd(DMA_LOAD_IB, 0, 0, 0, ent.size() / 2);
    for (int k = 0; k < 9; k++) dma_cmd(DMA_LOAD_WB, WB_AT + k * CI * 5, k * 512, 0, CI * 5);
    dma_cmd(DMA_LOAD_BIAS, BIAS_AT, 0, 0, CO);
    wr(18, CO);

    nspk_total = 0;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        int vm [CO];
        int exp_w [$];
        int out_at;
        exp_w.delete();
        out_at = OUT_AT + (y * W + x) * 128;
        for (int k = 0; k < 9; k++) begin
          int py, px;
          py = y + k / 3 - 1;
          px = x + k % 3 - 1;
          if (py < 0 || py >= H || px < 0 || px >= W) begin
            wr(k, 0); wr(9 + k, 0);
          end else begin
            wr(k, pix_base[py][px]); wr(9 + k, pix_len[py][px]);
          end
        end
        wr(19, out_at);
        command(4);
        // reference for this position
        for (int o = 0; o < CO; o++) begin
          vm[o] = bias[o];
          for (int k = 0; k < 9; k++) begin
            int py, px;
            py = y + k / 3 - 1;
            px = x + k % 3 - 1;
            if (py >= 0 && py < H && px >= 0 && px < W)
              for (int c = 0; c < CI; c++)
                if (in_ts[py][px][c] != 0) vm[o] += ref_term(in_ts[py][px][c], wt[o][k][c]);
          end
        end
        for (int t = 1; t <= int'(T_STEPS); t++)
          for (int o = 0; o < CO; o++)
            if (vm[o] >= int'(ref_threshold(t)) && (t == 1 || vm[o] < int'(ref_threshold(t - 1))))
              exp_w.push_back({o[6:0], 5'(t)});
        checks++;
        if (int'(spike_count) != exp_w.size()) begin
          failures++;
          $display("(%0d,%0d): %0d spikes, expected %0d", y, x, spike_count, exp_w.size());
        end
        foreach (exp_w[i]) begin
          checks++;
          if (u_dram.mem[out_at + i] != 32'(exp_w[i])) begin
            failures++;
            if (failures < 10) $display("(%0d,%0d) spike %0d: %h expected %h", y, x, i, u_dram.mem[out_at + i], exp_w[i]);
          end
        end
        nspk_total += exp_w.size();
      end
    // every input word was read from DRAM once, although each pixel feeds up to 9 positions
    checks++;
    if (ib_reads != ent.size() / 2) begin
      failures++;
      $display("input words read from DRAM: %0d, expected %0d", ib_reads, ent.size() / 2);
    end
    $display("layer %0dx%0dx%0d -> %0dx%0dx%0d: %0d input spikes, %0d output spikes, input DRAM words %0d",
             H, W, CI, H, W, CO, ent.size(), nspk_total, ib_reads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
