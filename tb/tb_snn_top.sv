// tb_snn_top: end-to-end test of the processor at its default size.
//
// For each case the testbench generates random 5-bit log weights for the 128 output
// neurons, random biases and up to nine time-sorted input spike lists (one spike per
// channel at most), places them in the DRAM model, and drives the host port: DMA
// loads of the input buffer, of the rows used in each of the four weight buffers and
// of the biases, list configuration, then RUN. The output spikes written back to
// DRAM are compared with a reference computed here with real arithmetic (spike value
// 2^(-(t-1)/4), weight 2^(-m/2), fire at the first t with Vmem+bias >= 2^(-(t-1)/4),
// order by timestep then neuron ID). The integration phase must take at most one
// cycle per spike plus the prefetch fill, and the fire phase one cycle per spike and
// per timestep. The last case is a full VGG-16 3x3x512 receptive field: all 4608
// weight rows of every buffer are used.
//
// Mechanisms that must each occur at least once: input gating (active_pes < 128),
// DRAM back-pressure, negative Vmem clamped at encoding, several neurons over the
// threshold in one timestep (priority encoder), timestep advance, early end of
// encoding (all Vmems fired before T), end at T with sub-threshold Vmems left,
// zero-weight code, a RUN that produces no spike.
module tb_snn_top;
  import snn_pkg::*;
  import tb_ref_pkg::*;

  localparam int DW      = 1 << 18;
  localparam int IB_AT   = 0;
  localparam int WB_AT   = 16384;
  localparam int BIAS_AT = 200000;
  localparam int OUT_AT  = 250000;

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

  always #2 clk = ~clk;   // 250 MHz

  int checks = 0, failures = 0;
  logic [4:0] wt [N_PE][WB_DEPTH];
  int bias [N_PE];

  // mechanism counters
  int n_gating = 0, n_stall = 0, n_negclamp = 0, n_multi = 0, n_tadv = 0, n_early = 0,
      n_end_t = 0, n_zero_w = 0, n_nospike = 0;

  always @(posedge clk) if (rst_n) begin
    if (dram_req_valid && !dram_req_ready) n_stall++;
    if (dut.u_enc.busy && $countones(dut.u_enc.over) > 1) n_multi++;
    if (dut.u_enc.busy && !dut.u_enc.fire && dut.u_enc.nonzero != '0 && dut.u_enc.t != 5'(T_STEPS)) n_tadv++;
    if (dut.u_enc.busy && !dut.u_enc.fire && dut.u_enc.nonzero == '0 && dut.u_enc.t != 5'(T_STEPS)) n_early++;
    if (dut.u_enc.busy && !dut.u_enc.fire && dut.u_enc.nonzero != '0 && dut.u_enc.t == 5'(T_STEPS)) n_end_t++;
    if (dut.u_pea.valid_d && dut.u_pea.g_grp[0].g_pe[0].u_pe.wcode.mag == 4'hf) n_zero_w++;
  end

  initial begin
    #(4 * 3_000_000);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int a, input int d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = 5'(a); cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic wait_done();
    while (!done) @(negedge clk);
  endtask

  task automatic dma_cmd(input dma_op_e op, input int daddr, input int baddr, input int grp, input int len);
    wr(20, daddr); wr(21, baddr); wr(22, len); wr(23, grp);
    @(negedge clk);
    cfg_we = 1; cfg_addr = 24; cfg_wdata = 32'(op);
    @(negedge clk);
    cfg_we = 0;
    wait_done();
  endtask

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL: %s", what);
    end
  endtask

  // one output position: nch channels per list, up to maxlen spikes per list
  task automatic run_case(input string name, input int nch, input int maxlen, input int active,
                          input int mmin, input int bias_mode);
    int len [N_LIST];
    logic [15:0] ent [$];
    int vm [N_PE];
    int fire_t [N_PE];
    int exp_id [$], exp_ts [$];
    int total, nspk, t_end, w;
    bit left;

    // weights of the rows used, packed into DRAM as 5 words per row, per group and list
    w = WB_AT;
    for (int g = 0; g < N_GROUP; g++)
      for (int l = 0; l < int'(N_LIST); l++)
        for (int c = 0; c < nch; c++) begin
          logic [159:0] row;
          for (int p = 0; p < 32; p++) begin
            logic [4:0] code;
            code = {1'($urandom), 4'($urandom_range(14, mmin))};
            if ($urandom_range(15) == 0) code[3:0] = 4'hf;
            wt[g*32+p][l*512+c] = code;
            row[p*5 +: 5] = code;
          end
          for (int k = 0; k < 5; k++) u_dram.mem[w + k] = row[k*32 +: 32];
          w += 5;
        end
    for (int p = 0; p < N_PE; p++) begin
      case (bias_mode)
        0: bias[p] = $urandom_range(40000) - 20000;
        1: bias[p] = -8000000;                   // everything negative: no spike
        default: bias[p] = $urandom_range(60000) - 30000;
      endcase
      u_dram.mem[BIAS_AT + p] = 32'(bias[p]);
    end

    // input spike lists: distinct channels, sorted by timestep
    ent.delete();
    total = 0;
    for (int l = 0; l < int'(N_LIST); l++) begin
      int ts_of [int];
      int chs [$];
      int tsq [$];
      len[l] = (maxlen >= nch) ? nch : $urandom_range(maxlen);
      for (int c = 0; c < nch; c++) chs.push_back(c);
      chs.shuffle();
      chs = chs[0:len[l]-1];
      for (int i = 0; i < len[l]; i++) tsq.push_back($urandom_range(T_STEPS, 1));
      tsq.sort();
      for (int i = 0; i < len[l]; i++) begin
        ent.push_back({2'b00, 5'(tsq[i]), 9'(chs[i])});
      end
      total += len[l];
    end
    if (ent.size() % 2) ent.push_back('0);
    for (int i = 0; i < ent.size() / 2; i++) u_dram.mem[IB_AT + i] = {ent[2*i+1], ent[2*i]};

    // reference
    for (int p = 0; p < N_PE; p++) vm[p] = 0;
    begin
      int e;
      e = 0;
      for (int l = 0; l < int'(N_LIST); l++)
        for (int i = 0; i < len[l]; i++) begin
          int t, row;
          t = int'(ent[e][13:9]);
          row = l * 512 + int'(ent[e][8:0]);
          for (int p = 0; p < active; p++) vm[p] += ref_term(t, wt[p][row]);
          e++;
        end
    end
    nspk = 0;
    t_end = 1;
    left = 0;
    for (int p = 0; p < N_PE; p++) begin
      if (p < active) vm[p] += bias[p]; else vm[p] = 0;
      if (vm[p] < 0) n_negclamp++;
      fire_t[p] = 0;
      for (int t = int'(T_STEPS); t >= 1; t--) if (vm[p] >= int'(ref_threshold(t))) fire_t[p] = t;
      if (vm[p] > 0 && fire_t[p] == 0) left = 1;
    end
    for (int t = 1; t <= int'(T_STEPS); t++)
      for (int p = 0; p < N_PE; p++)
        if (fire_t[p] == t) begin exp_id.push_back(p); exp_ts.push_back(t); nspk++; t_end = t; end
    if (left) t_end = int'(T_STEPS);
    if (active < N_PE) n_gating++;
    if (nspk == 0) n_nospike++;

    // host program
    dma_cmd(DMA_LOAD_IB, IB_AT, 0, 0, ent.size() / 2);
    w = WB_AT;
    for (int g = 0; g < N_GROUP; g++)
      for (int l = 0; l < int'(N_LIST); l++) begin
        dma_cmd(DMA_LOAD_WB, w, l * 512, g, nch * 5);
        w += nch * 5;
      end
    dma_cmd(DMA_LOAD_BIAS, BIAS_AT, 0, 0, N_PE);
    begin
      int base;
      base = 0;
      for (int l = 0; l < int'(N_LIST); l++) begin
        wr(l, base); wr(9 + l, len[l]);
        base += len[l];
      end
    end
    wr(18, active);
    wr(19, OUT_AT);
    for (int i = 0; i < 130; i++) u_dram.mem[OUT_AT + i] = 32'hdead_beef;
    @(negedge clk);
    cfg_we = 1; cfg_addr = 24; cfg_wdata = 4;
    @(negedge clk);
    cfg_we = 0;
    wait_done();

    chk(int'(spike_count) == nspk, $sformatf("%s: %0d output spikes, expected %0d", name, spike_count, nspk));
    for (int i = 0; i < nspk; i++)
      chk(u_dram.mem[OUT_AT + i] == 32'({7'(exp_id[i]), 5'(exp_ts[i])}),
          $sformatf("%s: spike %0d = %h, expected id %0d t %0d", name, i, u_dram.mem[OUT_AT + i], exp_id[i], exp_ts[i]));
    chk(u_dram.mem[OUT_AT + nspk] == 32'hdead_beef, $sformatf("%s: write past the last spike", name));
    chk(integ_cycles <= 32'(total + 2 * int'(N_LIST) + 8),
        $sformatf("%s: integration %0d cycles for %0d spikes", name, integ_cycles, total));
    chk(enc_cycles <= 32'(nspk + t_end + 2),
        $sformatf("%s: encoding %0d cycles for %0d spikes, t_end %0d", name, enc_cycles, nspk, t_end));
    $display("%s: %0d input spikes in %0d cycles, %0d output spikes, encoding %0d cycles",
             name, total, integ_cycles, nspk, enc_cycles);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_case("small", 16, 12, 128, 0, 0);
    run_case("gated", 24, 20, 70, 0, 0);
    run_case("no spike", 8, 8, 128, 0, 1);
    run_case("vgg16 3x3x512", 512, 512, 128, 7, 2);
    chk(n_gating > 0,   "input gating never exercised");
    chk(n_stall > 0,    "DRAM back-pressure never exercised");
    chk(n_negclamp > 0, "negative Vmem never clamped");
    chk(n_multi > 0,    "no timestep with several neurons over threshold");
    chk(n_tadv > 0,     "timestep never advanced");
    chk(n_early > 0,    "encoding never ended before T");
    chk(n_end_t > 0,    "encoding never ended at T");
    chk(n_zero_w > 0,   "zero-weight code never used");
    chk(n_nospike > 0,  "no RUN without output spikes");
    $display("mechanisms: gating=%0d stall=%0d negclamp=%0d multi=%0d tadv=%0d early=%0d end_at_T=%0d zero_w=%0d nospike=%0d",
             n_gating, n_stall, n_negclamp, n_multi, n_tadv, n_early, n_end_t, n_zero_w, n_nospike);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
