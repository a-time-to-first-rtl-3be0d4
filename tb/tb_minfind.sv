// tb_minfind: builds N_LIST random time-sorted spike lists in an input buffer
// (some lists empty, some long, all of one timestep in one case), runs the merge and
// checks that the output is sorted, that it is exactly the multiset of input spikes
// with the right neuron IDs (list*512 + channel), and that the merge runs at one
// spike per cycle after the prefetch fill: cycles <= spikes + 2*N_LIST + 6.
module tb_minfind;
  import snn_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic [IB_EA_W-1:0] list_base [N_LIST];
  logic [IB_EA_W-1:0] list_len  [N_LIST];
  logic ib_we = 0, ib_re;
  logic [IB_WA_W-1:0] ib_waddr = 0;
  logic [31:0] ib_wdata = 0;
  logic [IB_EA_W-1:0] ib_raddr;
  logic [15:0] ib_rdata;
  logic spk_valid, busy, done;
  spike_t spk;
  int checks = 0, failures = 0;

  input_buffer u_ib (.clk, .we(ib_we), .waddr(ib_waddr), .wdata(ib_wdata), .re(ib_re),
                     .raddr(ib_raddr), .rdata(ib_rdata));
  minfind dut (.clk, .rst_n, .start, .list_base, .list_len, .ib_re, .ib_raddr,
               .ib_rdata(in_spike_t'(ib_rdata)), .spk_valid, .spk, .busy, .done);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int maxlen, input bit one_ts, input bit one_list);
    logic [15:0] ent [$];
    int expect_cnt [int];
    int total, cycles, got, last_ts, len;
    logic [15:0] e;
    ent.delete();
    expect_cnt.delete();
    total = 0;
    for (int l = 0; l < int'(N_LIST); l++) begin
      int t;
      len = one_list ? ((l == 4) ? maxlen : 0) : $urandom_range(maxlen);
      if (l == 2 && !one_list) len = 0;
      list_base[l] = IB_EA_W'(ent.size());
      list_len[l]  = IB_EA_W'(len);
      t = 1;
      for (int k = 0; k < len; k++) begin
        int ch;
        if (!one_ts && $urandom_range(2) == 0 && t < int'(T_STEPS)) t++;
        ch = $urandom_range(511);
        e = {2'b00, TS_W'(one_ts ? 7 : t), CH_W'(ch)};
        ent.push_back(e);
        expect_cnt[(one_ts ? 7 : t) * 8192 + l * 512 + ch]++;
      end
      total += len;
    end
    if (ent.size() % 2 == 1) ent.push_back('0);
    for (int w = 0; w < ent.size() / 2; w++) begin
      ib_we = 1; ib_waddr = IB_WA_W'(w); ib_wdata = {ent[2*w+1], ent[2*w]};
      @(negedge clk);
    end
    ib_we = 0;
    start = 1; @(negedge clk); start = 0;
    cycles = 1; got = 0; last_ts = 0;
    while (!done) begin
      if (spk_valid) begin
        int key;
        got++;
        checks++;
        if (int'(spk.ts) < last_ts) begin
          failures++;
          $display("order: ts %0d after %0d", spk.ts, last_ts);
        end
        last_ts = int'(spk.ts);
        key = int'(spk.ts) * 8192 + int'(spk.nid);
        checks++;
        if (!expect_cnt.exists(key) || expect_cnt[key] == 0) begin
          failures++;
          if (failures < 8) $display("unexpected spike ts=%0d nid=%0d", spk.ts, spk.nid);
        end else expect_cnt[key]--;
      end
      @(negedge clk);
      cycles++;
    end
    checks++;
    if (got != total) begin
      failures++;
      $display("got %0d spikes, expected %0d", got, total);
    end
    checks++;
    if (cycles > total + 2 * int'(N_LIST) + 6) begin
      failures++;
      $display("merge took %0d cycles for %0d spikes", cycles, total);
    end
    @(negedge clk);
  endtask

  initial begin
    for (int l = 0; l < int'(N_LIST); l++) begin list_base[l] = '0; list_len[l] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    run(0, 0, 0);
    run(5, 0, 0);
    run(40, 0, 0);
    run(40, 1, 0);
    run(200, 0, 1);
    for (int i = 0; i < 10; i++) run(100, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
