// minfind: merge-sort unit of the input generator.
//
// The input buffer holds N_LIST spike lists, each already sorted by timestep (one
// list per input pixel of the kernel window, entries {ts, channel}). minfind merges
// them into a single stream in non-decreasing timestep order and tags every spike
// with its neuron ID = list index * 512 + channel, which is the weight-buffer row.
// The paper names the unit and its job (merge-sorting the input spikes); the list
// organisation and the prefetch scheme below are this design's.
//
// How it works: every list has a 2-entry prefetch FIFO. Each cycle one input-buffer
// read refills the list with the fewest buffered-or-requested entries (empty lists
// first, lowest index on ties). A spike is emitted only when every list that still
// has entries shows its head, so the smallest head is the global minimum; ties go
// to the lowest list index. After the initial fill the unit sustains one spike per
// cycle, even when all spikes come from one list.
//
// Interface: pulse start with list_base/list_len (entry addresses and counts) held
// stable during the merge. Outputs are registered: spk_valid/spk one cycle after the
// pop. done pulses once, after the last spike, and busy is high from start to done.
module minfind
  import snn_pkg::*;
#(
  parameter int unsigned NL   = N_LIST,
  parameter int unsigned EA_W = IB_EA_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [EA_W-1:0]   list_base [NL],
  input  logic [EA_W-1:0]   list_len  [NL],
  // input buffer read port
  output logic              ib_re,
  output logic [EA_W-1:0]   ib_raddr,
  input  in_spike_t         ib_rdata,
  // sorted spike stream
  output logic              spk_valid,
  output spike_t            spk,
  output logic              busy,
  output logic              done
);

  localparam int unsigned LW = $clog2(NL);

  logic [EA_W-1:0] fptr  [NL];
  logic [EA_W-1:0] fleft [NL];
  in_spike_t       q0 [NL];
  in_spike_t       q1 [NL];
  logic [1:0]      occ [NL];
  logic            rd_vld_d;
  logic [LW-1:0]   rd_list_d;

  logic            pending_any, blocked, any_head;
  logic            pop;
  logic [LW-1:0]   pop_l;
  logic            refill;
  logic [LW-1:0]   ref_l;
  logic [1:0]      eff [NL];
  logic [NL-1:0]   pu, po;

  always_comb begin
    pending_any = rd_vld_d;
    blocked     = 1'b0;
    any_head    = 1'b0;
    pop_l       = '0;
    for (int l = 0; l < NL; l++) begin
      logic infl;
      infl = rd_vld_d && (rd_list_d == LW'(l));
      if (occ[l] != 0 || fleft[l] != 0) pending_any = 1'b1;
      // a list with entries still to come but nothing buffered hides its minimum
      if (occ[l] == 0 && (fleft[l] != 0 || infl)) blocked = 1'b1;
      if (occ[l] != 0) begin
        if (!any_head || q0[l].ts < q0[pop_l].ts) pop_l = LW'(l);
        any_head = 1'b1;
      end
    end
    pop = busy && any_head && !blocked;

    // refill choice: empty lists first, then lists with a single entry
    for (int l = 0; l < NL; l++) begin
      pu[l] = rd_vld_d && rd_list_d == LW'(l);   // refill data arriving
      po[l] = pop && pop_l == LW'(l);            // head leaving
    end
    for (int l = 0; l < NL; l++)
      eff[l] = 2'(occ[l] + ((rd_vld_d && rd_list_d == LW'(l)) ? 2'd1 : 2'd0)
                         - ((pop && pop_l == LW'(l)) ? 2'd1 : 2'd0));
    refill = 1'b0;
    ref_l  = '0;
    for (int l = NL - 1; l >= 0; l--)
      if (fleft[l] != 0 && eff[l] == 2'd0) begin
        refill = 1'b1;
        ref_l  = LW'(l);
      end
    if (!refill)
      for (int l = NL - 1; l >= 0; l--)
        if (fleft[l] != 0 && eff[l] == 2'd1) begin
          refill = 1'b1;
          ref_l  = LW'(l);
        end
    refill   = refill && busy;
    ib_re    = refill;
    ib_raddr = fptr[ref_l];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      spk_valid <= 1'b0;
      spk       <= '0;
      rd_vld_d  <= 1'b0;
      rd_list_d <= '0;
      for (int l = 0; l < NL; l++) begin
        fptr[l]  <= '0;
        fleft[l] <= '0;
        occ[l]   <= '0;
        q0[l]    <= '0;
        q1[l]    <= '0;
      end
    end else begin
      done      <= 1'b0;
      spk_valid <= pop;
      if (pop) spk <= '{ts: q0[pop_l].ts, nid: NID_W'(pop_l) * NID_W'(CH_PER_LIST) + NID_W'(q0[pop_l].ch)};
      rd_vld_d  <= refill;
      rd_list_d <= ref_l;
      if (start && !busy) begin
        busy     <= 1'b1;
        rd_vld_d <= 1'b0;
        for (int l = 0; l < NL; l++) begin
          fptr[l]  <= list_base[l];
          fleft[l] <= list_len[l];
          occ[l]   <= '0;
        end
      end else if (busy) begin
        if (!pending_any) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        if (refill) begin
          fptr[ref_l]  <= fptr[ref_l] + 1'b1;
          fleft[ref_l] <= fleft[ref_l] - 1'b1;
        end
        for (int l = 0; l < NL; l++) begin
          if (pu[l] && po[l]) begin
            if (occ[l] == 2'd1) q0[l] <= ib_rdata;
            else begin
              q0[l] <= q1[l];
              q1[l] <= ib_rdata;
            end
          end else if (po[l]) begin
            q0[l]  <= q1[l];
            occ[l] <= occ[l] - 1'b1;
          end else if (pu[l]) begin
            if (occ[l] == 2'd0) q0[l] <= ib_rdata;
            else                q1[l] <= ib_rdata;
            occ[l] <= occ[l] + 1'b1;
          end
        end
      end
    end
  end

  // the prefetch FIFOs never overflow
  for (genvar l = 0; l < NL; l++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n) occ[l] <= 2'd2);
  end

endmodule
