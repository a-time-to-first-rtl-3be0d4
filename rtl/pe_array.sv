// pe_array: 128 logarithmic PEs in four groups of 32, each group with its own
// 90KB weight buffer.
//
// A sorted spike (timestep, neuron ID) is broadcast to all groups. Each group reads
// the weight row addressed by the neuron ID (32 weights, one per PE) and, one cycle
// later, every PE accumulates its weight scaled by the spike's kernel value. So each
// PE integrates one output neuron; 128 output channels of one output position are
// computed together (SpinalFlow-style output-stationary dataflow).
//
// Input gating: only the first active_pes PEs operate. A group with no active PE
// does not read its weight buffer and does not load its timestep register, and
// inactive PEs get no enable, so their inputs and Vmem do not toggle. The paper
// states that the array supports input gating; the exact granularity is this
// design's choice.
//
// Timing: spike in cycle c -> weight read in c -> accumulation at the end of c+1;
// vmem reflects a spike two cycles after spk_valid. clr clears all Vmems.
module pe_array
  import snn_pkg::*;
#(
  parameter int unsigned NPE  = N_PE,
  parameter int unsigned NGRP = N_GROUP,
  parameter int unsigned WB_D = WB_DEPTH
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clr,
  input  logic [$clog2(NPE+1)-1:0]  active_pes,
  // sorted spike stream from the minfind unit
  input  logic                      spk_valid,
  input  spike_t                    spk,
  // weight buffer write port (from DMA)
  input  logic                      wb_we,
  input  logic [$clog2(NGRP)-1:0]   wb_group,
  input  logic [NID_W-1:0]          wb_waddr,
  input  logic [2:0]                wb_wsel,
  input  logic [31:0]               wb_wdata,
  // membrane voltages to the PPU
  output vmem_t                     vmem [NPE]
);

  localparam int unsigned PPG = NPE / NGRP;

  logic [NPE-1:0]  pe_active;
  logic [NGRP-1:0] grp_active;
  logic            valid_d;

  always_comb begin
    for (int i = 0; i < NPE; i++) pe_active[i] = (i < int'(active_pes));
    for (int g = 0; g < NGRP; g++) grp_active[g] = pe_active[g*PPG];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid_d <= 1'b0;
    else        valid_d <= spk_valid;
  end

  for (genvar g = 0; g < NGRP; g++) begin : g_grp
    logic [PPG*W_BITS-1:0] wrow;
    logic [TS_W-1:0]       ts_d;

    // gated timestep register of the group
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                          ts_d <= '0;
      else if (spk_valid && grp_active[g]) ts_d <= spk.ts;
    end

    weight_buffer #(.DEPTH(WB_D), .LANES(PPG), .W_BITS(W_BITS)) u_wb (
      .clk   (clk),
      .re    (spk_valid && grp_active[g]),
      .raddr (spk.nid[$clog2(WB_D)-1:0]),
      .rdata (wrow),
      .we    (wb_we && (wb_group == g)),
      .waddr (wb_waddr[$clog2(WB_D)-1:0]),
      .wsel  (wb_wsel),
      .wdata (wb_wdata)
    );

    for (genvar p = 0; p < PPG; p++) begin : g_pe
      log_pe u_pe (
        .clk   (clk),
        .rst_n (rst_n),
        .clr   (clr),
        .en    (valid_d && pe_active[g*PPG+p]),
        .ts    (ts_d),
        .wcode (wcode_t'(wrow[p*W_BITS +: W_BITS])),
        .vmem  (vmem[g*PPG+p])
      );
    end
  end

endmodule
