// snn_top: TTFS spiking neural network processor with logarithmic PEs.
//
// Structure (after the paper's architecture figure):
//   input generator   input_buffer (48KB) -> minfind (merge-sort of spike lists)
//   PE array          pe_array: 4 x (90KB weight_buffer + 32 log_pe)
//   output processing ppu (bias) -> spike_encoder -> output_buffer (192B)
//   control           top_control (host registers, phase sequencing), dma
// The off-chip DRAM is outside; its port is brought out as a word-addressed
// request/response channel.
//
// Operation: the host loads input spike lists, weights and biases with DMA commands,
// configures the lists of one output position and issues RUN. The integration phase
// merges the input spikes in time order and broadcasts them, one per cycle, to the
// 128 PEs; each PE accumulates its output neuron's Vmem in the log domain. The fire
// phase adds the biases, encodes the Vmems into time-to-first-spikes, and the DMA
// writes the output spikes ({neuron ID, timestep}, one per DRAM word) to out_addr.
// done pulses at the end of every command.
//
// The block set, the buffer sizes, the PE count and the phase order follow the
// paper's architecture; the host register port, the DRAM port, and the paths from
// the DMA to the weight buffers and to the PPU bias file are this design's.
module snn_top
  import snn_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  // host
  input  logic         cfg_we,
  input  logic [4:0]   cfg_addr,
  input  logic [31:0]  cfg_wdata,
  output logic         busy,
  output logic         done,
  output logic [7:0]   spike_count,
  output logic [31:0]  integ_cycles,
  output logic [31:0]  enc_cycles,
  // off-chip DRAM
  output logic         dram_req_valid,
  input  logic         dram_req_ready,
  output logic         dram_req_we,
  output logic [31:0]  dram_req_addr,
  output logic [31:0]  dram_req_wdata,
  input  logic         dram_rsp_valid,
  input  logic [31:0]  dram_rsp_rdata
);

  // configuration and control
  logic [IB_EA_W-1:0] list_base [N_LIST];
  logic [IB_EA_W-1:0] list_len  [N_LIST];
  logic [PE_ID_W:0]   active_pes;
  logic pe_clr, ob_clr, mf_start, mf_done, mf_busy, ppu_load, ppu_valid;
  logic enc_start, enc_done, enc_busy;
  logic [PE_ID_W:0]   ob_count;

  // DMA
  logic               dma_valid, dma_ready, dma_done;
  dma_op_e            dma_op;
  logic [31:0]        dma_dram_addr;
  logic [15:0]        dma_buf_addr, dma_len;
  logic [1:0]         dma_group;
  logic               ib_we;
  logic [IB_WA_W-1:0] ib_waddr;
  logic [31:0]        ib_wdata;
  logic               wb_we;
  logic [1:0]         wb_group;
  logic [NID_W-1:0]   wb_waddr;
  logic [2:0]         wb_wsel;
  logic [31:0]        wb_wdata;
  logic               bias_we;
  logic [PE_ID_W-1:0] bias_waddr;
  logic [31:0]        bias_wdata;
  logic               ob_re;
  logic [PE_ID_W-1:0] ob_raddr;
  out_spike_t         ob_rdata;

  // datapath
  logic               ib_re;
  logic [IB_EA_W-1:0] ib_raddr;
  logic [15:0]        ib_rdata;
  logic               spk_valid;
  spike_t             spk;
  vmem_t              pe_vmem  [N_PE];
  vmem_t              ppu_vmem [N_PE];
  logic               os_valid;
  logic [PE_ID_W-1:0] os_id;
  logic [TS_W-1:0]    os_ts;

  top_control u_ctrl (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .busy, .done, .spike_count,
    .integ_cycles, .enc_cycles, .list_base, .list_len, .active_pes,
    .pe_clr, .ob_clr, .mf_start, .mf_done, .ppu_load, .enc_start, .enc_done, .ob_count,
    .dma_valid, .dma_ready, .dma_op, .dma_dram_addr, .dma_buf_addr, .dma_group,
    .dma_len, .dma_done
  );

  dma u_dma (
    .clk, .rst_n,
    .cmd_valid (dma_valid), .cmd_ready (dma_ready), .cmd_op (dma_op),
    .cmd_dram_addr (dma_dram_addr), .cmd_buf_addr (dma_buf_addr),
    .cmd_group (dma_group), .cmd_len (dma_len), .done (dma_done),
    .req_valid (dram_req_valid), .req_ready (dram_req_ready), .req_we (dram_req_we),
    .req_addr (dram_req_addr), .req_wdata (dram_req_wdata),
    .rsp_valid (dram_rsp_valid), .rsp_rdata (dram_rsp_rdata),
    .ib_we, .ib_waddr, .ib_wdata, .wb_we, .wb_group, .wb_waddr, .wb_wsel, .wb_wdata,
    .bias_we, .bias_waddr, .bias_wdata, .ob_re, .ob_raddr, .ob_rdata
  );

  input_buffer u_ib (
    .clk, .we (ib_we), .waddr (ib_waddr), .wdata (ib_wdata),
    .re (ib_re), .raddr (ib_raddr), .rdata (ib_rdata)
  );

  minfind u_mf (
    .clk, .rst_n, .start (mf_start), .list_base, .list_len,
    .ib_re, .ib_raddr, .ib_rdata (in_spike_t'(ib_rdata)),
    .spk_valid, .spk, .busy (mf_busy), .done (mf_done)
  );

  pe_array u_pea (
    .clk, .rst_n, .clr (pe_clr), .active_pes, .spk_valid, .spk,
    .wb_we, .wb_group, .wb_waddr, .wb_wsel, .wb_wdata, .vmem (pe_vmem)
  );

  ppu u_ppu (
    .clk, .rst_n, .load (ppu_load), .active_pes, .vmem_in (pe_vmem),
    .bias_we, .bias_waddr, .bias_wdata, .vmem_out (ppu_vmem), .out_valid (ppu_valid)
  );

  spike_encoder u_enc (
    .clk, .rst_n, .start (enc_start), .vmem_in (ppu_vmem),
    .spk_valid (os_valid), .spk_id (os_id), .spk_ts (os_ts),
    .busy (enc_busy), .done (enc_done)
  );

  output_buffer u_ob (
    .clk, .rst_n, .clr (ob_clr), .we (os_valid), .wdata ('{id: os_id, ts: os_ts}),
    .re (ob_re), .raddr (ob_raddr), .rdata (ob_rdata), .count (ob_count)
  );

  // the encoder only starts on Vmems the PPU has just produced
  assert property (@(posedge clk) disable iff (!rst_n) enc_start |-> ppu_valid);
  // integration and fire phases do not overlap
  assert property (@(posedge clk) disable iff (!rst_n) !(mf_busy && enc_busy));

endmodule
