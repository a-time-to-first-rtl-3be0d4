// dma: moves data between off-chip DRAM and the on-chip buffers.
//
// One command at a time. Load commands read cmd_len 32-bit DRAM words starting at
// cmd_dram_addr and write them, in order, into
//   DMA_LOAD_IB   the input buffer, from word cmd_buf_addr on;
//   DMA_LOAD_WB   weight buffer cmd_group, from row cmd_buf_addr on, 5 words per row;
//   DMA_LOAD_BIAS the PPU bias file, from entry cmd_buf_addr on.
// DMA_STORE_OB reads cmd_len output-buffer entries and writes each to one DRAM word
// (zero-extended 12-bit {neuron ID, timestep}). The paper says only that the DMA
// manages the off-chip DRAM accesses; the commands and the DRAM port are this
// design's.
//
// DRAM port: word addressed, a request is taken when req_valid && req_ready; read
// data returns in order on rsp_valid, any number of cycles later. Read requests
// are issued back to back, so a load streams one word per cycle when DRAM allows.
// A store spends two cycles per word (buffer read, then DRAM write).
// cmd_ready is high when idle; done pulses when the last word has been written.
module dma
  import snn_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // command
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  dma_op_e              cmd_op,
  input  logic [31:0]          cmd_dram_addr,
  input  logic [15:0]          cmd_buf_addr,
  input  logic [1:0]           cmd_group,
  input  logic [15:0]          cmd_len,
  output logic                 done,
  // DRAM
  output logic                 req_valid,
  input  logic                 req_ready,
  output logic                 req_we,
  output logic [31:0]          req_addr,
  output logic [31:0]          req_wdata,
  input  logic                 rsp_valid,
  input  logic [31:0]          rsp_rdata,
  // input buffer
  output logic                 ib_we,
  output logic [IB_WA_W-1:0]   ib_waddr,
  output logic [31:0]          ib_wdata,
  // weight buffers
  output logic                 wb_we,
  output logic [1:0]           wb_group,
  output logic [NID_W-1:0]     wb_waddr,
  output logic [2:0]           wb_wsel,
  output logic [31:0]          wb_wdata,
  // PPU bias file
  output logic                 bias_we,
  output logic [PE_ID_W-1:0]   bias_waddr,
  output logic [31:0]          bias_wdata,
  // output buffer
  output logic                 ob_re,
  output logic [PE_ID_W-1:0]   ob_raddr,
  input  out_spike_t           ob_rdata
);

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_ST_RD, S_ST_WR} state_e;

  state_e      state;
  dma_op_e     op;
  logic [31:0] daddr;       // next DRAM address to request
  logic [15:0] req_left;    // requests still to issue
  logic [15:0] rsp_left;    // words still to write
  logic [15:0] bptr;        // buffer word / row / entry pointer
  logic [2:0]  sel;         // word within a weight row
  logic [1:0]  grp;

  assign cmd_ready = (state == S_IDLE);

  always_comb begin
    req_valid = 1'b0;
    req_we    = 1'b0;
    req_addr  = daddr;
    req_wdata = '0;
    if (state == S_LOAD && req_left != 0) req_valid = 1'b1;
    if (state == S_ST_WR) begin
      req_valid = 1'b1;
      req_we    = 1'b1;
      req_wdata = 32'(ob_rdata);
    end
    ib_we      = (state == S_LOAD) && rsp_valid && op == DMA_LOAD_IB;
    ib_waddr   = bptr[IB_WA_W-1:0];
    ib_wdata   = rsp_rdata;
    wb_we      = (state == S_LOAD) && rsp_valid && op == DMA_LOAD_WB;
    wb_group   = grp;
    wb_waddr   = bptr[NID_W-1:0];
    wb_wsel    = sel;
    wb_wdata   = rsp_rdata;
    bias_we    = (state == S_LOAD) && rsp_valid && op == DMA_LOAD_BIAS;
    bias_waddr = bptr[PE_ID_W-1:0];
    bias_wdata = rsp_rdata;
    ob_re      = (state == S_ST_RD);
    ob_raddr   = bptr[PE_ID_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      op       <= DMA_LOAD_IB;
      daddr    <= '0;
      req_left <= '0;
      rsp_left <= '0;
      bptr     <= '0;
      sel      <= '0;
      grp      <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          op       <= cmd_op;
          daddr    <= cmd_dram_addr;
          req_left <= cmd_len;
          rsp_left <= cmd_len;
          bptr     <= cmd_buf_addr;
          sel      <= '0;
          grp      <= cmd_group;
          if (cmd_len == 0)                done  <= 1'b1;
          else if (cmd_op == DMA_STORE_OB) state <= S_ST_RD;
          else                             state <= S_LOAD;
        end
        S_LOAD: begin
          if (req_valid && req_ready) begin
            daddr    <= daddr + 1;
            req_left <= req_left - 1'b1;
          end
          if (rsp_valid) begin
            rsp_left <= rsp_left - 1'b1;
            if (op == DMA_LOAD_WB && sel != 3'(WB_WORDS - 1)) begin
              sel <= sel + 1'b1;
            end else begin
              sel  <= '0;
              bptr <= bptr + 1'b1;
            end
            if (rsp_left == 16'd1) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
        end
        S_ST_RD: state <= S_ST_WR;
        S_ST_WR: if (req_ready) begin
          daddr    <= daddr + 1;
          bptr     <= bptr + 1'b1;
          rsp_left <= rsp_left - 1'b1;
          if (rsp_left == 16'd1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_ST_RD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // no read data may arrive without an outstanding request
  assert property (@(posedge clk) disable iff (!rst_n) rsp_valid |-> state == S_LOAD);

endmodule
