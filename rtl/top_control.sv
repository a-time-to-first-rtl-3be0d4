// top_control: host registers and phase sequencer of the processor.
//
// A host writes configuration registers and then a command register:
//   0..8   list_base[l]   input-buffer entry address of spike list l
//   9..17  list_len[l]    number of spikes in list l
//   18     active_pes     PEs in use (the rest are input-gated)
//   19     out_addr       DRAM word address for the output spikes of a RUN
//   20     dma_dram_addr  } operands of a direct DMA command
//   21     dma_buf_addr   }
//   22     dma_len        }
//   23     dma_group      }
//   24     command        0..3: DMA command (dma_op_e); 4: RUN
// A RUN computes one output position for up to 128 output channels:
//   CLR    clear all PE Vmems and the output buffer;
//   INTEG  integration phase: minfind streams the sorted input spikes into the PEs;
//   DRAIN  two cycles for the last spike to leave the PE pipeline;
//   PPU    bias addition; ENC fire phase in the spike encoder;
//   STORE  DMA writes the output spikes to DRAM at out_addr (skipped if none).
// The paper gives the phase order (integrate, post-process, encode, send the output
// spikes to DRAM); the register map and the handshakes are this design's.
// Timing: busy is high from the command write to the done pulse; a command written
// while busy is ignored. integ_cycles/enc_cycles count the cycles of the last RUN's
// integration and fire phases.
module top_control
  import snn_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  // host register port
  input  logic                     cfg_we,
  input  logic [4:0]               cfg_addr,
  input  logic [31:0]              cfg_wdata,
  output logic                     busy,
  output logic                     done,
  output logic [7:0]               spike_count,
  output logic [31:0]              integ_cycles,
  output logic [31:0]              enc_cycles,
  // run configuration
  output logic [IB_EA_W-1:0]       list_base [N_LIST],
  output logic [IB_EA_W-1:0]       list_len  [N_LIST],
  output logic [PE_ID_W:0]         active_pes,
  // phase control
  output logic                     pe_clr,
  output logic                     ob_clr,
  output logic                     mf_start,
  input  logic                     mf_done,
  output logic                     ppu_load,
  output logic                     enc_start,
  input  logic                     enc_done,
  input  logic [PE_ID_W:0]         ob_count,
  // DMA command
  output logic                     dma_valid,
  input  logic                     dma_ready,
  output dma_op_e                  dma_op,
  output logic [31:0]              dma_dram_addr,
  output logic [15:0]              dma_buf_addr,
  output logic [1:0]               dma_group,
  output logic [15:0]              dma_len,
  input  logic                     dma_done
);

  typedef enum logic [3:0] {
    S_IDLE, S_DMA, S_DMA_WAIT, S_CLR, S_INTEG, S_DRAIN, S_PPU, S_ENC_START, S_ENC,
    S_STORE, S_STORE_WAIT
  } state_e;

  localparam logic [4:0] A_ACTIVE = 5'd18, A_OUT = 5'd19, A_DRAM = 5'd20,
                         A_BUF = 5'd21, A_LEN = 5'd22, A_GRP = 5'd23, A_CMD = 5'd24;

  state_e      state;
  logic [31:0] out_addr;
  logic [31:0] r_dram;
  logic [15:0] r_buf;
  logic [15:0] r_len;
  logic [1:0]  r_grp;
  dma_op_e     r_op;
  logic [1:0]  drain;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < N_LIST; l++) begin
        list_base[l] <= '0;
        list_len[l]  <= '0;
      end
      active_pes <= (PE_ID_W+1)'(N_PE);
      out_addr   <= '0;
      r_dram     <= '0;
      r_buf      <= '0;
      r_len      <= '0;
      r_grp      <= '0;
    end else if (cfg_we && state == S_IDLE) begin
      if (cfg_addr < 5'(N_LIST))
        list_base[cfg_addr[3:0]] <= cfg_wdata[IB_EA_W-1:0];
      else if (cfg_addr < 5'(2 * N_LIST))
        list_len[4'(cfg_addr - 5'(N_LIST))] <= cfg_wdata[IB_EA_W-1:0];
      else case (cfg_addr)
        A_ACTIVE: active_pes <= (cfg_wdata > 32'(N_PE)) ? (PE_ID_W+1)'(N_PE)
                                                        : cfg_wdata[PE_ID_W:0];
        A_OUT:    out_addr   <= cfg_wdata;
        A_DRAM:   r_dram     <= cfg_wdata;
        A_BUF:    r_buf      <= cfg_wdata[15:0];
        A_LEN:    r_len      <= cfg_wdata[15:0];
        A_GRP:    r_grp      <= cfg_wdata[1:0];
        default: ;
      endcase
    end
  end

  always_comb begin
    pe_clr    = (state == S_CLR);
    ob_clr    = (state == S_CLR);
    mf_start  = (state == S_CLR);
    ppu_load  = (state == S_PPU);
    enc_start = (state == S_ENC_START);
    busy      = (state != S_IDLE);
    dma_valid = (state == S_DMA) || (state == S_STORE);
    if (state == S_STORE) begin
      dma_op        = DMA_STORE_OB;
      dma_dram_addr = out_addr;
      dma_buf_addr  = '0;
      dma_group     = '0;
      dma_len       = 16'(ob_count);
    end else begin
      dma_op        = r_op;
      dma_dram_addr = r_dram;
      dma_buf_addr  = r_buf;
      dma_group     = r_grp;
      dma_len       = r_len;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      done         <= 1'b0;
      r_op         <= DMA_LOAD_IB;
      drain        <= '0;
      spike_count  <= '0;
      integ_cycles <= '0;
      enc_cycles   <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (cfg_we && cfg_addr == A_CMD) begin
          if (cfg_wdata[2:0] == 3'd4) begin
            state        <= S_CLR;
            integ_cycles <= '0;
            enc_cycles   <= '0;
          end else if (cfg_wdata[2:0] < 3'd4) begin
            r_op  <= dma_op_e'(cfg_wdata[2:0]);
            state <= S_DMA;
          end
        end
        S_DMA:      if (dma_ready) state <= S_DMA_WAIT;
        S_DMA_WAIT: if (dma_done) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        S_CLR:   state <= S_INTEG;
        S_INTEG: begin
          integ_cycles <= integ_cycles + 1;
          if (mf_done) begin
            state <= S_DRAIN;
            drain <= 2'd2;
          end
        end
        S_DRAIN: begin
          drain <= drain - 1'b1;
          if (drain == 2'd1) state <= S_PPU;
        end
        S_PPU:       state <= S_ENC_START;
        S_ENC_START: state <= S_ENC;
        S_ENC: begin
          enc_cycles <= enc_cycles + 1;
          if (enc_done) begin
            spike_count <= 8'(ob_count);
            if (ob_count == 0) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              state <= S_STORE;
            end
          end
        end
        S_STORE:      if (dma_ready) state <= S_STORE_WAIT;
        S_STORE_WAIT: if (dma_done) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
