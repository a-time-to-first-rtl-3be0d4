// snn_pkg: constants and types shared by the TTFS log-domain SNN processor.
//
// The processor follows a SpinalFlow-style dataflow: time-sorted input spikes are
// broadcast to 128 processing elements (four groups of 32, each group with its own
// weight buffer), every PE accumulates one output neuron, and a spike encoder turns
// the resulting membrane voltages (Vmem) back into time-to-first-spike (TTFS) spikes.
//
// Number representation (T = 24 timesteps, tau = 4, 5-bit log weights with base
// 2^-1/2 follow the paper; the fixed-point widths are this design's choice):
//   * a spike at encoding timestep t (1..T) stands for the value 2^(-(t-1)/tau);
//   * a weight code {sign, m[3:0]} stands for (-1)^sign * 2^(-m/2); m = 15 is zero;
//   * Vmem is ACC_W-bit two's complement with FRAC_W fraction bits, theta0 = 1.0.
// The product of a spike and a weight is then 2^-(p/tau) with p = (t-1) + 2m, which
// the PE evaluates as FRAC_LUT[p mod 4] >> (p div 4): no multiplier is needed.
package snn_pkg;

  // Array organisation
  localparam int unsigned N_PE         = 128;
  localparam int unsigned N_GROUP      = 4;
  localparam int unsigned PE_PER_GROUP = N_PE / N_GROUP;   // 32
  localparam int unsigned PE_ID_W      = $clog2(N_PE);     // 7

  // TTFS kernel and weight quantisation
  localparam int unsigned T_STEPS  = 24;
  localparam int unsigned TAU      = 4;
  localparam int unsigned TAU_LOG2 = $clog2(TAU);
  localparam int unsigned TS_W     = 5;   // holds 1..T_STEPS
  localparam int unsigned W_BITS   = 5;   // sign + 4-bit log magnitude
  localparam int unsigned WMAG_W   = W_BITS - 1;
  localparam int unsigned W_ZERO   = (1 << WMAG_W) - 1;    // magnitude code for 0
  localparam int unsigned W_SCALE  = 2;   // tau / (1/log2(a_w)) = 4 / 2

  // Fixed point
  localparam int unsigned ACC_W  = 24;
  localparam int unsigned FRAC_W = 16;

  // Input generator
  localparam int unsigned N_LIST      = 9;    // lists merged by the minfind unit
  localparam int unsigned CH_W        = 9;    // channel field of an input spike
  localparam int unsigned CH_PER_LIST = 1 << CH_W;          // 512
  localparam int unsigned NID_W       = 13;   // weight-buffer row = list*512 + ch
  localparam int unsigned WB_DEPTH    = N_LIST * CH_PER_LIST; // 4608 rows = 90KB
  localparam int unsigned WB_ROW_W    = PE_PER_GROUP * W_BITS; // 160 bits
  localparam int unsigned WB_WORDS    = WB_ROW_W / 32;         // 5 words per row
  localparam int unsigned IB_WORDS    = 12288;                 // 48KB of 32-bit words
  localparam int unsigned IB_WA_W     = $clog2(IB_WORDS);      // 14
  localparam int unsigned IB_EA_W     = IB_WA_W + 1;           // 15, 16-bit entries
  localparam int unsigned OB_DEPTH    = N_PE;                  // 192B / 12-bit entries

  typedef logic signed [ACC_W-1:0] vmem_t;

  // Input spike as stored in the input buffer (16 bits)
  typedef struct packed {
    logic [1:0]      rsvd;
    logic [TS_W-1:0] ts;
    logic [CH_W-1:0] ch;
  } in_spike_t;

  // Sorted spike as broadcast to the PE array
  typedef struct packed {
    logic [TS_W-1:0]  ts;
    logic [NID_W-1:0] nid;
  } spike_t;

  // Output spike as held in the output buffer (12 bits)
  typedef struct packed {
    logic [PE_ID_W-1:0] id;
    logic [TS_W-1:0]    ts;
  } out_spike_t;

  typedef struct packed {
    logic             sign;
    logic [WMAG_W-1:0] mag;
  } wcode_t;

  // round(2^(-f/4) * 2^FRAC_W), f = 0..3
  function automatic logic [FRAC_W:0] frac_lut(input logic [TAU_LOG2-1:0] f);
    case (f)
      2'd0:    return 17'd65536;
      2'd1:    return 17'd55109;
      2'd2:    return 17'd46341;
      default: return 17'd38968;
    endcase
  endfunction

  // Threshold of encoding timestep t (1..T): theta0 * 2^(-(t-1)/tau)
  function automatic logic [FRAC_W:0] threshold(input logic [TS_W-1:0] t);
    logic [TS_W-1:0] e;
    e = t - 1'b1;
    return frac_lut(e[TAU_LOG2-1:0]) >> (e >> TAU_LOG2);
  endfunction

  // DMA operations
  typedef enum logic [2:0] {
    DMA_LOAD_IB   = 3'd0,
    DMA_LOAD_WB   = 3'd1,
    DMA_LOAD_BIAS = 3'd2,
    DMA_STORE_OB  = 3'd3
  } dma_op_e;

endpackage
