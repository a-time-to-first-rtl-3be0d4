// spike_encoder: TTFS encoder of the fire phase.
//
// Turns 128 membrane voltages into at most one spike per neuron, the spike time
// encoding the value: a neuron fires at the first encoding timestep t (1..T) at which
// its Vmem reaches the dynamic threshold theta0 * 2^(-(t-1)/tau). Following the
// paper's spike encoder, it is built from a Vmem buffer, one comparator per neuron, a
// threshold LUT indexed by the timestep, a 128-to-7 priority encoder and a decoder
// that resets the Vmem that has just fired:
//   * start copies the Vmems into the buffer, negative ones as zero, and sets t = 1;
//   * in a cycle where some Vmem is at or above the threshold, the priority encoder
//     picks the lowest such neuron, its (ID, t) is emitted and its Vmem is reset;
//   * in a cycle where none is, t advances by one;
//   * encoding ends when every Vmem is zero or after timestep T.
// The threshold values, lowest-ID-first order and one-spike-per-cycle rate are this
// design's choices. Timing: spk_valid/spk_id/spk_ts are registered; done pulses one
// cycle after the last encoding cycle; busy is high in between.
module spike_encoder
  import snn_pkg::*;
#(
  parameter int unsigned N     = N_PE,
  parameter int unsigned TSTEP = T_STEPS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  vmem_t                vmem_in [N],
  output logic                 spk_valid,
  output logic [$clog2(N)-1:0] spk_id,
  output logic [TS_W-1:0]      spk_ts,
  output logic                 busy,
  output logic                 done
);

  localparam int unsigned IW = $clog2(N);

  vmem_t            vbuf [N];
  logic [TS_W-1:0]  t;
  logic [FRAC_W:0]  thr_rom [TSTEP];
  logic [FRAC_W:0]  thr;
  logic [N-1:0]     over;
  logic [N-1:0]     nonzero;
  logic [IW-1:0]    fire_id;
  logic             fire;

  // threshold LUT: entry k holds theta0 * 2^(-k/tau)
  for (genvar k = 0; k < TSTEP; k++) begin : g_thr
    assign thr_rom[k] = threshold(TS_W'(k + 1));
  end

  always_comb begin
    thr = thr_rom[t - 1'b1];
    for (int i = 0; i < N; i++) begin
      // comparator: Vmem < threshold means no spike
      over[i]    = !(vbuf[i] < $signed({{(ACC_W-FRAC_W-1){1'b0}}, thr}));
      nonzero[i] = (vbuf[i] != '0);
    end
  end

  prio_enc #(.N(N)) u_pe (
    .req   (over),
    .idx   (fire_id),
    .valid (fire)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      t         <= TS_W'(1);
      spk_valid <= 1'b0;
      spk_id    <= '0;
      spk_ts    <= '0;
      for (int i = 0; i < N; i++) vbuf[i] <= '0;
    end else begin
      done      <= 1'b0;
      spk_valid <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        t    <= TS_W'(1);
        for (int i = 0; i < N; i++)
          vbuf[i] <= vmem_in[i][ACC_W-1] ? '0 : vmem_in[i];
      end else if (busy) begin
        if (fire) begin
          spk_valid     <= 1'b1;
          spk_id        <= fire_id;
          spk_ts        <= t;
          vbuf[fire_id] <= '0;   // decoder: reset the neuron that fired
        end else if (nonzero == '0 || t == TS_W'(TSTEP)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          t <= t + 1'b1;
        end
      end
    end
  end

endmodule
