// log_pe: logarithmic processing element (one output neuron).
//
// For every incoming spike the PE adds the contribution w * 2^(-(t-1)/tau) to its
// membrane voltage without a multiplier. The spike timestep and the weight's log
// magnitude are added into an exponent p = (t-1) + W_SCALE*m (unit: 1/tau octave).
// The fractional part p[1:0] selects a 4-entry LUT holding 2^(-f/4), the integer
// part p>>2 right-shifts the LUT output, the weight sign negates it, and the result
// is added into the Vmem register. This is the PE of the paper's architecture
// figure (adder, LUT, shifter, sign, accumulator); the widths, the exponent offset
// of -1 (timesteps start at 1) and the zero-weight code m = 15 are this design's.
//
// Interface: en qualifies (ts, wcode) for one accumulation; clr clears Vmem and has
// priority over en. Timing: one spike per cycle, vmem is registered and shows the
// contribution of a spike one cycle after en. Vmem saturates at the ACC_W range.
module log_pe
  import snn_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clr,
  input  logic            en,
  input  logic [TS_W-1:0] ts,
  input  wcode_t          wcode,
  output vmem_t           vmem
);

  localparam int unsigned P_W = TS_W + WMAG_W + 1;

  logic [P_W-1:0]    p;         // exponent in 1/tau octaves
  logic [P_W-1:0]    p_int;
  logic [FRAC_W:0]   lut_q;
  logic [FRAC_W:0]   mag_q;
  vmem_t             term;
  logic signed [ACC_W:0] sum;
  vmem_t             sum_sat;

  always_comb begin
    p     = P_W'(ts) - P_W'(1) + P_W'(W_SCALE) * P_W'(wcode.mag);
    p_int = p >> TAU_LOG2;
    lut_q = frac_lut(p[TAU_LOG2-1:0]);
    mag_q = (wcode.mag == WMAG_W'(W_ZERO)) ? '0 : (lut_q >> p_int);
    term  = wcode.sign ? -vmem_t'(mag_q) : vmem_t'(mag_q);
    sum   = {vmem[ACC_W-1], vmem} + {term[ACC_W-1], term};
    // saturate on signed overflow
    if (sum[ACC_W] != sum[ACC_W-1])
      sum_sat = sum[ACC_W] ? {1'b1, {(ACC_W-1){1'b0}}} : {1'b0, {(ACC_W-1){1'b1}}};
    else
      sum_sat = sum[ACC_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   vmem <= '0;
    else if (clr) vmem <= '0;
    else if (en)  vmem <= sum_sat;
  end

endmodule
