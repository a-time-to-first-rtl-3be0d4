// output_buffer: 192B buffer of the output spikes of one fire phase.
//
// The spike encoder appends one entry {neuron ID[6:0], timestep[4:0]} per output
// spike; 128 entries x 12 bits = 192B, so it holds one spike for every neuron of
// the array and cannot overflow (each neuron fires at most once). The DMA then
// reads the entries out in order. The size follows the paper; the append/clear
// behaviour is this design's. count gives the number of stored spikes; clr empties
// the buffer. Read is synchronous, one cycle latency.
module output_buffer
  import snn_pkg::*;
#(
  parameter int unsigned DEPTH = OB_DEPTH,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          we,
  input  out_spike_t    wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output out_spike_t    rdata,
  output logic [AW:0]   count
);

  out_spike_t mem [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   count <= '0;
    else if (clr) count <= '0;
    else if (we && count < (AW+1)'(DEPTH)) count <= count + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (we && !clr && count < (AW+1)'(DEPTH)) mem[count[AW-1:0]] <= wdata;
    if (re) rdata <= mem[raddr];
  end

  // a fire phase never produces more spikes than neurons
  assert property (@(posedge clk) disable iff (!rst_n) we && !clr |-> count < (AW+1)'(DEPTH));

endmodule
