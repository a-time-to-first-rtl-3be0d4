// weight_buffer: the 90KB weight SRAM of one 32-PE group.
//
// Each row holds the 32 five-bit weights that connect one input neuron (neuron ID of
// the sorted spike = kernel position * 512 + channel) to the 32 output neurons of the
// group, so one read per spike feeds all 32 PEs. 4608 rows x 160 bits = 90KB, which
// is 3x3x512 inputs: the size follows the paper, the row organisation is derived.
// The array is stored as 5 words of 32 bits per row so the DMA can write it word by
// word (wsel picks the word). Read is synchronous: rdata is valid the cycle after re
// and holds its value while re is low.
module weight_buffer #(
  parameter int unsigned DEPTH  = 4608,
  parameter int unsigned LANES  = 32,
  parameter int unsigned W_BITS = 5,
  parameter int unsigned AW     = $clog2(DEPTH),
  parameter int unsigned WORDS  = (LANES * W_BITS) / 32
) (
  input  logic                      clk,
  input  logic                      re,
  input  logic [AW-1:0]             raddr,
  output logic [LANES*W_BITS-1:0]   rdata,
  input  logic                      we,
  input  logic [AW-1:0]             waddr,
  input  logic [$clog2(WORDS)-1:0]  wsel,
  input  logic [31:0]               wdata
);

  logic [WORDS-1:0][31:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr][wsel] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
