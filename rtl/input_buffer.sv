// input_buffer: 48KB input spike buffer of the input generator.
//
// Holds the time-sorted spike lists of the input pixels that the current output
// positions need; keeping them on chip lets them be reused by neighbouring output
// positions instead of re-reading DRAM. Stored as 32-bit words (two 16-bit spike
// entries {2'b0, ts[4:0], ch[8:0]}), written a word at a time by the DMA and read an
// entry at a time by the minfind unit: entry e lives in word e>>1, low half when e
// is even. The 48KB size follows the paper; the entry format is this design's.
// Read is synchronous: rdata is valid the cycle after re and is held otherwise.
module input_buffer #(
  parameter int unsigned WORDS = 12288,
  parameter int unsigned WA_W  = $clog2(WORDS)
) (
  input  logic            clk,
  input  logic            we,
  input  logic [WA_W-1:0] waddr,
  input  logic [31:0]     wdata,
  input  logic            re,
  input  logic [WA_W:0]   raddr,
  output logic [15:0]     rdata
);

  logic [1:0][15:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr[WA_W:1]][raddr[0]];
  end

endmodule
