// dram_model: behavioural model of the off-chip DRAM for testbenches (not part of
// the design). Word-addressed 32-bit memory; accepts a request when req_ready,
// which is randomly withheld about one cycle in four, and returns read data in
// order LAT cycles after the request. Not synthesizable.
module dram_model #(
  parameter int unsigned WORDS = 65536,
  parameter int unsigned LAT   = 3
) (
  input  logic        clk,
  input  logic        req_valid,
  output logic        req_ready,
  input  logic        req_we,
  input  logic [31:0] req_addr,
  input  logic [31:0] req_wdata,
  output logic        rsp_valid,
  output logic [31:0] rsp_rdata
);

  logic [31:0] mem [WORDS];
  logic        pv [LAT];
  logic [31:0] pd [LAT];

  initial begin
    for (int i = 0; i < LAT; i++) begin
      pv[i] = 1'b0;
      pd[i] = '0;
    end
    req_ready = 1'b1;
  end

  assign rsp_valid = pv[LAT-1];
  assign rsp_rdata = pd[LAT-1];

  always @(posedge clk) begin
    for (int i = LAT - 1; i > 0; i--) begin
      pv[i] <= pv[i-1];
      pd[i] <= pd[i-1];
    end
    pv[0] <= req_valid && req_ready && !req_we;
    pd[0] <= mem[req_addr % WORDS];
    if (req_valid && req_ready && req_we) mem[req_addr % WORDS] <= req_wdata;
    req_ready <= ($urandom_range(3) != 0);
  end

endmodule
