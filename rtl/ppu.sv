// ppu: post processing unit between the PE array and the spike encoder.
//
// At the end of an integration phase the PPU takes the 128 membrane voltages, adds
// each neuron's bias b_j (the bias term of the integration equation), saturates the
// sum to the Vmem range and clears the Vmem of PEs that were gated off, so that
// unused neurons cannot fire. The paper only names this unit; bias addition and
// masking are the simplest function consistent with its equations and are this
// design's choice. Biases live in a 128-entry register file written by the DMA
// (low ACC_W bits of each 32-bit word, two's complement, FRAC_W fraction bits).
//
// Timing: load in cycle c -> vmem_out valid and out_valid pulsed in cycle c+1;
// vmem_out holds its value until the next load.
module ppu
  import snn_pkg::*;
#(
  parameter int unsigned NPE = N_PE
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       load,
  input  logic [$clog2(NPE+1)-1:0]   active_pes,
  input  vmem_t                      vmem_in [NPE],
  input  logic                       bias_we,
  input  logic [$clog2(NPE)-1:0]     bias_waddr,
  input  logic [31:0]                bias_wdata,
  output vmem_t                      vmem_out [NPE],
  output logic                       out_valid
);

  vmem_t bias [NPE];

  function automatic vmem_t sat_add(input vmem_t a, input vmem_t b);
    logic signed [ACC_W:0] s;
    s = {a[ACC_W-1], a} + {b[ACC_W-1], b};
    if (s[ACC_W] != s[ACC_W-1])
      return s[ACC_W] ? {1'b1, {(ACC_W-1){1'b0}}} : {1'b0, {(ACC_W-1){1'b1}}};
    return s[ACC_W-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NPE; i++) bias[i] <= '0;
    end else if (bias_we) begin
      bias[bias_waddr] <= bias_wdata[ACC_W-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < NPE; i++) vmem_out[i] <= '0;
    end else begin
      out_valid <= load;
      if (load) begin
        for (int i = 0; i < NPE; i++)
          vmem_out[i] <= (i < int'(active_pes)) ? sat_add(vmem_in[i], bias[i]) : '0;
      end
    end
  end

endmodule
