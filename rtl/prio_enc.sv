// prio_enc: lowest-index-first priority encoder (the "128to7 priority encoder" of
// the spike encoder). Purely combinational: idx is the position of the lowest set
// bit of req, valid is high when any bit is set (idx is 0 otherwise). When several
// Vmems cross the threshold in the same timestep, the lowest neuron ID fires first;
// the choice of lowest-first is this design's, the paper only names the encoder.
module prio_enc #(
  parameter int unsigned N = 128,
  parameter int unsigned W = $clog2(N)
) (
  input  logic [N-1:0] req,
  output logic [W-1:0] idx,
  output logic         valid
);

  always_comb begin
    idx   = '0;
    valid = 1'b0;
    for (int i = N - 1; i >= 0; i--) begin
      if (req[i]) begin
        idx   = W'(i);
        valid = 1'b1;
      end
    end
  end

endmodule
