// priority_encoder: index of the first (lowest-index) set bit.
//
// Used twice in the readout: inside each column it picks the first hit
// pixel of the copied hit flags, and in the state machine it picks the
// first column whose buffer holds a hit. The paper speaks of "the first
// hit" and "the first column"; taking the lowest index as first is this
// design's choice.
//
// Interface: req (N bits) in; found = |req; idx = index of the lowest set
// bit (0 when none). Purely combinational.
module priority_encoder #(
  parameter int unsigned N  = 40,
  parameter int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic [N-1:0]  req,
  output logic          found,
  output logic [IW-1:0] idx
);

  always_comb begin
    found = 1'b0;
    idx   = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (req[i]) begin
        found = 1'b1;
        idx   = IW'(i);
      end
    end
  end

endmodule
