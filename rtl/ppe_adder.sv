// ppe_adder -- the adders of one PPE: NCOLS signed add/subtract lanes.
//
// sum[i] = sub ? x[i] - y[i] : x[i] + y[i], combinational, modulo 2^W.
// In the construction pipeline this is stage 3, lut[src] +/- a[j], for all
// NCOLS columns at once. During queries the same lanes are lent to the
// aggregator and form the first level of its adder tree (sub = 0). The lane
// count follows the paper; the width W is this design's choice (two bits over
// the LUT width, enough for the sum of two sign-flipped LUT values).
module ppe_adder #(
  parameter int unsigned NCOLS = platinum_pkg::NCOLS,
  parameter int unsigned W     = platinum_pkg::ADD_W
) (
  input  logic                sub,
  input  logic signed [W-1:0] x   [NCOLS],
  input  logic signed [W-1:0] y   [NCOLS],
  output logic signed [W-1:0] sum [NCOLS]
);

  always_comb begin
    for (int i = 0; i < NCOLS; i++) begin
      sum[i] = sub ? (x[i] - y[i]) : (x[i] + y[i]);
    end
  end

endmodule
