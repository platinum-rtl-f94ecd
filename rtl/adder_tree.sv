// adder_tree -- pipelined binary adder tree, a helper of the aggregator.
//
// Sums NIN signed IW-bit inputs into one OW-bit result. The inputs are padded
// with zeros to the next power of two and reduced pairwise, one register per
// level, so a new set of inputs is accepted every cycle and its sum appears
// $clog2(NIN) cycles later (0 cycles, combinational, for NIN = 1).
module adder_tree #(
  parameter int unsigned NIN = 26,
  parameter int unsigned IW  = 10,
  parameter int unsigned OW  = IW + ((NIN > 1) ? $clog2(NIN) : 0)
) (
  input  logic                 clk,
  input  logic signed [IW-1:0] in  [NIN],
  output logic signed [OW-1:0] sum
);

  localparam int unsigned LEVELS = (NIN > 1) ? $clog2(NIN) : 0;
  localparam int unsigned NP     = 1 << LEVELS;   // padded leaf count

  // Heap layout: node n has children 2n+1 and 2n+2; leaves are NP-1 .. 2NP-2.
  logic signed [OW-1:0] leaf [NP];

  always_comb begin
    for (int i = 0; i < NP; i++) leaf[i] = (i < NIN) ? OW'(in[i]) : '0;
  end

  if (LEVELS == 0) begin : g_single
    assign sum = leaf[0];
  end else begin : g_tree
    logic signed [OW-1:0] node [NP-1];

    function automatic logic signed [OW-1:0] child(input int c);
      return (c >= int'(NP) - 1) ? leaf[c - (int'(NP) - 1)] : node[c];
    endfunction

    always_ff @(posedge clk) begin
      for (int n = 0; n < int'(NP) - 1; n++) node[n] <= child(2*n+1) + child(2*n+2);
    end
    assign sum = node[0];
  end

endmodule
