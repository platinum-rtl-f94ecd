// aggregator -- the pipelined reduction and accumulation unit.
//
// Each cycle it takes the partial sums of two output rows (2q and 2q+1) for
// NCOLS columns from all PPEs. The first tree level is done by the PPEs' own
// adders (each PPE adds the results of two neighbouring PPEs), so the inputs
// here are NIN = L/2 pair sums per row and column. Per row and column a
// pipelined adder_tree finishes the sum over all PPEs. Then the unit
// reads the two rows' accumulators from the output buffer, adds
// sum << shift (the bit-plane weight in bit-serial mode; 0 for ternary) and
// writes them back; a tag with first = 1 overwrites instead of adding.
//
// Timing: inputs with in_valid in cycle t reach the output buffer read in
// cycle t + $clog2(NIN) and are written in the cycle after. One row pair per
// cycle is accepted without stalls. busy is high while any pair is in flight.
//
// The adder tree, its sharing of PPE adders and accumulation into the output
// buffer follow the paper; the register per level, the shift for bit planes
// and the overwrite flag are this design's.
module aggregator
  import platinum_pkg::*;
#(
  parameter int unsigned NIN    = platinum_pkg::L_PPE / 2,
  parameter int unsigned NC     = platinum_pkg::NCOLS,
  parameter int unsigned IW     = platinum_pkg::ADD_W,
  parameter int unsigned OW     = platinum_pkg::OUT_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  agg_tag_t             in_tag,
  input  logic signed [IW-1:0] psum_a [NIN][NC],
  input  logic signed [IW-1:0] psum_b [NIN][NC],
  // output buffer read-modify-write
  output logic                 ob_rd_en,
  output logic [PAIR_W-1:0]    ob_rd_pair,
  output logic [GRP_W-1:0]     ob_rd_grp,
  input  logic signed [OW-1:0] ob_rd_data [2][NC],
  output logic                 ob_wr_en,
  output logic [PAIR_W-1:0]    ob_wr_pair,
  output logic [GRP_W-1:0]     ob_wr_grp,
  output logic signed [OW-1:0] ob_wr_data [2][NC],
  output logic                 busy
);

  localparam int unsigned LEVELS = (NIN > 1) ? $clog2(NIN) : 0;
  localparam int unsigned TW     = IW + LEVELS;

  // ---- adder trees: 2 rows x NC columns ----
  logic signed [TW-1:0] tsum [2][NC];

  for (genvar c = 0; c < NC; c++) begin : g_col
    logic signed [IW-1:0] ina [NIN];
    logic signed [IW-1:0] inb [NIN];
    always_comb begin
      for (int i = 0; i < NIN; i++) begin
        ina[i] = psum_a[i][c];
        inb[i] = psum_b[i][c];
      end
    end
    adder_tree #(.NIN(NIN), .IW(IW), .OW(TW)) u_tree_a (.clk, .in(ina), .sum(tsum[0][c]));
    adder_tree #(.NIN(NIN), .IW(IW), .OW(TW)) u_tree_b (.clk, .in(inb), .sum(tsum[1][c]));
  end

  // ---- tag pipeline, aligned with the tree ----
  logic     v_pipe [LEVELS+1];
  agg_tag_t t_pipe [LEVELS+1];

  assign v_pipe[0] = in_valid;
  assign t_pipe[0] = in_tag;

  for (genvar l = 0; l < LEVELS; l++) begin : g_pipe
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) v_pipe[l+1] <= 1'b0;
      else        v_pipe[l+1] <= v_pipe[l];
    end
    always_ff @(posedge clk) t_pipe[l+1] <= t_pipe[l];
  end

  logic     tree_valid;
  agg_tag_t tree_tag;
  assign tree_valid = v_pipe[LEVELS];
  assign tree_tag   = t_pipe[LEVELS];

  // ---- read: issue the accumulator read as the tree result appears ----
  assign ob_rd_en   = tree_valid && !tree_tag.first;
  assign ob_rd_pair = tree_tag.pair;
  assign ob_rd_grp  = tree_tag.grp;

  logic                 acc_valid;
  agg_tag_t             acc_tag;
  logic signed [TW-1:0] acc_sum [2][NC];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc_valid <= 1'b0;
    else        acc_valid <= tree_valid;
  end
  always_ff @(posedge clk) begin
    acc_tag <= tree_tag;
    acc_sum <= tsum;
  end

  // ---- modify-write ----
  always_comb begin
    for (int r = 0; r < 2; r++) begin
      for (int c = 0; c < NC; c++) begin
        logic signed [OW-1:0] shifted;
        shifted = OW'(acc_sum[r][c]) <<< acc_tag.shift;
        ob_wr_data[r][c] = (acc_tag.first ? '0 : ob_rd_data[r][c]) + shifted;
      end
    end
  end
  assign ob_wr_en   = acc_valid;
  assign ob_wr_pair = acc_tag.pair;
  assign ob_wr_grp  = acc_tag.grp;

  always_comb begin
    busy = in_valid || acc_valid;
    for (int l = 1; l <= LEVELS; l++) busy = busy || v_pipe[l];
  end

endmodule
