// output_buffer -- the output tile: M_TILE x N_TILE accumulators.
//
// Two banks, even rows and odd rows, so that the two rows reduced per cycle
// can both be read and written in the same cycle. A bank word holds NCOLS
// accumulators of one row for one column group; word address
// = pair * GROUPS + grp. One synchronous read port (data the next cycle) and
// one write port, both addressing the same pair in both banks. A read and a
// write of the same word in one cycle return the old value.
//
// The paper gives the tile size; the banking and the 32-bit accumulator width
// are this design's.
module output_buffer #(
  parameter int unsigned NCOLS  = platinum_pkg::NCOLS,
  parameter int unsigned OUT_W  = platinum_pkg::OUT_W,
  parameter int unsigned PAIRS  = platinum_pkg::PAIRS_MAX,
  parameter int unsigned GROUPS = platinum_pkg::GROUPS,
  parameter int unsigned PW     = $clog2(PAIRS),
  parameter int unsigned GW     = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic                    clk,
  input  logic                    rd_en,
  input  logic [PW-1:0]           rd_pair,
  input  logic [GW-1:0]           rd_grp,
  output logic signed [OUT_W-1:0] rd_data [2][NCOLS],
  input  logic                    wr_en,
  input  logic [PW-1:0]           wr_pair,
  input  logic [GW-1:0]           wr_grp,
  input  logic signed [OUT_W-1:0] wr_data [2][NCOLS]
);

  localparam int unsigned DEPTH = PAIRS * GROUPS;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic [AW-1:0] ra, wa;
  assign ra = AW'(rd_pair * GROUPS + rd_grp);
  assign wa = AW'(wr_pair * GROUPS + wr_grp);

  for (genvar b = 0; b < 2; b++) begin : g_bank
    logic [NCOLS*OUT_W-1:0] mem [DEPTH];
    logic [NCOLS*OUT_W-1:0] q, d;

    always_comb begin
      for (int i = 0; i < NCOLS; i++) begin
        d[i*OUT_W +: OUT_W] = wr_data[b][i];
        rd_data[b][i]       = q[i*OUT_W +: OUT_W];
      end
    end

    always_ff @(posedge clk) begin
      if (wr_en) mem[wa] <= d;
      if (rd_en) q <= mem[ra];
    end
  end

endmodule
