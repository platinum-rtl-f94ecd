// input_buffer -- the activation tile, one bank per PPE.
//
// Bank p holds the activations PPE p builds its LUTs from. A bank word is
// NCOLS signed activations: one input row for one group of NCOLS columns. Row
// r of bank p holds input k = (r / c) * L * c + p * c + (r % c), i.e. round
// r / c, element r % c of PPE p's chunk. The host writes one row of all banks
// per cycle; during construction each PPE reads its own bank at
// row_base + j (stage 2 of the construction pipeline), data one cycle later.
//
// Banking per PPE follows the paper ("divided into banks"); the layout and the
// write port are this design's.
module input_buffer #(
  parameter int unsigned L      = platinum_pkg::L_PPE,
  parameter int unsigned NCOLS  = platinum_pkg::NCOLS,
  parameter int unsigned ACT_W  = platinum_pkg::ACT_W,
  parameter int unsigned ROWS   = platinum_pkg::IN_ROWS,
  parameter int unsigned GROUPS = platinum_pkg::GROUPS,
  parameter int unsigned RW     = $clog2(ROWS),
  parameter int unsigned GW     = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic                    clk,
  input  logic                    wr_en,
  input  logic [RW-1:0]           wr_row,
  input  logic [GW-1:0]           wr_grp,
  input  logic signed [ACT_W-1:0] wr_data [L][NCOLS],
  input  logic                    rd_en   [L],
  input  logic [RW-1:0]           rd_row  [L],
  input  logic [GW-1:0]           rd_grp,
  output logic signed [ACT_W-1:0] rd_data [L][NCOLS]
);

  localparam int unsigned DEPTH = ROWS * GROUPS;
  localparam int unsigned AW    = $clog2(DEPTH);

  function automatic logic [AW-1:0] addr(input logic [RW-1:0] row, input logic [GW-1:0] grp);
    return AW'(row * GROUPS + grp);
  endfunction

  for (genvar p = 0; p < L; p++) begin : g_bank
    logic [NCOLS*ACT_W-1:0] mem [DEPTH];
    logic [NCOLS*ACT_W-1:0] q;
    logic [NCOLS*ACT_W-1:0] d;

    always_comb begin
      for (int i = 0; i < NCOLS; i++) d[i*ACT_W +: ACT_W] = wr_data[p][i];
    end

    always_ff @(posedge clk) begin
      if (wr_en) mem[addr(wr_row, wr_grp)] <= d;
      if (rd_en[p]) q <= mem[addr(rd_row[p], rd_grp)];
    end

    always_comb begin
      for (int i = 0; i < NCOLS; i++) rd_data[p][i] = q[i*ACT_W +: ACT_W];
    end
  end

endmodule
