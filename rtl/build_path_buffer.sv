// build_path_buffer -- storage for the offline-generated LUT build paths.
//
// Two paths are held side by side: one for the bit-serial (binary LUT) mode
// and one for ternary weights. The mode input selects which one the
// construction pipeline reads, which is how the accelerator switches paths
// between tasks. Each entry is a platinum_pkg::path_entry_t
// {finish, dst, src, j, sign}; a path ends with an entry whose finish bit is
// set.
//
// Interface: one write port (wr_sel picks the path) for loading from off-chip,
// one synchronous read port (data the cycle after rd_en). The two-path
// organisation follows the paper; depth and entry layout are this design's.
module build_path_buffer
  import platinum_pkg::*;
#(
  parameter int unsigned DEPTH = platinum_pkg::PATH_DEPTH,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic        clk,
  input  logic        wr_en,
  input  path_mode_e  wr_sel,
  input  logic [AW-1:0] wr_addr,
  input  path_entry_t wr_data,
  input  path_mode_e  mode,
  input  logic        rd_en,
  input  logic [AW-1:0] rd_addr,
  output path_entry_t rd_data
);

  path_entry_t path_bs  [DEPTH];
  path_entry_t path_ter [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      if (wr_sel == MODE_TERNARY) path_ter[wr_addr] <= wr_data;
      else                        path_bs[wr_addr]  <= wr_data;
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= (mode == MODE_TERNARY) ? path_ter[rd_addr] : path_bs[rd_addr];
  end

endmodule
