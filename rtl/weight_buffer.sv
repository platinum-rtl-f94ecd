// weight_buffer -- the encoded weight tile, one bank per PPE.
//
// Each weight byte (platinum_pkg::wcode_t) is a sign bit and a 7-bit LUT
// index: five ternary weights, or seven bits of one bit plane in the
// bit-serial mode, packed offline. A bank word holds the bytes of two
// consecutive output rows (2q in the low byte, 2q+1 in the high byte), so one
// read per cycle feeds both LUT ports of the PPE. Word address
// = segment * PAIRS + q, where a segment is one (k-round, bit plane).
//
// Interface: the host writes one word in every bank per cycle; the controller
// reads all banks at one address, data the cycle after rd_en. Byte packing
// follows the paper; the two-row word and address layout are this design's.
module weight_buffer
  import platinum_pkg::*;
#(
  parameter int unsigned L     = platinum_pkg::L_PPE,
  parameter int unsigned DEPTH = platinum_pkg::WB_DEPTH,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  wcode_t        wr_data [L][2],
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output wcode_t        rd_data [L][2]
);

  for (genvar p = 0; p < L; p++) begin : g_bank
    logic [15:0] mem [DEPTH];
    logic [15:0] q;

    always_ff @(posedge clk) begin
      if (wr_en) mem[wr_addr] <= {wr_data[p][1], wr_data[p][0]};
      if (rd_en) q <= mem[rd_addr];
    end

    assign rd_data[p][0] = wcode_t'(q[7:0]);
    assign rd_data[p][1] = wcode_t'(q[15:8]);
  end

endmodule
