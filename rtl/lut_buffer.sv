// lut_buffer -- the lookup table of one PPE.
//
// DEPTH entries, each holding NCOLS signed LUT_W-bit partial sums (one per
// input column the LUT was built for). Two ports, as in the paper: port A reads
// or writes, port B only reads. During construction port B reads the source
// entry and port A writes the destination; during queries both ports read, so
// one PPE answers two weight queries per cycle.
//
// Timing: reads are synchronous, data appears the cycle after the address.
// A read and a write of the same entry in one cycle return the old value
// (the build path is generated so that this never matters). The array is a
// plain register file standing in for the SRAM macro.
module lut_buffer #(
  parameter int unsigned DEPTH = platinum_pkg::LUT_DEPTH,
  parameter int unsigned AW    = $clog2(DEPTH),
  parameter int unsigned WIDTH = platinum_pkg::NCOLS * platinum_pkg::LUT_W
) (
  input  logic             clk,
  // port A: read-write
  input  logic             a_en,
  input  logic             a_we,
  input  logic [AW-1:0]    a_addr,
  input  logic [WIDTH-1:0] a_wdata,
  output logic [WIDTH-1:0] a_rdata,
  // port B: read-only
  input  logic             b_en,
  input  logic [AW-1:0]    b_addr,
  output logic [WIDTH-1:0] b_rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) begin
      if (a_we) mem[a_addr] <= a_wdata;
      else      a_rdata     <= mem[a_addr];
    end
  end

  always_ff @(posedge clk) begin
    if (b_en) b_rdata <= mem[b_addr];
  end

endmodule
