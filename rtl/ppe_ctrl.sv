// ppe_ctrl -- the controller inside one PPE.
//
// Construction (stages 2-4 of the build pipeline): for a broadcast entry
// {dst, src, j, sign} it issues the LUT read of src on port B and the input
// access of a[j] (stage 2), selects add or subtract for the adder (stage 3)
// and writes the registered sum to lut[dst] on port A (stage 4). dst and sign
// travel with the entry in pipeline registers. A clear pulse writes
// lut[0] = 0 before a construction, the table's only seed.
//
// Query: two encoded weight bytes arrive per cycle; their 7-bit indices go to
// ports A and B and their sign bits are kept for one cycle so the datapath can
// flip the values when they come out of the LUT.
//
// There is no hazard logic: the build path is ordered offline so that an
// entry is never read while it is still in flight (at most two entries).
// An assertion checks this rule. The stage split follows the paper; the clear
// pulse and the registers' exact placement are this design's choices.
module ppe_ctrl
  import platinum_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              lut_clear,
  // stage-1 broadcast
  input  logic              path_valid,
  input  path_entry_t       path,
  // query codes for rows 2q (port A) and 2q+1 (port B)
  input  logic              q_valid,
  input  wcode_t            q_code_a,
  input  wcode_t            q_code_b,
  // LUT ports
  output logic              lut_a_en,
  output logic              lut_a_we,
  output logic [LUT_AW-1:0] lut_a_addr,
  output logic              lut_a_wzero,  // write zero (clear) instead of the sum
  output logic              lut_b_en,
  output logic [LUT_AW-1:0] lut_b_addr,
  // input access (stage 2)
  output logic              in_en,
  output logic [J_W-1:0]    in_j,
  // adder control (stage 3)
  output logic              add_construct, // operands: lut[src] and a[j]
  output logic              add_sub,
  // query result control
  output logic              qres_valid,
  output logic              qres_sign_a,
  output logic              qres_sign_b
);

  logic              s3_valid, s3_sign;
  logic [LUT_AW-1:0] s3_dst;
  logic              s4_valid;
  logic [LUT_AW-1:0] s4_dst;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s3_valid    <= 1'b0;
      s3_sign     <= 1'b0;
      s3_dst      <= '0;
      s4_valid    <= 1'b0;
      s4_dst      <= '0;
      qres_valid  <= 1'b0;
      qres_sign_a <= 1'b0;
      qres_sign_b <= 1'b0;
    end else begin
      s3_valid    <= path_valid;
      s3_sign     <= path.sign;
      s3_dst      <= path.dst;
      s4_valid    <= s3_valid;
      s4_dst      <= s3_dst;
      qres_valid  <= q_valid;
      qres_sign_a <= q_code_a.sign;
      qres_sign_b <= q_code_b.sign;
    end
  end

  // Port A: stage-4 write, clear, or query read.
  always_comb begin
    lut_a_en    = 1'b0;
    lut_a_we    = 1'b0;
    lut_a_wzero = 1'b0;
    lut_a_addr  = q_code_a.idx;
    if (s4_valid) begin
      lut_a_en   = 1'b1;
      lut_a_we   = 1'b1;
      lut_a_addr = s4_dst;
    end else if (lut_clear) begin
      lut_a_en    = 1'b1;
      lut_a_we    = 1'b1;
      lut_a_wzero = 1'b1;
      lut_a_addr  = '0;
    end else if (q_valid) begin
      lut_a_en = 1'b1;
    end
  end

  // Port B: stage-2 source read or query read.
  assign lut_b_en   = path_valid || q_valid;
  assign lut_b_addr = path_valid ? path.src : q_code_b.idx;

  assign in_en         = path_valid;
  assign in_j          = path.j;
  assign add_construct = s3_valid;
  assign add_sub       = s3_valid && s3_sign;

  // The build path must not read an entry that is still being computed.
  a_no_raw_s3: assert property (@(posedge clk) disable iff (!rst_n)
                                (path_valid && s3_valid) |-> (path.src != s3_dst));
  a_no_raw_s4: assert property (@(posedge clk) disable iff (!rst_n)
                                (path_valid && s4_valid) |-> (path.src != s4_dst));
  // Construction and queries never overlap.
  a_phases:    assert property (@(posedge clk) disable iff (!rst_n)
                                !(q_valid && (path_valid || s3_valid || s4_valid || lut_clear)));

endmodule
