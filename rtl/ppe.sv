// ppe -- Platinum Processing Element: one LUT, its controller and its adders.
//
// Construction: the PPE follows the broadcast build path. For each entry
// {dst, src, j, sign} it computes lut[dst] = lut[src] +/- a[j] for all NCOLS
// input columns at once, in the pipeline
//   stage 2: read lut[src] (port B) and a[j] (input bank, via in_j)
//   stage 3: add or subtract (ppe_adder), result registered
//   stage 4: write lut[dst] (port A), truncated to LUT_W bits.
// lut_clear writes lut[0] = 0 first. Sums wrap modulo 2^LUT_W.
//
// Query: each cycle two weight codes arrive, one per LUT port. One cycle later
// qa/qb carry FLIP(lut[idx], sign) for the two rows, NCOLS values each, widened
// to LUT_W+1 bits so the negation is exact.
//
// Adder sharing: while no construction is in flight the adders add share_x
// and share_y instead; the top wires them so that each PPE computes the first
// level of the aggregator's adder tree. share_sum is the registered result,
// one cycle after the operands.
//
// The construction and query behaviour follow the paper. The register
// placement, the wrap-around and which neighbour values a PPE adds are this
// design's choices.
module ppe
  import platinum_pkg::*;
#(
  parameter int unsigned NCOLS_P = platinum_pkg::NCOLS,
  parameter int unsigned LUT_W_P = platinum_pkg::LUT_W,
  parameter int unsigned ACT_W_P = platinum_pkg::ACT_W
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              lut_clear,
  input  logic                              path_valid,
  input  path_entry_t                       path,
  // input access
  output logic                              in_en,
  output logic [J_W-1:0]                    in_j,
  input  logic signed [ACT_W_P-1:0]         in_act    [NCOLS_P],
  // queries
  input  logic                              q_valid,
  input  wcode_t                            q_code_a,
  input  wcode_t                            q_code_b,
  output logic                              q_out_valid,
  output logic signed [LUT_W_P:0]           qa        [NCOLS_P],
  output logic signed [LUT_W_P:0]           qb        [NCOLS_P],
  // adders lent to the aggregator
  input  logic signed [LUT_W_P:0]           share_x   [NCOLS_P],
  input  logic signed [LUT_W_P:0]           share_y   [NCOLS_P],
  output logic signed [LUT_W_P+1:0]         share_sum [NCOLS_P]
);

  localparam int unsigned AW = LUT_W_P + 2;   // adder width
  localparam int unsigned EW = NCOLS_P * LUT_W_P;

  logic              lut_a_en, lut_a_we, lut_a_wzero, lut_b_en;
  logic [LUT_AW-1:0] lut_a_addr, lut_b_addr;
  logic [EW-1:0]     lut_a_wdata, lut_a_rdata, lut_b_rdata;
  logic              add_construct, add_sub;
  logic              qres_sign_a, qres_sign_b;

  ppe_ctrl u_ctrl (
    .clk, .rst_n, .lut_clear, .path_valid, .path,
    .q_valid, .q_code_a, .q_code_b,
    .lut_a_en, .lut_a_we, .lut_a_addr, .lut_a_wzero,
    .lut_b_en, .lut_b_addr,
    .in_en, .in_j,
    .add_construct, .add_sub,
    .qres_valid(q_out_valid), .qres_sign_a, .qres_sign_b
  );

  lut_buffer #(.DEPTH(LUT_DEPTH), .AW(LUT_AW), .WIDTH(EW)) u_lut (
    .clk,
    .a_en(lut_a_en), .a_we(lut_a_we), .a_addr(lut_a_addr),
    .a_wdata(lut_a_wdata), .a_rdata(lut_a_rdata),
    .b_en(lut_b_en), .b_addr(lut_b_addr), .b_rdata(lut_b_rdata)
  );

  logic signed [AW-1:0] add_x [NCOLS_P];
  logic signed [AW-1:0] add_y [NCOLS_P];
  logic signed [AW-1:0] add_s [NCOLS_P];
  logic signed [AW-1:0] res_q [NCOLS_P];

  ppe_adder #(.NCOLS(NCOLS_P), .W(AW)) u_add (
    .sub(add_sub), .x(add_x), .y(add_y), .sum(add_s)
  );

  // Query results, sign-flipped (from registered LUT data only).
  always_comb begin
    for (int i = 0; i < NCOLS_P; i++) begin
      logic signed [LUT_W_P-1:0] a_val, b_val;
      a_val = lut_a_rdata[i*LUT_W_P +: LUT_W_P];
      b_val = lut_b_rdata[i*LUT_W_P +: LUT_W_P];
      qa[i] = qres_sign_a ? -(LUT_W_P+1)'(a_val) : (LUT_W_P+1)'(a_val);
      qb[i] = qres_sign_b ? -(LUT_W_P+1)'(b_val) : (LUT_W_P+1)'(b_val);
    end
  end

  // Adder operands: construction (lut[src], a[j]) or lent to the aggregator.
  always_comb begin
    for (int i = 0; i < NCOLS_P; i++) begin
      if (add_construct) begin
        add_x[i] = AW'($signed(lut_b_rdata[i*LUT_W_P +: LUT_W_P]));
        add_y[i] = AW'(in_act[i]);
      end else begin
        add_x[i] = AW'(share_x[i]);
        add_y[i] = AW'(share_y[i]);
      end
    end
  end

  // Stage-4 write data and the registered shared sum.
  always_comb begin
    for (int i = 0; i < NCOLS_P; i++) begin
      lut_a_wdata[i*LUT_W_P +: LUT_W_P] = lut_a_wzero ? '0 : res_q[i][LUT_W_P-1:0];
      share_sum[i] = res_q[i];
    end
  end

  always_ff @(posedge clk) begin
    res_q <= add_s;
  end

endmodule
