// platinum_top -- the Platinum accelerator: L PPEs around shared buffers.
//
// Blocks and data movement (one computation round):
//   build_path_buffer -> construct_seq (stage 1) -> broadcast to all PPEs
//   input_buffer bank p -> PPE p (stage 2 input access); each PPE builds a
//       128-entry LUT of NCOLS-wide partial sums from its c inputs
//   weight_buffer bank p -> PPE p, two weight bytes per cycle (two LUT ports)
//   PPE 2p adds the port-A results of PPEs 2p, 2p+1 (row 2q); PPE 2p+1 adds
//       their port-B results (row 2q+1): the PPE adders lent to the aggregator
//   aggregator: adder trees over the L/2 pair sums, accumulate into
//       output_buffer (two rows x NCOLS columns per cycle)
//   platinum_ctrl sequences rounds, bit planes and row pairs.
// The mode selects the build path (ternary, c = 5, or bit-serial binary,
// c = 7) at run time; the hardware is otherwise the same in both modes.
//
// The off-chip side is not part of this design: the host loads the build
// paths, the input tile and the encoded weight tile through the write ports,
// sets cfg and pulses start, waits for done and reads the output tile through
// out_rd_* (data one cycle after out_rd_en; only while not busy).
//
// Peak rate: 2 rows x L PPEs x NCOLS columns LUT queries per cycle. The
// organisation follows the paper; port protocol, layouts and widths that the
// paper does not give are this design's (see the module headers).
module platinum_top
  import platinum_pkg::*;
#(
  parameter int unsigned L      = platinum_pkg::L_PPE,
  parameter int unsigned M_T    = platinum_pkg::M_TILE,
  parameter int unsigned K_T    = platinum_pkg::K_TILE,
  parameter int unsigned N_T    = platinum_pkg::N_TILE
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // operation
  input  logic                   start,
  input  cfg_t                   cfg,
  output logic                   busy,
  output logic                   done,
  // build path load
  input  logic                   path_wr_en,
  input  path_mode_e             path_wr_sel,
  input  logic [PATH_AW-1:0]     path_wr_addr,
  input  path_entry_t            path_wr_data,
  // input tile load: one row of every bank
  input  logic                   in_wr_en,
  input  logic [$clog2(K_T/L)-1:0] in_wr_row,
  input  logic [GRP_W-1:0]       in_wr_grp,
  input  logic signed [ACT_W-1:0] in_wr_data [L][NCOLS],
  // weight tile load: one word of every bank
  input  logic                   w_wr_en,
  input  logic [$clog2((M_T/2)*(K_T/(L*C_TER)))-1:0] w_wr_addr,
  input  wcode_t                 w_wr_data [L][2],
  // output tile read
  input  logic                   out_rd_en,
  input  logic [PAIR_W-1:0]      out_rd_pair,
  input  logic [GRP_W-1:0]       out_rd_grp,
  output logic signed [OUT_W-1:0] out_rd_data [2][NCOLS]
);

  localparam int unsigned PAIRS  = M_T / 2;
  localparam int unsigned GRPS   = N_T / NCOLS;
  localparam int unsigned ROWS   = K_T / L;
  localparam int unsigned RW     = $clog2(ROWS);
  localparam int unsigned WDEPTH = PAIRS * (K_T / (L * C_TER));
  localparam int unsigned WB_AW  = $clog2(WDEPTH);
  localparam int unsigned PW     = $clog2(PAIRS);
  localparam int unsigned NH     = L / 2;

  // ---------------- controller ----------------
  path_mode_e        mode;
  logic              lut_clear, cs_start, cs_done, cs_busy;
  logic [RW-1:0]     in_row_base;
  logic [GRP_W-1:0]  in_grp;
  logic              wb_rd_en, ppe_q_valid, agg_valid, agg_busy;
  logic [WB_AW-1:0]  wb_rd_addr;
  agg_tag_t          agg_tag;

  platinum_ctrl #(.PAIRS(PAIRS), .WB_AW(WB_AW), .RW(RW)) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done, .mode,
    .lut_clear, .cs_start, .cs_done, .in_row_base, .in_grp,
    .wb_rd_en, .wb_rd_addr, .ppe_q_valid, .agg_valid, .agg_tag, .agg_busy
  );

  // ---------------- build path and stage 1 ----------------
  logic              bp_rd_en;
  logic [PATH_AW-1:0] bp_rd_addr;
  path_entry_t       bp_rd_data;
  logic              path_valid;
  path_entry_t       path;

  build_path_buffer u_bpb (
    .clk, .wr_en(path_wr_en), .wr_sel(path_wr_sel), .wr_addr(path_wr_addr),
    .wr_data(path_wr_data), .mode, .rd_en(bp_rd_en), .rd_addr(bp_rd_addr),
    .rd_data(bp_rd_data)
  );

  construct_seq u_cseq (
    .clk, .rst_n, .start(cs_start), .rd_en(bp_rd_en), .rd_addr(bp_rd_addr),
    .rd_data(bp_rd_data), .path_valid, .path, .busy(cs_busy), .done(cs_done)
  );

  // ---------------- buffers ----------------
  logic                    in_rd_en  [L];
  logic [RW-1:0]           in_rd_row [L];
  logic signed [ACT_W-1:0] in_rd_data [L][NCOLS];
  logic [J_W-1:0]          ppe_in_j  [L];

  input_buffer #(.L(L), .NCOLS(NCOLS), .ACT_W(ACT_W), .ROWS(ROWS), .GROUPS(GRPS),
                 .RW(RW), .GW(GRP_W)) u_inbuf (
    .clk, .wr_en(in_wr_en), .wr_row(in_wr_row), .wr_grp(in_wr_grp), .wr_data(in_wr_data),
    .rd_en(in_rd_en), .rd_row(in_rd_row), .rd_grp(in_grp), .rd_data(in_rd_data)
  );

  wcode_t wb_rd_data [L][2];

  weight_buffer #(.L(L), .DEPTH(WDEPTH), .AW(WB_AW)) u_wbuf (
    .clk, .wr_en(w_wr_en), .wr_addr(w_wr_addr), .wr_data(w_wr_data),
    .rd_en(wb_rd_en), .rd_addr(wb_rd_addr), .rd_data(wb_rd_data)
  );

  // ---------------- PPE array ----------------
  logic signed [LUT_W:0]   qa        [L][NCOLS];
  logic signed [LUT_W:0]   qb        [L][NCOLS];
  logic signed [LUT_W:0]   share_x   [L][NCOLS];
  logic signed [LUT_W:0]   share_y   [L][NCOLS];
  logic signed [LUT_W+1:0] share_sum [L][NCOLS];
  logic                    q_out_valid [L];

  for (genvar p = 0; p < L; p++) begin : g_ppe
    logic in_en;

    ppe u_ppe (
      .clk, .rst_n, .lut_clear, .path_valid, .path,
      .in_en, .in_j(ppe_in_j[p]), .in_act(in_rd_data[p]),
      .q_valid(ppe_q_valid), .q_code_a(wb_rd_data[p][0]), .q_code_b(wb_rd_data[p][1]),
      .q_out_valid(q_out_valid[p]), .qa(qa[p]), .qb(qb[p]),
      .share_x(share_x[p]), .share_y(share_y[p]), .share_sum(share_sum[p])
    );

    assign in_rd_en[p]  = in_en;
    assign in_rd_row[p] = in_row_base + RW'(ppe_in_j[p]);

    // Adder sharing: even PPE sums row 2q of its pair, odd PPE row 2q+1.
    if (p % 2 == 0) begin : g_even
      assign share_x[p] = qa[p];
      assign share_y[p] = qa[p+1];
    end else begin : g_odd
      assign share_x[p] = qb[p-1];
      assign share_y[p] = qb[p];
    end
  end

  // ---------------- aggregator and output buffer ----------------
  logic signed [LUT_W+1:0] psum_a [NH][NCOLS];
  logic signed [LUT_W+1:0] psum_b [NH][NCOLS];

  always_comb begin
    for (int h = 0; h < NH; h++) begin
      psum_a[h] = share_sum[2*h];
      psum_b[h] = share_sum[2*h+1];
    end
  end

  logic                    ag_rd_en, ag_wr_en;
  logic [PAIR_W-1:0]       ag_rd_pair, ag_wr_pair;
  logic [GRP_W-1:0]        ag_rd_grp, ag_wr_grp;
  logic signed [OUT_W-1:0] ob_rd_data [2][NCOLS];
  logic signed [OUT_W-1:0] ag_wr_data [2][NCOLS];

  aggregator #(.NIN(NH), .NC(NCOLS), .IW(LUT_W+2), .OW(OUT_W)) u_agg (
    .clk, .rst_n, .in_valid(agg_valid), .in_tag(agg_tag),
    .psum_a, .psum_b,
    .ob_rd_en(ag_rd_en), .ob_rd_pair(ag_rd_pair), .ob_rd_grp(ag_rd_grp),
    .ob_rd_data, .ob_wr_en(ag_wr_en), .ob_wr_pair(ag_wr_pair), .ob_wr_grp(ag_wr_grp),
    .ob_wr_data(ag_wr_data), .busy(agg_busy)
  );

  // The host reads the output tile through the same port while idle.
  logic              ob_rd_en;
  logic [PW-1:0]     ob_rd_pair;
  logic [GRP_W-1:0]  ob_rd_grp;
  assign ob_rd_en   = busy ? ag_rd_en : out_rd_en;
  assign ob_rd_pair = PW'(busy ? ag_rd_pair : out_rd_pair);
  assign ob_rd_grp  = busy ? ag_rd_grp : out_rd_grp;
  assign out_rd_data = ob_rd_data;

  output_buffer #(.NCOLS(NCOLS), .OUT_W(OUT_W), .PAIRS(PAIRS), .GROUPS(GRPS),
                  .PW(PW), .GW(GRP_W)) u_obuf (
    .clk, .rd_en(ob_rd_en), .rd_pair(ob_rd_pair), .rd_grp(ob_rd_grp), .rd_data(ob_rd_data),
    .wr_en(ag_wr_en), .wr_pair(PW'(ag_wr_pair)), .wr_grp(ag_wr_grp), .wr_data(ag_wr_data)
  );

  // Stage-1 broadcasts and queries never overlap; query results reach the
  // aggregator one cycle after they leave the LUTs.
  a_phase:   assert property (@(posedge clk) disable iff (!rst_n) !(cs_busy && wb_rd_en));
  a_q_align: assert property (@(posedge clk) disable iff (!rst_n) q_out_valid[0] |=> agg_valid);

endmodule
