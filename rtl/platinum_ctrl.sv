// platinum_ctrl -- the global sequencer of one tile operation.
//
// A tile is cfg.n_groups column groups (NCOLS input columns each) times
// cfg.n_rounds k-rounds (L*c inputs each, c = 5 ternary or 7 bit-serial)
// times 2*cfg.n_pairs output rows. For every group and round it runs one
// "computation round":
//   CONSTRUCT  pulse lut_clear and cs_start; the PPEs build their LUTs from
//              input rows row_base .. row_base+c-1 of group grp; wait cs_done.
//   QUERY      for every bit plane (1 for ternary) issue one weight-buffer
//              read per cycle, row pair q = 0 .. n_pairs-1, so every PPE
//              answers two rows per cycle. A tag {pair, grp, shift, first}
//              travels alongside, three cycles behind, to the aggregator.
//   DRAIN      wait until the aggregator has written the last pair.
// done pulses after the last round; busy is high from start to done.
//
// Timing of one query pair issued in cycle t: weight data t+1 (ppe_q_valid),
// LUT data t+2, PPE pair sum t+3 (agg_valid). A round takes
// E+4 (construction of E path entries) + planes * (n_pairs + drain) cycles.
//
// Weight word address = (round * n_planes + plane) * PAIRS + q. The round
// structure follows the paper's algorithm; the loop order (group, round,
// plane, pair), the drains and the address layout are this design's.
module platinum_ctrl
  import platinum_pkg::*;
#(
  parameter int unsigned PAIRS = platinum_pkg::PAIRS_MAX,
  parameter int unsigned WB_AW = $clog2(platinum_pkg::WB_DEPTH),
  parameter int unsigned RW    = $clog2(platinum_pkg::IN_ROWS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  cfg_t             cfg,
  output logic             busy,
  output logic             done,
  output path_mode_e       mode,
  // construction
  output logic             lut_clear,
  output logic             cs_start,
  input  logic             cs_done,
  output logic [RW-1:0]    in_row_base,
  output logic [GRP_W-1:0] in_grp,
  // query
  output logic             wb_rd_en,
  output logic [WB_AW-1:0] wb_rd_addr,
  output logic             ppe_q_valid,
  output logic             agg_valid,
  output agg_tag_t         agg_tag,
  input  logic             agg_busy
);

  typedef enum logic [2:0] {S_IDLE, S_CSTART, S_CWAIT, S_QUERY, S_DRAIN} state_e;

  state_e           state;
  cfg_t             c_q;
  logic [3:0]       round;
  logic [GRP_W:0]   grp;
  logic [SHIFT_W:0] plane;
  logic [PAIR_W:0]  pair;
  logic [WB_AW-1:0] seg_base;   // (round * n_planes + plane) * PAIRS
  logic [RW-1:0]    row_base;

  // tag delay line: issue -> weight data -> LUT data -> PPE pair sum
  logic     v_d [3];
  agg_tag_t t_d [3];
  agg_tag_t issue_tag;

  assign busy        = (state != S_IDLE);
  assign mode        = c_q.mode;
  assign lut_clear   = (state == S_CSTART);
  assign cs_start    = (state == S_CSTART);
  assign in_row_base = row_base;
  assign in_grp      = GRP_W'(grp);
  assign wb_rd_en    = (state == S_QUERY);
  assign wb_rd_addr  = seg_base + WB_AW'(pair);

  always_comb begin
    issue_tag.pair  = PAIR_W'(pair);
    issue_tag.grp   = GRP_W'(grp);
    issue_tag.shift = SHIFT_W'(plane);
    issue_tag.first = (round == '0) && (plane == '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_d[0] <= 1'b0; v_d[1] <= 1'b0; v_d[2] <= 1'b0;
    end else begin
      v_d[0] <= wb_rd_en; v_d[1] <= v_d[0]; v_d[2] <= v_d[1];
    end
  end
  always_ff @(posedge clk) begin
    t_d[0] <= issue_tag; t_d[1] <= t_d[0]; t_d[2] <= t_d[1];
  end

  assign ppe_q_valid = v_d[0];
  assign agg_valid   = v_d[2];
  assign agg_tag     = t_d[2];

  logic [RW-1:0] c_chunk;
  assign c_chunk = (c_q.mode == MODE_TERNARY) ? RW'(C_TER) : RW'(C_BS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      c_q      <= '0;
      round    <= '0;
      grp      <= '0;
      plane    <= '0;
      pair     <= '0;
      seg_base <= '0;
      row_base <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          c_q      <= cfg;
          round    <= '0;
          grp      <= '0;
          plane    <= '0;
          pair     <= '0;
          seg_base <= '0;
          row_base <= '0;
          state    <= S_CSTART;
        end
        S_CSTART: state <= S_CWAIT;
        S_CWAIT: if (cs_done) begin
          plane <= '0;
          pair  <= '0;
          state <= S_QUERY;
        end
        S_QUERY: begin
          pair <= pair + 1'b1;
          if (pair == c_q.n_pairs - 1'b1) state <= S_DRAIN;
        end
        S_DRAIN: if (!v_d[0] && !v_d[1] && !v_d[2] && !agg_busy) begin
          pair     <= '0;
          seg_base <= seg_base + WB_AW'(PAIRS);
          if (plane + 1'b1 < c_q.n_planes) begin
            plane <= plane + 1'b1;
            state <= S_QUERY;
          end else if (round + 1'b1 < c_q.n_rounds) begin
            round    <= round + 1'b1;
            row_base <= row_base + c_chunk;
            state    <= S_CSTART;
          end else if (grp + 1'b1 < c_q.n_groups) begin
            grp      <= grp + 1'b1;
            round    <= '0;
            row_base <= '0;
            seg_base <= '0;
            state    <= S_CSTART;
          end else begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_cfg: assert property (@(posedge clk) disable iff (!rst_n)
                          (state == S_IDLE && start) |->
                          (cfg.n_pairs != 0 && cfg.n_rounds != 0 && cfg.n_groups != 0 &&
                           cfg.n_planes != 0 && 32'(cfg.n_pairs) <= PAIRS));

endmodule
