// tb_platinum_ctrl -- self-checking test of the global sequencer.
// Models the construction sequencer (done a fixed time after cs_start) and
// an aggregator that stays busy for 6 cycles after its last input. Checks the
// order of constructions (group, round, input row base), the weight-buffer
// address of every issued row pair, one pair per cycle, the tag delivered to
// the aggregator three cycles later, and the done pulse, in both modes.
module tb_platinum_ctrl;
  import platinum_pkg::*;
  localparam int PAIRS = 8, CS_LAT = 10;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, lut_clear, cs_start, cs_done, wb_rd_en, ppe_q_valid, agg_valid, agg_busy;
  cfg_t cfg;
  path_mode_e mode;
  logic [3:0] in_row_base;
  logic [GRP_W-1:0] in_grp;
  logic [10:0] wb_rd_addr;
  agg_tag_t agg_tag;

  platinum_ctrl #(.PAIRS(PAIRS)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // construction sequencer model
  int cs_cnt = -1;
  always_ff @(posedge clk) begin
    cs_done <= 1'b0;
    if (cs_start) cs_cnt <= CS_LAT;
    else if (cs_cnt > 0) cs_cnt <= cs_cnt - 1;
    else if (cs_cnt == 0) begin cs_done <= 1'b1; cs_cnt <= -1; end
  end
  // aggregator model: busy while inputs arrived in the last 6 cycles
  logic [5:0] agg_sr;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) agg_sr <= '0; else agg_sr <= {agg_sr[4:0], agg_valid};
  assign agg_busy = agg_valid || (agg_sr != 0);

  // record
  typedef struct { int addr; agg_tag_t tag; } issue_t;
  issue_t issued [$];
  agg_tag_t tag_hist [$];
  int cons [$];       // {grp, row_base}
  logic wb_d1, wb_d2, wb_d3;
  int constructing;
  always_ff @(posedge clk) begin
    wb_d1 <= wb_rd_en; wb_d2 <= wb_d1; wb_d3 <= wb_d2;
  end
  always @(posedge clk) if (rst_n) begin
    if (cs_start) begin
      cons.push_back(int'(in_grp) * 100 + int'(in_row_base));
      if (!lut_clear) begin failures++; $display("FAIL: cs_start without lut_clear"); end
      checks++;
      constructing = 1;
    end
    if (cs_done) constructing = 0;
    if (wb_rd_en) begin
      issue_t it;
      it.addr = int'(wb_rd_addr);
      issued.push_back(it);
      if (constructing) begin failures++; $display("FAIL: query during construction"); end
    end
    if (ppe_q_valid != wb_d1) begin failures++; $display("FAIL: ppe_q_valid timing"); end
    if (agg_valid != wb_d3) begin failures++; $display("FAIL: agg_valid timing"); end
    if (agg_valid) tag_hist.push_back(agg_tag);
    checks += 2;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input path_mode_e m, input int np, input int nr, input int ng, input int npl);
    int k, t0, tdone, c, runs;
    issued.delete(); tag_hist.delete(); cons.delete();
    cfg.mode = m; cfg.n_pairs = (PAIR_W+1)'(np); cfg.n_rounds = 4'(nr);
    cfg.n_groups = (GRP_W+1)'(ng); cfg.n_planes = (SHIFT_W+1)'(npl);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    check(busy, "busy after start");
    check(mode == m, "mode applied");
    t0 = 0;
    while (!done && t0 < 5000) begin @(negedge clk); t0++; end
    check(done, "done pulse");
    @(negedge clk);
    check(!busy && !done, "idle after done");
    c = (m == MODE_TERNARY) ? C_TER : C_BS;
    // constructions
    check(cons.size() == ng * nr, $sformatf("%0d constructions", cons.size()));
    k = 0;
    for (int g = 0; g < ng; g++) for (int r = 0; r < nr; r++) begin
      if (k < cons.size()) check(cons[k] == g * 100 + r * c, $sformatf("construction %0d group/row base", k));
      k++;
    end
    // queries
    check(issued.size() == ng * nr * npl * np, "number of issued pairs");
    check(tag_hist.size() == issued.size(), "every pair reaches the aggregator");
    k = 0;
    for (int g = 0; g < ng; g++) for (int r = 0; r < nr; r++) for (int p = 0; p < npl; p++)
      for (int q = 0; q < np; q++) begin
        if (k < issued.size() && k < tag_hist.size()) begin
          check(issued[k].addr == (r * npl + p) * PAIRS + q, $sformatf("weight address %0d", k));
          check(tag_hist[k].pair == PAIR_W'(q) && tag_hist[k].grp == GRP_W'(g) &&
                tag_hist[k].shift == SHIFT_W'(p) && tag_hist[k].first == (r == 0 && p == 0),
                $sformatf("aggregator tag %0d", k));
        end
        k++;
      end
  endtask

  // one pair per cycle: wb_rd_en runs in bursts of n_pairs
  int burst = 0, bursts [$];
  always @(posedge clk) begin
    if (wb_rd_en) burst++;
    else if (burst > 0) begin bursts.push_back(burst); burst = 0; end
  end

  initial begin
    start = 0; cfg = '0; constructing = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(MODE_TERNARY, 5, 2, 2, 1);
    foreach (bursts[i]) check(bursts[i] == 5, "ternary: 5 pairs in consecutive cycles");
    bursts.delete();
    run(MODE_BITSERIAL, 3, 1, 2, 2);
    foreach (bursts[i]) check(bursts[i] == 3, "bit-serial: 3 pairs per plane in consecutive cycles");
    run(MODE_TERNARY, 8, 1, 1, 1);
    run(MODE_BITSERIAL, 4, 2, 1, 1);   // row base advances by 7
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
