// tb_aggregator -- self-checking test of the reduction pipeline.
// Feeds passes of row pairs with random PPE pair sums, one pair per cycle,
// with tags that overwrite (first) or accumulate with a bit-plane shift, into
// a model of the output buffer (one-cycle read). The expected accumulators
// are computed directly from the inputs. Also checks that each write comes
// $clog2(NIN)+1 cycles after its input and that busy covers the pipeline.
module tb_aggregator;
  import platinum_pkg::*;
  localparam int NIN = 26, NC = 8, IW = 10, OW = 32, LAT = 6;
  localparam int NPAIRS = 12, NGRP = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, ob_rd_en, ob_wr_en, busy;
  agg_tag_t in_tag;
  logic signed [IW-1:0] psum_a [NIN][NC], psum_b [NIN][NC];
  logic [PAIR_W-1:0] ob_rd_pair, ob_wr_pair;
  logic [GRP_W-1:0] ob_rd_grp, ob_wr_grp;
  logic signed [OW-1:0] ob_rd_data [2][NC], ob_wr_data [2][NC];

  aggregator #(.NIN(NIN), .NC(NC), .IW(IW), .OW(OW)) dut (.*);

  // output buffer model
  logic signed [OW-1:0] obuf [NPAIRS][NGRP][2][NC];
  always_ff @(posedge clk) begin
    if (ob_rd_en) ob_rd_data <= obuf[ob_rd_pair][ob_rd_grp];
    if (ob_wr_en) obuf[ob_wr_pair][ob_wr_grp] <= ob_wr_data;
  end

  longint expect_acc [NPAIRS][NGRP][2][NC];
  int cycle = 0;
  int issue_cycle [$];
  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (rst_n && ob_wr_en) begin
    int t;
    t = issue_cycle.pop_front();
    checks++;
    if (cycle - t != LAT) begin failures++; $display("FAIL: latency %0d", cycle - t); end
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pass(input int grp, input int shift, input bit first);
    for (int q = 0; q < NPAIRS; q++) begin
      @(negedge clk);
      in_valid = 1;
      in_tag.pair = PAIR_W'(q); in_tag.grp = GRP_W'(grp); in_tag.shift = SHIFT_W'(shift); in_tag.first = first;
      for (int c = 0; c < NC; c++) begin
        longint sa = 0, sb = 0;
        for (int i = 0; i < NIN; i++) begin
          psum_a[i][c] = IW'($urandom); psum_b[i][c] = IW'($urandom);
          sa += psum_a[i][c]; sb += psum_b[i][c];
        end
        expect_acc[q][grp][0][c] = (first ? 0 : expect_acc[q][grp][0][c]) + (sa <<< shift);
        expect_acc[q][grp][1][c] = (first ? 0 : expect_acc[q][grp][1][c]) + (sb <<< shift);
      end
      issue_cycle.push_back(cycle);
    end
    @(negedge clk); in_valid = 0;
    checks++;
    if (!busy) begin failures++; $display("FAIL: busy low with pairs in flight"); end
    while (busy) @(negedge clk);
  endtask

  initial begin
    in_valid = 0; in_tag = '0;
    foreach (psum_a[i, c]) begin psum_a[i][c] = '0; psum_b[i][c] = '0; end
    foreach (obuf[q, g, b, c]) obuf[q][g][b][c] = 32'hdead;  // must be overwritten
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int g = 0; g < NGRP; g++) begin
      pass(g, 0, 1'b1);          // first round overwrites
      pass(g, 0, 1'b0);          // later round accumulates
      pass(g, 3, 1'b0);          // bit plane 3
      pass(g, 7, 1'b0);          // bit plane 7
    end
    pass(0, 1, 1'b1);            // a new tile overwrites again
    repeat (3) @(negedge clk);
    foreach (obuf[q, g, b, c]) begin
      checks++;
      if (obuf[q][g][b][c] != OW'(expect_acc[q][g][b][c])) begin
        failures++;
        if (failures < 10) $display("FAIL: acc pair %0d grp %0d row %0d col %0d: %0d vs %0d",
                                    q, g, b, c, obuf[q][g][b][c], expect_acc[q][g][b][c]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
