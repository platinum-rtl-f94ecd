// tb_platinum_full -- one complete tile operation at the published size:
// 52 PPEs, 1080 x 520 x 32 (m x k x n), with every parameter at its default.
//
// Same host procedure and checks as tb_platinum_top: a ternary tile (two
// k-rounds of 52 x 5 inputs, four column groups of 8) compared with the exact
// integer product, then, after switching the build path, a bit-serial tile of
// 2-bit weights (1080 x 364 x 32, two bit planes). Construction length, the
// rate of one row pair per cycle and every mechanism are checked and counted.
module tb_platinum_full;
  import platinum_pkg::*;
  import platinum_tb_pkg::*;
  localparam int L = L_PPE, M_T = M_TILE, K_T = K_TILE, N_T = N_TILE;
  localparam int PAIRS = M_T / 2, GRPS = N_T / NCOLS, ROWS = K_T / L;
  localparam int WDEPTH = PAIRS * (K_T / (L * C_TER));
  localparam int RW = $clog2(ROWS), WAW = $clog2(WDEPTH);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, path_wr_en, in_wr_en, w_wr_en, out_rd_en;
  cfg_t cfg;
  path_mode_e path_wr_sel;
  logic [PATH_AW-1:0] path_wr_addr;
  path_entry_t path_wr_data;
  logic [RW-1:0] in_wr_row;
  logic [GRP_W-1:0] in_wr_grp, out_rd_grp;
  logic signed [ACT_W-1:0] in_wr_data [L][NCOLS];
  logic [WAW-1:0] w_wr_addr;
  wcode_t w_wr_data [L][2];
  logic [PAIR_W-1:0] out_rd_pair;
  logic signed [OUT_W-1:0] out_rd_data [2][NCOLS];

  platinum_top dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- mechanism counters (from the design's own control signals) ----
  int n_cons_ter = 0, n_cons_bs = 0, n_mode_switch = 0, n_accum = 0, n_shift = 0;
  int n_flip = 0, n_groups_seen = 0, n_dual_port = 0;
  path_mode_e last_mode = MODE_TERNARY;
  bit first_op = 1;
  always @(posedge clk) if (rst_n) begin
    if (dut.cs_start) begin
      if (dut.mode == MODE_TERNARY) n_cons_ter++; else n_cons_bs++;
      if (!first_op && dut.mode != last_mode) n_mode_switch++;
      last_mode = dut.mode; first_op = 0;
      if (dut.in_grp != 0) n_groups_seen++;
    end
    if (dut.agg_valid && !dut.agg_tag.first) n_accum++;
    if (dut.agg_valid && dut.agg_tag.shift != 0) n_shift++;
    if (dut.ppe_q_valid) begin
      n_dual_port++;
      for (int p = 0; p < L; p++) if (dut.wb_rd_data[p][0].sign || dut.wb_rd_data[p][1].sign) n_flip++;
    end
  end

  // construction length and query rate
  int cyc = 0, cs_t0, cs_lens [$], burst = 0, bursts [$];
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (dut.cs_start) cs_t0 = cyc;
    if (dut.cs_done) cs_lens.push_back(cyc - cs_t0);
    if (dut.wb_rd_en) burst++;
    else if (burst > 0) begin bursts.push_back(burst); burst = 0; end
  end

  // ---- host tasks ----
  task automatic load_paths();
    build_paths();
    foreach (ter_path[i]) begin
      @(negedge clk); path_wr_en = 1; path_wr_sel = MODE_TERNARY;
      path_wr_addr = PATH_AW'(i); path_wr_data = ter_path[i];
    end
    foreach (bs_path[i]) begin
      @(negedge clk); path_wr_en = 1; path_wr_sel = MODE_BITSERIAL;
      path_wr_addr = PATH_AW'(i); path_wr_data = bs_path[i];
    end
    @(negedge clk); path_wr_en = 0;
  endtask

  int x [K_T][N_T];       // activations
  int w [M_T][K_T];       // integer weights

  task automatic load_inputs(input int c, input int k);
    for (int r = 0; r < ROWS; r++) for (int g = 0; g < GRPS; g++) begin
      @(negedge clk); in_wr_en = 1; in_wr_row = RW'(r); in_wr_grp = GRP_W'(g);
      for (int p = 0; p < L; p++) for (int col = 0; col < NCOLS; col++) begin
        int kk;
        kk = (r / c) * L * c + p * c + (r % c);
        in_wr_data[p][col] = (kk < k && (r / c) * c + c <= ROWS) ? ACT_W'(x[kk][g * NCOLS + col]) : '0;
      end
    end
    @(negedge clk); in_wr_en = 0;
  endtask

  // ternary: one word per (round, pair)
  task automatic load_ternary_weights(input int rounds, input int m);
    for (int r = 0; r < rounds; r++) for (int q = 0; q < PAIRS; q++) begin
      @(negedge clk); w_wr_en = 1; w_wr_addr = WAW'(r * PAIRS + q);
      for (int p = 0; p < L; p++) for (int h = 0; h < 2; h++) begin
        int v [C_TER];
        for (int j = 0; j < C_TER; j++) begin
          int row;
          row = 2 * q + h;
          v[j] = (row < m) ? w[row][r * L * C_TER + p * C_TER + j] : 0;
        end
        w_wr_data[p][h] = enc_ter(v);
      end
    end
    @(negedge clk); w_wr_en = 0;
  endtask

  // bit-serial, 2-bit two's complement, one round: plane 0 then plane 1 (negated)
  task automatic load_bs_weights(input int m);
    for (int pl = 0; pl < 2; pl++) for (int q = 0; q < PAIRS; q++) begin
      @(negedge clk); w_wr_en = 1; w_wr_addr = WAW'(pl * PAIRS + q);
      for (int p = 0; p < L; p++) for (int h = 0; h < 2; h++) begin
        int b [C_BS];
        for (int j = 0; j < C_BS; j++) begin
          int row;
          row = 2 * q + h;
          b[j] = (row < m) ? ((w[row][p * C_BS + j] >> pl) & 1) : 0;
        end
        w_wr_data[p][h] = enc_bs(b, pl == 1);
      end
    end
    @(negedge clk); w_wr_en = 0;
  endtask

  task automatic run_and_check(input path_mode_e m, input int rows, input int k,
                               input int rounds, input int planes, input string name);
    int t, e_len;
    cs_lens.delete(); bursts.delete();
    cfg.mode = m; cfg.n_pairs = (PAIR_W+1)'((rows + 1) / 2); cfg.n_rounds = 4'(rounds);
    cfg.n_groups = (GRP_W+1)'(GRPS); cfg.n_planes = (SHIFT_W+1)'(planes);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    t = 0;
    while (!done && t < 100000) begin @(negedge clk); t++; end
    check(done, {name, ": done"});
    e_len = (m == MODE_TERNARY) ? 121 : 127;
    foreach (cs_lens[i]) check(cs_lens[i] == e_len + 3, $sformatf("%s: construction took %0d cycles for %0d entries", name, cs_lens[i], e_len));
    check(cs_lens.size() == rounds * GRPS, {name, ": one construction per round and group"});
    check(bursts.size() == rounds * GRPS * planes, {name, ": query bursts"});
    foreach (bursts[i]) check(bursts[i] == (rows + 1) / 2, {name, ": two rows per cycle, no stalls"});
    $display("%s: %0d cycles", name, t + 1);
    // read back
    for (int q = 0; q < (rows + 1) / 2; q++) for (int g = 0; g < GRPS; g++) begin
      @(negedge clk); out_rd_en = 1; out_rd_pair = PAIR_W'(q); out_rd_grp = GRP_W'(g);
      @(posedge clk); #1;
      for (int h = 0; h < 2; h++) for (int col = 0; col < NCOLS; col++) begin
        int row, ref_v;
        row = 2 * q + h;
        if (row < rows) begin
          ref_v = 0;
          for (int kk = 0; kk < k; kk++) ref_v += w[row][kk] * x[kk][g * NCOLS + col];
          check(out_rd_data[h][col] == ref_v, $sformatf("%s: y[%0d][%0d] = %0d, expected %0d",
                name, row, g * NCOLS + col, out_rd_data[h][col], ref_v));
        end
      end
    end
    @(negedge clk); out_rd_en = 0;
  endtask

  initial begin
    start = 0; cfg = '0; path_wr_en = 0; in_wr_en = 0; w_wr_en = 0; out_rd_en = 0;
    path_wr_sel = MODE_TERNARY; path_wr_addr = '0; path_wr_data = '0;
    in_wr_row = '0; in_wr_grp = '0; w_wr_addr = '0; out_rd_pair = '0; out_rd_grp = '0;
    foreach (in_wr_data[p, c]) in_wr_data[p][c] = '0;
    foreach (w_wr_data[p, h]) w_wr_data[p][h] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_paths();

    // 1. ternary, full reduced tile
    foreach (x[k, n]) x[k][n] = int'($urandom % 51) - 25;
    foreach (w[m, k]) w[m][k] = int'($urandom % 3) - 1;
    load_inputs(C_TER, K_T);
    load_ternary_weights(2, M_T);
    run_and_check(MODE_TERNARY, M_T, K_T, 2, 1, "ternary 1080x520x32");

    // 2. bit-serial, 2-bit weights, K = L * 7
    foreach (x[k, n]) x[k][n] = (k < L * C_BS) ? int'($urandom % 37) - 18 : 0;
    foreach (w[m, k]) w[m][k] = (k < L * C_BS) ? int'($urandom % 4) - 2 : 0;
    load_inputs(C_BS, L * C_BS);
    load_bs_weights(M_T);
    run_and_check(MODE_BITSERIAL, M_T, L * C_BS, 1, 2, "bit-serial 1080x364x32");

    $display("mechanisms: ternary constructions %0d, bit-serial constructions %0d, path switches %0d, accumulating pairs %0d, shifted (bit-plane) pairs %0d, sign flips %0d, extra column groups %0d, dual-port query cycles %0d",
             n_cons_ter, n_cons_bs, n_mode_switch, n_accum, n_shift, n_flip, n_groups_seen, n_dual_port);
    check(n_cons_ter > 0, "ternary path used");
    check(n_cons_bs > 0, "bit-serial path used");
    check(n_mode_switch >= 1, "path switched");
    check(n_accum > 0, "accumulation across rounds/planes");
    check(n_shift > 0, "bit-plane shift");
    check(n_flip > 0, "sign flip");
    check(n_groups_seen > 0, "several column groups");
    check(n_dual_port > 0, "dual-port queries");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
