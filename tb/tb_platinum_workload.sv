// tb_platinum_workload -- BitNet b1.58 kernel slices run as a sequence of tiles,
// with every parameter of the core at its default (52 PPEs, 1080 x 520 x 32).
//
// A layer larger than one tile is cut into tiles in m, k and n; each tile is
// one start/done operation, and the partial sums of successive k-tiles are
// added by the host, which is what this bench does. The kernel slice is
// 1080 rows by 600 inputs, so its k extent takes one full k-tile (520) and one
// partial one (80 inputs, padded with zero weights), as the 3200-wide layers of
// the 3B model do in their last k-tile (3200 = 6 x 520 + 80). It is run with a
// prefill-like batch (32 columns, one full n-tile) and a decode-like batch
// (8 columns, one column group). Every output is compared with the exact
// integer product, and the cycle count of every tile with
//   groups x rounds x (E + 4 + n_pairs + log2(L/2) + 5), E = 121.
module tb_platinum_workload;
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
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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

  localparam int KW = 600;            // kernel slice: 1080 x 600
  int x [KW][N_T];
  int w [M_T][KW];
  int y [M_T][N_T];                    // host accumulator over k-tiles
  int n_tiles = 0, n_partial = 0, n_decode = 0;

  task automatic load_tile(input int k0, input int klen, input int groups);
    for (int r = 0; r < ROWS; r++) for (int g = 0; g < groups; g++) begin
      @(negedge clk); in_wr_en = 1; in_wr_row = RW'(r); in_wr_grp = GRP_W'(g);
      for (int p = 0; p < L; p++) for (int col = 0; col < NCOLS; col++) begin
        int kk;
        kk = (r / C_TER) * L * C_TER + p * C_TER + (r % C_TER);
        in_wr_data[p][col] = (kk < klen) ? ACT_W'(x[k0 + kk][g * NCOLS + col]) : '0;
      end
    end
    @(negedge clk); in_wr_en = 0;
    for (int r = 0; r < (klen + L * C_TER - 1) / (L * C_TER); r++) for (int q = 0; q < PAIRS; q++) begin
      @(negedge clk); w_wr_en = 1; w_wr_addr = WAW'(r * PAIRS + q);
      for (int p = 0; p < L; p++) for (int h = 0; h < 2; h++) begin
        int v [C_TER];
        for (int j = 0; j < C_TER; j++) begin
          int kk;
          kk = r * L * C_TER + p * C_TER + j;
          v[j] = (kk < klen) ? w[2 * q + h][k0 + kk] : 0;
        end
        w_wr_data[p][h] = enc_ter(v);
      end
    end
    @(negedge clk); w_wr_en = 0;
  endtask

  task automatic run_tile(input int k0, input int klen, input int groups, input string name);
    int t, rounds, expect_cyc;
    rounds = (klen + L * C_TER - 1) / (L * C_TER);
    load_tile(k0, klen, groups);
    cfg.mode = MODE_TERNARY; cfg.n_pairs = (PAIR_W+1)'(PAIRS); cfg.n_rounds = 4'(rounds);
    cfg.n_groups = (GRP_W+1)'(groups); cfg.n_planes = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    t = 0;
    while (!done && t < 100000) begin @(negedge clk); t++; end
    check(done, {name, ": done"});
    expect_cyc = groups * rounds * (121 + 4 + PAIRS + $clog2(L / 2) + 5);
    check(t == expect_cyc, $sformatf("%s: %0d cycles, expected %0d", name, t, expect_cyc));
    $display("%s: k %0d..%0d, %0d round(s), %0d group(s), %0d cycles", name, k0, k0 + klen - 1, rounds, groups, t);
    n_tiles++;
    if (klen < K_T) n_partial++;
    if (groups < GRPS) n_decode++;
    for (int q = 0; q < PAIRS; q++) for (int g = 0; g < groups; g++) begin
      @(negedge clk); out_rd_en = 1; out_rd_pair = PAIR_W'(q); out_rd_grp = GRP_W'(g);
      @(posedge clk); #1;
      for (int h = 0; h < 2; h++) for (int col = 0; col < NCOLS; col++)
        y[2 * q + h][g * NCOLS + col] += int'(out_rd_data[h][col]);
    end
    @(negedge clk); out_rd_en = 0;
  endtask

  task automatic run_kernel(input int n, input string name);
    foreach (x[k, c]) x[k][c] = int'($urandom % 51) - 25;
    foreach (w[m, k]) w[m][k] = int'($urandom % 3) - 1;
    foreach (y[m, c]) y[m][c] = 0;
    for (int k0 = 0; k0 < KW; k0 += K_T)
      run_tile(k0, (KW - k0 < K_T) ? KW - k0 : K_T, n / NCOLS, name);
    for (int m = 0; m < M_T; m++) for (int c = 0; c < n; c++) begin
      int ref_v;
      ref_v = 0;
      for (int k = 0; k < KW; k++) ref_v += w[m][k] * x[k][c];
      check(y[m][c] == ref_v, $sformatf("%s: y[%0d][%0d] = %0d, expected %0d", name, m, c, y[m][c], ref_v));
    end
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
    run_kernel(N_T, "prefill 1080x600x32");
    run_kernel(NCOLS, "decode 1080x600x8");
    $display("tiles %0d, partial k-tiles %0d, single-group (decode) tiles %0d", n_tiles, n_partial, n_decode);
    check(n_tiles == 4, "four tiles run");
    check(n_partial == 2, "partial k-tile in both kernels");
    check(n_decode == 2, "decode tiles use one column group");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
