// tb_ppe -- self-checking test of one PPE.
// The test plays the rest of the chip: it broadcasts a build path one entry
// per cycle and answers input reads with one cycle latency. After building
// the ternary LUT (c = 5) from full-range 8-bit activations it queries every
// ternary weight vector through both ports and compares with the dot product
// computed directly (modulo 2^8, the LUT width, then sign-flipped). It then
// checks the adder lent to the aggregator, switches to the bit-serial path
// (c = 7) and queries every binary vector with and without negation.
module tb_ppe;
  import platinum_pkg::*;
  import platinum_tb_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic lut_clear, path_valid, in_en, q_valid, q_out_valid;
  path_entry_t path;
  logic [J_W-1:0] in_j;
  logic signed [ACT_W-1:0] in_act [NCOLS];
  wcode_t q_code_a, q_code_b;
  logic signed [LUT_W:0] qa [NCOLS], qb [NCOLS], share_x [NCOLS], share_y [NCOLS];
  logic signed [LUT_W+1:0] share_sum [NCOLS];

  ppe dut (.*);

  // input bank model
  logic signed [ACT_W-1:0] act [C_BS][NCOLS];
  always_ff @(posedge clk) if (in_en) in_act <= act[in_j];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int wrap8(int v);
    return int'($signed(8'(v)));
  endfunction

  task automatic construct(input path_entry_t p[$]);
    @(negedge clk); lut_clear = 1;
    @(negedge clk); lut_clear = 0;
    foreach (p[i]) begin
      if (!p[i].finish) begin
        path_valid = 1; path = p[i];
        @(negedge clk);
      end
    end
    path_valid = 0;
    repeat (3) @(negedge clk);
  endtask

  // expected query result for weights w (length c) and column col
  function automatic int expect_q(int w[], int col, bit flip_sign);
    int s = 0;
    foreach (w[j]) s += w[j] * int'(act[j][col]);
    // the LUT stores the sign-normalised vector, wrapped to 8 bits
    return flip_sign ? -wrap8(-s) : wrap8(s);
  endfunction

  initial begin
    int w5 [C_TER];
    int wa [], wb [];
    int b7 [C_BS];
    lut_clear = 0; path_valid = 0; path = '0; q_valid = 0; q_code_a = '0; q_code_b = '0;
    foreach (share_x[i]) begin share_x[i] = '0; share_y[i] = '0; end
    build_paths();
    check(ter_path.size() == 122 && bs_path.size() == 128, "path lengths (121 + Finish, 127 + Finish)");
    check(min_raw_distance(ter_path) >= 3 && min_raw_distance(bs_path) >= 3, "paths respect the pipeline depth");
    repeat (2) @(negedge clk);
    rst_n = 1;

    // ---- ternary ----
    foreach (act[j, c]) act[j][c] = ACT_W'($urandom);
    construct(ter_path);
    for (int code = 0; code < TER_CODES; code++) begin
      int code_b;
      code_b = (code * 7 + 11) % TER_CODES;
      wa = new[C_TER]; wb = new[C_TER];
      for (int j = 0; j < C_TER; j++) begin
        wa[j] = (digit(code, j) == 2) ? -1 : digit(code, j);
        wb[j] = (digit(code_b, j) == 2) ? -1 : digit(code_b, j);
      end
      foreach (w5[j]) w5[j] = wa[j];
      q_code_a = enc_ter(w5);
      foreach (w5[j]) w5[j] = wb[j];
      q_code_b = enc_ter(w5);
      q_valid = 1;
      @(posedge clk); #1;
      check(q_out_valid, "query result valid after one cycle");
      for (int c = 0; c < NCOLS; c++) begin
        check(int'(qa[c]) == expect_q(wa, c, q_code_a.sign), $sformatf("ternary port A code %0d col %0d: %0d", code, c, qa[c]));
        check(int'(qb[c]) == expect_q(wb, c, q_code_b.sign), $sformatf("ternary port B code %0d col %0d", code_b, c));
      end
      @(negedge clk);
    end
    q_valid = 0;

    // ---- adder lent to the aggregator ----
    for (int n = 0; n < 50; n++) begin
      int ex [NCOLS];
      @(negedge clk);
      foreach (share_x[i]) begin
        share_x[i] = (LUT_W+1)'($urandom); share_y[i] = (LUT_W+1)'($urandom);
        ex[i] = int'(share_x[i]) + int'(share_y[i]);
      end
      @(posedge clk); #1;
      foreach (ex[i]) check(int'(share_sum[i]) == ex[i], "shared adder sum");
    end

    // ---- bit-serial path (path switch) ----
    foreach (act[j, c]) act[j][c] = ACT_W'($urandom);
    construct(bs_path);
    for (int code = 0; code < BS_CODES; code++) begin
      bit neg;
      neg = 1'($urandom);
      wa = new[C_BS]; wb = new[C_BS];
      for (int j = 0; j < C_BS; j++) begin
        wa[j] = (code >> j) & 1;
        wb[j] = ((BS_CODES - 1 - code) >> j) & 1;
      end
      foreach (b7[j]) b7[j] = wa[j];
      q_code_a = enc_bs(b7, neg);
      foreach (b7[j]) b7[j] = wb[j];
      q_code_b = enc_bs(b7, 1'b0);
      q_valid = 1;
      @(posedge clk); #1;
      for (int c = 0; c < NCOLS; c++) begin
        int e;
        e = wrap8(expect_q(wa, c, 1'b0));
        check(int'(qa[c]) == (neg ? -e : e), $sformatf("bit-serial port A code %0d col %0d", code, c));
        check(int'(qb[c]) == wrap8(expect_q(wb, c, 1'b0)), $sformatf("bit-serial port B col %0d", c));
      end
      @(negedge clk);
    end
    q_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
