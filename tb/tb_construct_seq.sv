// tb_construct_seq -- self-checking test of construction stage 1.
// A path memory model (one-cycle read) holds paths of several lengths E
// ending in Finish; the test checks that exactly the E entries are broadcast,
// in order, one per cycle from cycle 1, and that done comes in cycle E+3.
// A path without Finish must stop after the memory depth.
module tb_construct_seq;
  import platinum_pkg::*;
  localparam int DEPTH = 128;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, rd_en, path_valid, busy, done;
  logic [PATH_AW-1:0] rd_addr;
  path_entry_t rd_data, path;
  path_entry_t mem [DEPTH];

  construct_seq #(.DEPTH(DEPTH)) dut (.*);

  always_ff @(posedge clk) if (rd_en) rd_data <= mem[rd_addr];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int e_len, input bit with_finish);
    int cyc, seen, done_cyc, expect_len;
    for (int i = 0; i < DEPTH; i++) begin
      mem[i] = path_entry_t'($urandom);
      mem[i].finish = 1'b0;
    end
    if (with_finish) mem[e_len].finish = 1'b1;
    expect_len = with_finish ? e_len : DEPTH;
    @(negedge clk); start = 1;
    cyc = 0; seen = 0; done_cyc = -1;
    @(posedge clk); #1; start = 0;
    while (done_cyc < 0 && cyc < 400) begin
      cyc++;
      if (path_valid) begin
        check(seen < expect_len && path == mem[seen], $sformatf("entry %0d broadcast", seen));
        check(cyc == seen + 1, "one entry per cycle");
        seen++;
      end
      if (done) done_cyc = cyc;
      @(posedge clk); #1;
    end
    check(seen == expect_len, $sformatf("broadcast %0d of %0d entries", seen, expect_len));
    check(done_cyc == expect_len + 3, $sformatf("done at cycle %0d, expected %0d", done_cyc, expect_len + 3));
    check(!busy, "idle after done");
  endtask

  initial begin
    start = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(121, 1);    // ternary path length
    run(127, 1);    // bit-serial path length
    run(0, 1);
    run(1, 1);
    run(9, 1);
    run(0, 0);      // no Finish token
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
