// tb_ppe_ctrl -- self-checking test of the PPE controller.
// Drives build-path entries and query codes and checks, cycle by cycle, the
// stage-2 LUT read and input access, the stage-3 adder select, the stage-4
// LUT write, the lut[0] clear and the query port addressing and sign timing.
module tb_ppe_ctrl;
  import platinum_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic lut_clear, path_valid, q_valid;
  path_entry_t path;
  wcode_t q_code_a, q_code_b;
  logic lut_a_en, lut_a_we, lut_a_wzero, lut_b_en, in_en, add_construct, add_sub;
  logic qres_valid, qres_sign_a, qres_sign_b;
  logic [LUT_AW-1:0] lut_a_addr, lut_b_addr;
  logic [J_W-1:0] in_j;

  ppe_ctrl dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  path_entry_t hist [$];

  initial begin
    lut_clear = 0; path_valid = 0; q_valid = 0; path = '0; q_code_a = '0; q_code_b = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // clear pulse
    @(negedge clk); lut_clear = 1; #1;
    check(lut_a_en && lut_a_we && lut_a_wzero && lut_a_addr == 0, "clear writes lut[0]");
    @(negedge clk); lut_clear = 0;
    // a stream of entries with distinct dst, src never in flight
    for (int n = 0; n < 300; n++) begin
      path_entry_t e;
      e.finish = 0; e.dst = LUT_AW'(n % 120 + 5); e.src = LUT_AW'(n % 3); e.j = J_W'($urandom % 7);
      e.sign = 1'($urandom);
      path_valid = 1; path = e; #1;
      hist.push_front(e);
      // stage 2 of this entry
      check(lut_b_en && lut_b_addr == e.src, "stage 2 reads lut[src] on port B");
      check(in_en && in_j == e.j, "stage 2 input access a[j]");
      // stage 3 of the previous entry
      if (n >= 1) check(add_construct && add_sub == hist[1].sign, "stage 3 add/sub follows sign");
      // stage 4 of the entry before that
      if (n >= 2) check(lut_a_en && lut_a_we && !lut_a_wzero && lut_a_addr == hist[2].dst,
                        "stage 4 writes lut[dst] on port A");
      else        check(!lut_a_we, "no write before stage 4");
      @(negedge clk);
    end
    path_valid = 0; #1;
    check(add_construct && lut_a_we && lut_a_addr == hist[1].dst, "drain stage 3/4");
    @(negedge clk); #1;
    check(!add_construct && lut_a_we && lut_a_addr == hist[0].dst, "drain last write");
    @(negedge clk); #1;
    check(!lut_a_we && !lut_b_en && !in_en, "pipeline empty");
    // queries
    for (int n = 0; n < 300; n++) begin
      wcode_t ca, cb;
      ca = wcode_t'($urandom); cb = wcode_t'($urandom);
      q_valid = 1; q_code_a = ca; q_code_b = cb; #1;
      check(lut_a_en && !lut_a_we && lut_a_addr == ca.idx, "query port A address");
      check(lut_b_en && lut_b_addr == cb.idx, "query port B address");
      check(!add_construct, "adder lent to aggregator during queries");
      @(posedge clk); #1;
      check(qres_valid && qres_sign_a == ca.sign && qres_sign_b == cb.sign, "query signs one cycle later");
      @(negedge clk);
    end
    q_valid = 0;
    @(posedge clk); #1;
    check(!qres_valid, "query valid drops");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
