// tb_lut_buffer -- self-checking test of the two-port LUT memory.
// Random writes through port A, random reads through both ports, compared
// with a reference array; checks the one-cycle read latency and that a read
// of an entry written in the same cycle returns the old value.
module tb_lut_buffer;
  localparam int DEPTH = 128, AW = 7, WIDTH = 64;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic a_en, a_we, b_en;
  logic [AW-1:0] a_addr, b_addr;
  logic [WIDTH-1:0] a_wdata, a_rdata, b_rdata;
  logic [WIDTH-1:0] model [DEPTH];

  lut_buffer #(.DEPTH(DEPTH), .AW(AW), .WIDTH(WIDTH)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WIDTH-1:0] exp_a, exp_b;
    logic [AW-1:0] ra;
    a_en = 0; a_we = 0; b_en = 0; a_addr = '0; b_addr = '0; a_wdata = '0;
    // fill
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      a_en = 1; a_we = 1; a_addr = AW'(i); a_wdata = {$urandom, $urandom};
      model[i] = a_wdata;
    end
    @(negedge clk); a_en = 0; a_we = 0;
    // dual-port reads
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      a_en = 1; a_we = 0; a_addr = AW'($urandom); b_en = 1; b_addr = AW'($urandom);
      exp_a = model[a_addr]; exp_b = model[b_addr];
      @(posedge clk); #1;
      check(a_rdata == exp_a, $sformatf("port A read %0d", a_addr));
      check(b_rdata == exp_b, $sformatf("port B read %0d", b_addr));
    end
    // write on A while B reads the same entry: B sees the old value
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      ra = AW'($urandom);
      a_en = 1; a_we = 1; a_addr = ra; a_wdata = {$urandom, $urandom};
      b_en = 1; b_addr = ra; exp_b = model[ra];
      model[ra] = a_wdata;
      @(posedge clk); #1;
      check(b_rdata == exp_b, "read during write returns old value");
      @(negedge clk);
      a_en = 0; a_we = 0; b_en = 1; b_addr = ra;
      @(posedge clk); #1;
      check(b_rdata == model[ra], "write landed");
    end
    // disabled port holds its data
    @(negedge clk); a_en = 0; b_en = 0; exp_b = b_rdata; b_addr = b_addr + 1'b1;
    @(posedge clk); #1;
    check(b_rdata == exp_b, "port B holds data when not enabled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
