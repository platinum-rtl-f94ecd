// tb_output_buffer -- self-checking test of the two-bank accumulator store.
// Random writes of row pairs and reads of row pairs against a reference, with
// simultaneous read and write of the same word returning the old value.
module tb_output_buffer;
  localparam int NC = 8, OW = 32, PAIRS = 20, GROUPS = 4;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rd_en, wr_en;
  logic [4:0] rd_pair, wr_pair;
  logic [1:0] rd_grp, wr_grp;
  logic signed [OW-1:0] rd_data [2][NC], wr_data [2][NC];
  logic signed [OW-1:0] model [PAIRS][GROUPS][2][NC];

  output_buffer #(.NCOLS(NC), .OUT_W(OW), .PAIRS(PAIRS), .GROUPS(GROUPS)) dut (.*);

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [OW-1:0] exp_d [2][NC];
    rd_en = 0; wr_en = 0; rd_pair = '0; wr_pair = '0; rd_grp = '0; wr_grp = '0;
    for (int q = 0; q < PAIRS; q++) for (int g = 0; g < GROUPS; g++) begin
      @(negedge clk);
      wr_en = 1; wr_pair = 5'(q); wr_grp = 2'(g);
      foreach (wr_data[b, c]) begin wr_data[b][c] = $urandom; model[q][g][b][c] = wr_data[b][c]; end
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      rd_en = 1; rd_pair = 5'($urandom % PAIRS); rd_grp = 2'($urandom % GROUPS);
      exp_d = model[rd_pair][rd_grp];
      wr_en = 1'($urandom);
      if (n % 5 == 0) begin wr_pair = rd_pair; wr_grp = rd_grp; end
      else begin wr_pair = 5'($urandom % PAIRS); wr_grp = 2'($urandom % GROUPS); end
      foreach (wr_data[b, c]) wr_data[b][c] = $urandom;
      if (wr_en) model[wr_pair][wr_grp] = wr_data;
      @(posedge clk); #1;
      foreach (rd_data[b, c]) begin
        checks++;
        if (rd_data[b][c] != exp_d[b][c]) begin
          failures++;
          if (failures < 10) $display("FAIL: pair %0d grp %0d bank %0d col %0d", rd_pair, rd_grp, b, c);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
