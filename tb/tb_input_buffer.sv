// tb_input_buffer -- self-checking test of the banked activation store.
// Fills every row and group of every bank, then reads with a different row
// address per bank (as the PPEs do) and compares with a reference array.
module tb_input_buffer;
  localparam int L = 6, NC = 8, AW8 = 8, ROWS = 10, GROUPS = 4;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en;
  logic [3:0] wr_row;
  logic [1:0] wr_grp, rd_grp;
  logic signed [AW8-1:0] wr_data [L][NC], rd_data [L][NC];
  logic rd_en [L];
  logic [3:0] rd_row [L];
  logic signed [AW8-1:0] model [L][ROWS][GROUPS][NC];

  input_buffer #(.L(L), .NCOLS(NC), .ACT_W(AW8), .ROWS(ROWS), .GROUPS(GROUPS)) dut (.*);

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_row = '0; wr_grp = '0; rd_grp = '0;
    foreach (rd_en[p]) begin rd_en[p] = 0; rd_row[p] = '0; end
    for (int r = 0; r < ROWS; r++) for (int g = 0; g < GROUPS; g++) begin
      @(negedge clk);
      wr_en = 1; wr_row = 4'(r); wr_grp = 2'(g);
      foreach (wr_data[p, c]) begin
        wr_data[p][c] = AW8'($urandom);
        model[p][r][g][c] = wr_data[p][c];
      end
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      rd_grp = 2'($urandom % GROUPS);
      foreach (rd_en[p]) begin rd_en[p] = 1; rd_row[p] = 4'($urandom % ROWS); end
      @(posedge clk); #1;
      foreach (rd_data[p, c]) begin
        checks++;
        if (rd_data[p][c] != model[p][rd_row[p]][rd_grp][c]) begin
          failures++;
          if (failures < 10) $display("FAIL: bank %0d row %0d grp %0d col %0d", p, rd_row[p], rd_grp, c);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
