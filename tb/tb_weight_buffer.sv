// tb_weight_buffer -- self-checking test of the banked weight store.
// Writes random codes for both rows of a pair into every bank, reads random
// addresses back and checks that the row-2q code comes out on port 0 and the
// row-2q+1 code on port 1 of every bank, one cycle after the read.
module tb_weight_buffer;
  import platinum_pkg::*;
  localparam int L = 5, DEPTH = 64;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en, rd_en;
  logic [5:0] wr_addr, rd_addr;
  wcode_t wr_data [L][2], rd_data [L][2];
  wcode_t model [DEPTH][L][2];

  weight_buffer #(.L(L), .DEPTH(DEPTH)) dut (.*);

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_addr = '0; rd_addr = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 6'(a);
      foreach (wr_data[p, k]) begin
        wr_data[p][k] = wcode_t'($urandom);
        model[a][p][k] = wr_data[p][k];
      end
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      rd_en = 1; rd_addr = 6'($urandom);
      @(posedge clk); #1;
      foreach (rd_data[p, k]) begin
        checks++;
        if (rd_data[p][k] != model[rd_addr][p][k]) begin
          failures++;
          if (failures < 10) $display("FAIL: addr %0d bank %0d row %0d", rd_addr, p, k);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
