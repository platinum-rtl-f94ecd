// tb_build_path_buffer -- self-checking test of the two-path build path store.
// Loads different random paths into the bit-serial and ternary slots and reads
// them back, switching the mode between reads.
module tb_build_path_buffer;
  import platinum_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en, rd_en;
  path_mode_e wr_sel, mode;
  logic [PATH_AW-1:0] wr_addr, rd_addr;
  path_entry_t wr_data, rd_data;
  path_entry_t m_bs [PATH_DEPTH], m_ter [PATH_DEPTH];

  build_path_buffer dut (.*);

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_sel = MODE_BITSERIAL; mode = MODE_BITSERIAL; wr_addr = '0; rd_addr = '0; wr_data = '0;
    for (int s = 0; s < 2; s++) begin
      for (int i = 0; i < PATH_DEPTH; i++) begin
        @(negedge clk);
        wr_en = 1; wr_sel = path_mode_e'(s); wr_addr = PATH_AW'(i); wr_data = path_entry_t'($urandom);
        if (s == 1) m_ter[i] = wr_data; else m_bs[i] = wr_data;
      end
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 1000; n++) begin
      path_entry_t e;
      @(negedge clk);
      rd_en = 1; mode = path_mode_e'($urandom % 2); rd_addr = PATH_AW'($urandom);
      e = (mode == MODE_TERNARY) ? m_ter[rd_addr] : m_bs[rd_addr];
      @(posedge clk); #1;
      checks++;
      if (rd_data != e) begin failures++; $display("FAIL: mode %0d addr %0d", mode, rd_addr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
