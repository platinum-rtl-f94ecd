// tb_ppe_adder -- self-checking test of the PPE add/subtract lanes against
// integer arithmetic modulo 2^W, with random and extreme operands.
module tb_ppe_adder;
  localparam int NC = 8, W = 10;
  int checks = 0, failures = 0;
  logic sub;
  logic signed [W-1:0] x [NC], y [NC], sum [NC];

  ppe_adder #(.NCOLS(NC), .W(W)) dut (.*);

  initial begin
    for (int n = 0; n < 2000; n++) begin
      sub = 1'($urandom);
      for (int i = 0; i < NC; i++) begin
        case (n % 4)
          0: begin x[i] = W'($urandom); y[i] = W'($urandom); end
          1: begin x[i] = W'($signed(-512)); y[i] = W'(1); end
          2: begin x[i] = W'(511); y[i] = W'($signed(-1)); end
          default: begin x[i] = W'($urandom % 200); y[i] = W'($urandom % 200); end
        endcase
      end
      #1;
      for (int i = 0; i < NC; i++) begin
        int e;
        e = sub ? (int'(x[i]) - int'(y[i])) : (int'(x[i]) + int'(y[i]));
        checks++;
        if (sum[i] != W'(e)) begin
          failures++;
          $display("FAIL: lane %0d sub=%0d %0d %0d -> %0d", i, sub, x[i], y[i], sum[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
