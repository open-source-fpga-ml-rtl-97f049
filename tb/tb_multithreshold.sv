// tb_multithreshold: self-checking test of multithreshold.
// Random accumulators against random ascending threshold lists (2-bit and
// 3-bit activations); the expected output is counted in the testbench.
// Includes accumulators equal to a threshold (which must count).
module tb_multithreshold;
  int checks = 0, failures = 0;
  logic signed [15:0] acc3, acc2;
  logic signed [15:0] thr3 [7];
  logic signed [15:0] thr2 [3];
  logic [2:0] out3;
  logic [1:0] out2;

  multithreshold #(.ACC_W(16), .ABITS(3)) dut3 (.acc(acc3), .thr(thr3), .out(out3));
  multithreshold #(.ACC_W(16), .ABITS(2)) dut2 (.acc(acc2), .thr(thr2), .out(out2));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int base, e3, e2;
      base = int'($urandom % 200) - 100;
      for (int i = 0; i < 7; i++) begin base += int'($urandom % 20); thr3[i] = 16'(base); end
      for (int i = 0; i < 3; i++) thr2[i] = thr3[2*i];
      acc3 = (t % 4 == 0) ? thr3[$urandom % 7] : 16'(int'($urandom % 400) - 200);
      acc2 = (t % 4 == 1) ? thr2[$urandom % 3] : 16'(int'($urandom % 400) - 200);
      #1;
      e3 = 0; e2 = 0;
      for (int i = 0; i < 7; i++) if (int'(acc3) >= int'(thr3[i])) e3++;
      for (int i = 0; i < 3; i++) if (int'(acc2) >= int'(thr2[i])) e2++;
      checks++; if (int'(out3) != e3) begin failures++; $display("3-bit: acc %0d got %0d exp %0d", acc3, out3, e3); end
      checks++; if (int'(out2) != e2) begin failures++; $display("2-bit: acc %0d got %0d exp %0d", acc2, out2, e2); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
