// tb_topk: self-checking test of topk.
// Streams 300 random logit vectors (12 classes, 4 per word) with random
// gaps and random output back-pressure, including vectors with tied maxima,
// and compares the returned index with an argmax (first index wins) computed
// here. Also checks that the result appears one cycle after the last word.
module tb_topk;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic iv, ir, ov, orr;
  logic [4*16-1:0] id;
  logic [3:0] od;

  topk #(.ACC_W(16), .PE(4), .NCLASS(12)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir),
    .in_data(id), .out_valid(ov), .out_ready(orr), .out_data(od));

  int exp_q [$];
  int ties = 0, results = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // consumer
  always @(posedge clk) if (rst_n) begin
    if (ov && orr) begin
      checks++;
      if (exp_q.size() == 0 || int'(od) != exp_q[0]) begin
        failures++; $display("topk: got %0d expected %0d", od, exp_q.size() ? exp_q[0] : -1);
      end
      if (exp_q.size()) void'(exp_q.pop_front());
      results++;
    end
  end
  always @(negedge clk) orr <= ($urandom % 3) != 0;

  initial begin
    iv = 0; id = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < 300; v++) begin
      logic signed [15:0] l [12];
      int best;
      for (int c = 0; c < 12; c++) l[c] = 16'($urandom % 2000) - 16'sd1000;
      if (v % 5 == 0) begin l[3] = 16'sd2000; l[9] = 16'sd2000; ties++; end
      if (v % 7 == 0) begin for (int c = 0; c < 12; c++) l[c] = -16'sd5; end
      best = 0;
      for (int c = 1; c < 12; c++) if (l[c] > l[best]) best = c;
      exp_q.push_back(best);
      for (int w = 0; w < 3; w++) begin
        @(negedge clk);
        while ($urandom % 4 == 0) begin iv = 0; @(negedge clk); end
        iv = 1;
        for (int p = 0; p < 4; p++) id[p*16 +: 16] = l[w*4 + p];
        @(posedge clk);
        while (!ir) @(posedge clk);
        #1;
        if (w == 2) begin checks++; if (!ov) begin failures++; $display("result not one cycle after last word"); end end
      end
      @(negedge clk); iv = 0;
    end
    repeat (20) @(posedge clk);
    checks++; if (results != 300) begin failures++; $display("got %0d results", results); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
