// tb_mvau: self-checking test of mvau.
// Two small layers: A (12x8, SIMD 4, PE 2, 3-element input words, 3-bit
// inputs, 2-bit multithreshold activation) and B (10x6, SIMD 5, PE 3, 8-bit
// inputs, no activation, raw accumulators out). Weights and thresholds are
// random and loaded through the cfg port; 20 random vectors each, with random
// input gaps and output back-pressure on A. Outputs are compared with a
// matrix-vector product and threshold count computed here. The vector period
// of B with no stalls is checked against MW/IN_ELEMS + NF*(SF+1) cycles.
module tb_mvau;
  import tinyml_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ---------------- layer A ----------------
  localparam int AMW = 12, AMH = 8, ASIMD = 4, APE = 2, AIE = 3, AIB = 3, AAB = 2, ANT = 3;
  logic a_we; logic [1:0] a_sel; logic [31:0] a_addr, a_data;
  logic a_iv, a_ir, a_ov, a_or;
  logic [AIE*AIB-1:0] a_id;
  logic [APE*AAB-1:0] a_od;
  mvau #(.MW(AMW), .MH(AMH), .SIMD(ASIMD), .PE(APE), .IN_ELEMS(AIE), .IBITS(AIB),
         .WBITS(3), .ABITS(AAB), .ACC_W(16), .USE_ACT(1'b1)) dut_a (
    .clk, .rst_n, .cfg_we(a_we), .cfg_sel(a_sel), .cfg_addr(a_addr), .cfg_data(a_data),
    .in_valid(a_iv), .in_ready(a_ir), .in_data(a_id),
    .out_valid(a_ov), .out_ready(a_or), .out_data(a_od));

  // ---------------- layer B ----------------
  localparam int BMW = 10, BMH = 6, BSIMD = 5, BPE = 3, BIE = 2, BIB = 8;
  logic b_we; logic [1:0] b_sel; logic [31:0] b_addr, b_data;
  logic b_iv, b_ir, b_ov, b_or;
  logic [BIE*BIB-1:0] b_id;
  logic [BPE*20-1:0]  b_od;
  mvau #(.MW(BMW), .MH(BMH), .SIMD(BSIMD), .PE(BPE), .IN_ELEMS(BIE), .IBITS(BIB),
         .WBITS(3), .ABITS(3), .ACC_W(20), .USE_ACT(1'b0)) dut_b (
    .clk, .rst_n, .cfg_we(b_we), .cfg_sel(b_sel), .cfg_addr(b_addr), .cfg_data(b_data),
    .in_valid(b_iv), .in_ready(b_ir), .in_data(b_id),
    .out_valid(b_ov), .out_ready(b_or), .out_data(b_od));

  int aw [AMH][AMW], at [AMH][ANT];
  int bw [BMH][BMW];
  int a_exp [$], b_exp [$];
  int a_outs = 0, b_outs = 0;
  int b_start [$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checkers
  always @(posedge clk) if (rst_n) begin
    if (a_ov && a_or) begin
      for (int p = 0; p < APE; p++) begin
        checks++;
        if (int'(a_od[p*AAB +: AAB]) != a_exp[0]) begin
          failures++; $display("A: got %0d exp %0d", a_od[p*AAB +: AAB], a_exp[0]);
        end
        void'(a_exp.pop_front());
      end
      a_outs++;
    end
    if (b_ov && b_or) begin
      for (int p = 0; p < BPE; p++) begin
        checks++;
        if (int'(signed'(b_od[p*20 +: 20])) != b_exp[0]) begin
          failures++; $display("B: got %0d exp %0d", signed'(b_od[p*20 +: 20]), b_exp[0]);
        end
        void'(b_exp.pop_front());
      end
      b_outs++;
    end
  end
  always @(negedge clk) a_or <= ($urandom % 3) != 0;
  assign b_or = 1'b1;

  // record when B accepts the first word of each vector
  int b_words = 0, cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (b_iv && b_ir) begin
      if (b_words % (BMW / BIE) == 0) b_start.push_back(cyc);
      b_words <= b_words + 1;
    end
  end

  initial begin
    a_we = 0; b_we = 0; a_iv = 0; b_iv = 0; a_id = '0; b_id = '0;
    a_sel = '0; b_sel = '0; a_addr = '0; b_addr = '0; a_data = '0; b_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // load A
    for (int r = 0; r < AMH; r++) begin
      int base;
      for (int c = 0; c < AMW; c++) begin
        aw[r][c] = int'($urandom % 8) - 4;
        @(negedge clk); a_we = 1; a_sel = CFG_WEIGHT; a_addr = r * AMW + c; a_data = 32'(aw[r][c]);
      end
      base = int'($urandom % 20) - 15;
      for (int t = 0; t < ANT; t++) begin
        base += int'($urandom % 10);
        at[r][t] = base;
        @(negedge clk); a_we = 1; a_sel = CFG_THRESHOLD; a_addr = r * ANT + t; a_data = 32'(base);
      end
    end
    @(negedge clk); a_we = 0;
    // load B
    for (int r = 0; r < BMH; r++)
      for (int c = 0; c < BMW; c++) begin
        bw[r][c] = int'($urandom % 8) - 4;
        @(negedge clk); b_we = 1; b_sel = CFG_WEIGHT; b_addr = r * BMW + c; b_data = 32'(bw[r][c]);
      end
    @(negedge clk); b_we = 0;

    fork
      begin : drive_a
        for (int v = 0; v < 20; v++) begin
          int x [AMW];
          for (int c = 0; c < AMW; c++) x[c] = int'($urandom % 8);
          for (int nf = 0; nf < AMH / APE; nf++)
            for (int p = 0; p < APE; p++) begin
              int r, acc, n;
              r = nf * APE + p; acc = 0; n = 0;
              for (int c = 0; c < AMW; c++) acc += aw[r][c] * x[c];
              for (int t = 0; t < ANT; t++) if (acc >= at[r][t]) n++;
              a_exp.push_back(n);
            end
          for (int w = 0; w < AMW / AIE; w++) begin
            @(negedge clk);
            while ($urandom % 3 == 0) begin a_iv = 0; @(negedge clk); end
            a_iv = 1;
            for (int e = 0; e < AIE; e++) a_id[e*AIB +: AIB] = AIB'(x[w*AIE + e]);
            @(posedge clk); while (!a_ir) @(posedge clk);
          end
          @(negedge clk); a_iv = 0;
        end
      end
      begin : drive_b
        for (int v = 0; v < 20; v++) begin
          int x [BMW];
          for (int c = 0; c < BMW; c++) x[c] = int'($urandom % 256);
          for (int r = 0; r < BMH; r++) begin
            int acc; acc = 0;
            for (int c = 0; c < BMW; c++) acc += bw[r][c] * x[c];
            b_exp.push_back(acc);
          end
          for (int w = 0; w < BMW / BIE; w++) begin
            @(negedge clk); b_iv = 1;
            for (int e = 0; e < BIE; e++) b_id[e*BIB +: BIB] = BIB'(x[w*BIE + e]);
            @(posedge clk); while (!b_ir) @(posedge clk);
          end
        end
        @(negedge clk); b_iv = 0;
      end
    join
    repeat (100) @(posedge clk);
    checks++; if (a_outs != 20 * AMH / APE) begin failures++; $display("A: %0d output words", a_outs); end
    checks++; if (b_outs != 20 * BMH / BPE) begin failures++; $display("B: %0d output words", b_outs); end
    // period of B in steady state: MW/IN_ELEMS + NF*(SF+1) = 5 + 2*(2+1) = 11
    for (int v = 1; v < b_start.size(); v++) begin
      checks++;
      if (b_start[v] - b_start[v-1] != 11) begin
        failures++; $display("B: vector period %0d, expected 11", b_start[v] - b_start[v-1]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
