// tb_kws_mlp: self-checking test of the keyword-spotting core at reduced
// size (20 inputs, hidden width 8, 4 classes; the default network is
// 490-256-256-256-12). Random 3-bit weights and sorted thresholds are loaded
// into the four layers; 40 random 8-bit feature vectors are streamed in back
// to back and each returned class index is compared with a reference of the
// same network computed here (matrix products, threshold counts, argmax with
// the lowest index winning ties). Also checks that the inter-layer FIFOs
// were used and that all four classes occurred.
module tb_kws_mlp;
  import tinyml_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NI = 20, NH = 8, NC = 4, IE = 4, NT = 7;
  logic we; logic [3:0] layer; logic [1:0] sel; logic [31:0] addr, data;
  logic iv, ir, ov, orr, clr;
  logic [IE*8-1:0] id;
  logic [1:0] od;
  logic [15:0] fmax [4];

  kws_mlp #(.N_IN(NI), .N_HID(NH), .N_CLASS(NC), .IN_ELEMS(IE), .SIMD1(4), .PE1(4),
            .SIMD_H(4), .PE_H(2), .PE_OUT(2), .FIFO_DEPTH(2), .IDX_W(2)) dut (
    .clk, .rst_n, .cfg_we(we), .cfg_layer(layer), .cfg_sel(sel), .cfg_addr(addr), .cfg_data(data),
    .in_valid(iv), .in_ready(ir), .in_data(id), .out_valid(ov), .out_ready(orr), .out_data(od),
    .clear_max(clr), .fifo_max(fmax));

  int w1 [NH][NI], w2 [NH][NH], w3 [NH][NH], w4 [NC][NH];
  int t1 [NH][NT], t2 [NH][NT], t3 [NH][NT];
  int exp_q [$];
  int seen [NC];
  int results = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg(input int l, input logic [1:0] s, input int a, input int d);
    @(negedge clk); we = 1; layer = 4'(l); sel = s; addr = 32'(a); data = 32'(d);
  endtask

  function automatic int thr_count(input int acc, input int t [NT]);
    int n = 0;
    for (int i = 0; i < NT; i++) if (acc >= t[i]) n++;
    return n;
  endfunction

  always @(posedge clk) if (rst_n && ov && orr) begin
    checks++;
    if (exp_q.size() == 0 || int'(od) != exp_q[0]) begin
      failures++; $display("class %0d, expected %0d", od, exp_q.size() ? exp_q[0] : -1);
    end
    if (exp_q.size()) void'(exp_q.pop_front());
    seen[od]++;
    results++;
  end
  always @(negedge clk) orr <= ($urandom % 4) != 0;

  initial begin
    we = 0; layer = 0; sel = 0; addr = 0; data = 0; iv = 0; id = 0; clr = 0;
    for (int c = 0; c < NC; c++) seen[c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < NH; r++) begin
      int b;
      for (int c = 0; c < NI; c++) begin w1[r][c] = int'($urandom % 8) - 4; cfg(0, CFG_WEIGHT, r*NI + c, w1[r][c]); end
      for (int c = 0; c < NH; c++) begin w2[r][c] = int'($urandom % 8) - 4; cfg(1, CFG_WEIGHT, r*NH + c, w2[r][c]); end
      for (int c = 0; c < NH; c++) begin w3[r][c] = int'($urandom % 8) - 4; cfg(2, CFG_WEIGHT, r*NH + c, w3[r][c]); end
      b = -int'($urandom % 1500);
      for (int t = 0; t < NT; t++) begin b += int'($urandom % 400); t1[r][t] = b; cfg(0, CFG_THRESHOLD, r*NT + t, b); end
      b = -int'($urandom % 20);
      for (int t = 0; t < NT; t++) begin b += int'($urandom % 8); t2[r][t] = b; cfg(1, CFG_THRESHOLD, r*NT + t, b); end
      b = -int'($urandom % 20);
      for (int t = 0; t < NT; t++) begin b += int'($urandom % 8); t3[r][t] = b; cfg(2, CFG_THRESHOLD, r*NT + t, b); end
    end
    for (int r = 0; r < NC; r++)
      for (int c = 0; c < NH; c++) begin w4[r][c] = int'($urandom % 8) - 4; cfg(3, CFG_WEIGHT, r*NH + c, w4[r][c]); end
    @(negedge clk); we = 0;

    for (int v = 0; v < 40; v++) begin
      int x [NI]; int h1 [NH]; int h2 [NH]; int h3 [NH]; int best, bestv;
      for (int c = 0; c < NI; c++) x[c] = int'($urandom % 256);
      for (int r = 0; r < NH; r++) begin
        int a; a = 0; for (int c = 0; c < NI; c++) a += w1[r][c] * x[c]; h1[r] = thr_count(a, t1[r]);
      end
      for (int r = 0; r < NH; r++) begin
        int a; a = 0; for (int c = 0; c < NH; c++) a += w2[r][c] * h1[c]; h2[r] = thr_count(a, t2[r]);
      end
      for (int r = 0; r < NH; r++) begin
        int a; a = 0; for (int c = 0; c < NH; c++) a += w3[r][c] * h2[c]; h3[r] = thr_count(a, t3[r]);
      end
      best = 0; bestv = 0;
      for (int r = 0; r < NC; r++) begin
        int a; a = 0; for (int c = 0; c < NH; c++) a += w4[r][c] * h3[c];
        if (r == 0 || a > bestv) begin best = r; bestv = a; end
      end
      exp_q.push_back(best);
      for (int w = 0; w < NI / IE; w++) begin
        @(negedge clk); iv = 1;
        for (int e = 0; e < IE; e++) id[e*8 +: 8] = 8'(x[w*IE + e]);
        @(posedge clk); while (!ir) @(posedge clk);
      end
    end
    @(negedge clk); iv = 0;
    while (results < 40) @(posedge clk);
    checks++; if (fmax[0] == 0 || fmax[3] == 0) begin failures++; $display("FIFOs never used"); end
    checks++;
    if (seen[0] == 0 && seen[1] == 0 || seen[2] == 0 && seen[3] == 0) begin
      failures++; $display("class outputs too uniform: %0d %0d %0d %0d", seen[0], seen[1], seen[2], seen[3]);
    end
    $display("classes seen: %0d %0d %0d %0d", seen[0], seen[1], seen[2], seen[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
