// tb_dense_rf: self-checking test of dense_rf.
// Two small layers: A (6 in, 4 out, reuse factor 8 -> 3 multipliers, ReLU)
// and B (4 in, 6 out, reuse factor 6 -> 4 multipliers, linear). Weights and
// biases are random, loaded through the cfg port; 40 random vectors each,
// some of them large enough to saturate. Every output is compared with the
// fixed-point result computed here ((sum x*w + b*2^W_FRAC) >> W_FRAC, ReLU,
// saturation to 12 bits). The latency from input accepted to out_valid is
// checked to be RF + 1 cycles.
module tb_dense_rf;
  import tinyml_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int sats = 0, relus = 0;

  localparam int WF = 4;
  localparam int AI = 6, AO = 4, ARF = 8;
  localparam int BI = 4, BO = 6, BRF = 6;

  logic a_we, b_we; logic [1:0] a_sel, b_sel; logic [31:0] a_addr, a_data, b_addr, b_data;
  logic a_iv, a_ir, a_ov, a_or, b_iv, b_ir, b_ov, b_or;
  logic [AI*12-1:0] a_id; logic [AO*12-1:0] a_od;
  logic [BI*12-1:0] b_id; logic [BO*12-1:0] b_od;

  dense_rf #(.N_IN(AI), .N_OUT(AO), .RF(ARF), .IN_W(12), .OUT_W(12), .W_W(6), .W_FRAC(WF),
             .B_W(12), .ACC_W(32), .RELU(1'b1)) dut_a (
    .clk, .rst_n, .cfg_we(a_we), .cfg_sel(a_sel), .cfg_addr(a_addr), .cfg_data(a_data),
    .in_valid(a_iv), .in_ready(a_ir), .in_data(a_id), .out_valid(a_ov), .out_ready(a_or), .out_data(a_od));
  dense_rf #(.N_IN(BI), .N_OUT(BO), .RF(BRF), .IN_W(12), .OUT_W(12), .W_W(6), .W_FRAC(WF),
             .B_W(12), .ACC_W(32), .RELU(1'b0)) dut_b (
    .clk, .rst_n, .cfg_we(b_we), .cfg_sel(b_sel), .cfg_addr(b_addr), .cfg_data(b_data),
    .in_valid(b_iv), .in_ready(b_ir), .in_data(b_id), .out_valid(b_ov), .out_ready(b_or), .out_data(b_od));

  int aw [AI][AO], ab [AO], bw [BI][BO], bb [BO];

  function automatic int ref_out(input int acc, input bit relu);
    int v;
    v = acc >>> WF;
    if (relu && v < 0) v = 0;
    if (v > 2047) v = 2047;
    if (v < -2048) v = -2048;
    return v;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg_a(input logic [1:0] sel, input int addr, input int data);
    @(negedge clk); a_we = 1; a_sel = sel; a_addr = 32'(addr); a_data = 32'(data);
    @(negedge clk); a_we = 0;
  endtask
  task automatic cfg_b(input logic [1:0] sel, input int addr, input int data);
    @(negedge clk); b_we = 1; b_sel = sel; b_addr = 32'(addr); b_data = 32'(data);
    @(negedge clk); b_we = 0;
  endtask

  initial begin
    a_we = 0; b_we = 0; a_iv = 0; b_iv = 0; a_or = 1; b_or = 0;
    a_sel = '0; b_sel = '0; a_addr = '0; b_addr = '0; a_data = '0; b_data = '0; a_id = '0; b_id = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < AI; i++) for (int o = 0; o < AO; o++) begin
      aw[i][o] = int'($urandom % 64) - 32; cfg_a(CFG_WEIGHT, i * AO + o, aw[i][o]);
    end
    for (int o = 0; o < AO; o++) begin ab[o] = int'($urandom % 512) - 256; cfg_a(CFG_BIAS, o, ab[o]); end
    for (int i = 0; i < BI; i++) for (int o = 0; o < BO; o++) begin
      bw[i][o] = int'($urandom % 64) - 32; cfg_b(CFG_WEIGHT, i * BO + o, bw[i][o]);
    end
    for (int o = 0; o < BO; o++) begin bb[o] = int'($urandom % 512) - 256; cfg_b(CFG_BIAS, o, bb[o]); end

    // ---- layer A: latency and values ----
    for (int v = 0; v < 40; v++) begin
      int x [AI]; int t0, lat;
      for (int i = 0; i < AI; i++) x[i] = (v % 4 == 3) ? int'($urandom % 4096) - 2048 : int'($urandom % 512) - 256;
      @(negedge clk); a_iv = 1;
      for (int i = 0; i < AI; i++) a_id[i*12 +: 12] = 12'(x[i]);
      @(posedge clk); while (!a_ir) @(posedge clk);
      t0 = $time;
      @(negedge clk); a_iv = 0;
      while (!a_ov) @(posedge clk);
      lat = ($time - t0) / 10;
      checks++; if (lat != ARF + 1) begin failures++; $display("A latency %0d", lat); end
      #1;
      for (int o = 0; o < AO; o++) begin
        int acc, e;
        acc = ab[o] * (1 << WF);
        for (int i = 0; i < AI; i++) acc += x[i] * aw[i][o];
        e = ref_out(acc, 1);
        if ((acc >>> WF) > 2047 || (acc >>> WF) < -2048) sats++;
        if ((acc >>> WF) < 0) relus++;
        checks++;
        if (int'(signed'(a_od[o*12 +: 12])) != e) begin
          failures++; $display("A v%0d o%0d: got %0d exp %0d", v, o, signed'(a_od[o*12 +: 12]), e);
        end
      end
      @(posedge clk);
    end
    // ---- layer B: values under output back-pressure ----
    for (int v = 0; v < 40; v++) begin
      int x [BI];
      for (int i = 0; i < BI; i++) x[i] = int'($urandom % 4096) - 2048;
      @(negedge clk); b_iv = 1;
      for (int i = 0; i < BI; i++) b_id[i*12 +: 12] = 12'(x[i]);
      @(posedge clk); while (!b_ir) @(posedge clk);
      @(negedge clk); b_iv = 0;
      repeat ($urandom % 12 + BRF) @(negedge clk);
      b_or = 1;
      @(posedge clk); while (!b_ov) @(posedge clk);
      #1;
      for (int o = 0; o < BO; o++) begin
        int acc, e;
        acc = bb[o] * (1 << WF);
        for (int i = 0; i < BI; i++) acc += x[i] * bw[i][o];
        e = ref_out(acc, 0);
        checks++;
        if (int'(signed'(b_od[o*12 +: 12])) != e) begin
          failures++; $display("B v%0d o%0d: got %0d exp %0d", v, o, signed'(b_od[o*12 +: 12]), e);
        end
      end
      @(negedge clk); b_or = 0;
    end
    checks++; if (sats == 0 || relus == 0) begin failures++; $display("saturation or ReLU never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
