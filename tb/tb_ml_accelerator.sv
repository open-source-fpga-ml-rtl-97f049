// tb_ml_accelerator: end-to-end test of the whole accelerator at its default
// size, the keyword-spotting configuration (490 -> 256 -> 256 -> 256 -> 12
// MLP, 3-bit weights and activations). The top is instantiated with no
// parameter overrides.
//
// The test loads all 259,584 weights and 2,688 thresholds through the cfg
// port, places input arrays of 490 16-bit fixed-point elements in a
// behavioural AXI memory that stalls at random, programs the AXI-Lite
// registers (input address, output address, start), polls CTRL until done
// and compares the class index written back with a reference network
// computed here. Three inferences are run; the first input array straddles a
// 4 KiB boundary so the read mover must split a burst there.
//
// Mechanisms counted, each must happen at least once: memory stall cycles,
// a read burst starting on a 4 KiB boundary (the split), done clearing when
// CTRL is read, idle going high after a run, a non-zero cycle counter, use of
// every FIFO, back-pressure on the read data channel, and correct placement
// of the output (the bytes after the 2-byte result stay untouched).
module tb_ml_accelerator;
  import tinyml_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NI = 490, NH = 256, NC = 12, NT = 7, DW = 64;
  localparam int RUNS = 3;

  // AXI-Lite
  logic [7:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  // AXI4 masters
  logic [31:0] i_araddr, o_awaddr;
  logic [7:0]  i_arlen, o_awlen;
  logic [2:0]  i_arsize, o_awsize;
  logic [1:0]  i_arburst, o_awburst, i_rresp, o_bresp;
  logic        i_arvalid, i_arready, i_rlast, i_rvalid, i_rready;
  logic        o_awvalid, o_awready, o_wlast, o_wvalid, o_wready, o_bvalid, o_bready;
  logic [DW-1:0]   i_rdata, o_wdata;
  logic [DW/8-1:0] o_wstrb;
  // unused read side of the output memory and write side of the input memory
  logic        n_arready, n_rlast, n_rvalid, n_awready, n_wready, n_bvalid;
  logic [DW-1:0] n_rdata;
  logic [1:0]  n_rresp, n_bresp;
  // cfg
  logic we; logic [3:0] layer; logic [1:0] sel; logic [31:0] addr, data;
  logic clr;
  logic [15:0] fmax [8];

  ml_accelerator dut (
    .clk, .rst_n,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .m_axi_in_araddr(i_araddr), .m_axi_in_arlen(i_arlen), .m_axi_in_arsize(i_arsize),
    .m_axi_in_arburst(i_arburst), .m_axi_in_arvalid(i_arvalid), .m_axi_in_arready(i_arready),
    .m_axi_in_rdata(i_rdata), .m_axi_in_rresp(i_rresp), .m_axi_in_rlast(i_rlast),
    .m_axi_in_rvalid(i_rvalid), .m_axi_in_rready(i_rready),
    .m_axi_out_awaddr(o_awaddr), .m_axi_out_awlen(o_awlen), .m_axi_out_awsize(o_awsize),
    .m_axi_out_awburst(o_awburst), .m_axi_out_awvalid(o_awvalid), .m_axi_out_awready(o_awready),
    .m_axi_out_wdata(o_wdata), .m_axi_out_wstrb(o_wstrb), .m_axi_out_wlast(o_wlast),
    .m_axi_out_wvalid(o_wvalid), .m_axi_out_wready(o_wready),
    .m_axi_out_bresp(o_bresp), .m_axi_out_bvalid(o_bvalid), .m_axi_out_bready(o_bready),
    .cfg_we(we), .cfg_layer(layer), .cfg_sel(sel), .cfg_addr(addr), .cfg_data(data),
    .clear_max(clr), .fifo_max(fmax));

  // Input array memory (stalls 30 % of cycles) and output array memory.
  axi_mem_model #(.DATA_W(DW), .SIZE(16384), .STALL(30)) u_imem (
    .clk, .rst_n,
    .araddr(i_araddr), .arlen(i_arlen), .arsize(i_arsize), .arburst(i_arburst),
    .arvalid(i_arvalid), .arready(i_arready), .rdata(i_rdata), .rresp(i_rresp),
    .rlast(i_rlast), .rvalid(i_rvalid), .rready(i_rready),
    .awaddr('0), .awlen('0), .awsize('0), .awburst('0), .awvalid(1'b0), .awready(n_awready),
    .wdata('0), .wstrb('0), .wlast(1'b0), .wvalid(1'b0), .wready(n_wready),
    .bresp(n_bresp), .bvalid(n_bvalid), .bready(1'b1));
  axi_mem_model #(.DATA_W(DW), .SIZE(4096), .STALL(20)) u_omem (
    .clk, .rst_n,
    .araddr('0), .arlen('0), .arsize('0), .arburst('0), .arvalid(1'b0), .arready(n_arready),
    .rdata(n_rdata), .rresp(n_rresp), .rlast(n_rlast), .rvalid(n_rvalid), .rready(1'b1),
    .awaddr(o_awaddr), .awlen(o_awlen), .awsize(o_awsize), .awburst(o_awburst),
    .awvalid(o_awvalid), .awready(o_awready), .wdata(o_wdata), .wstrb(o_wstrb),
    .wlast(o_wlast), .wvalid(o_wvalid), .wready(o_wready),
    .bresp(o_bresp), .bvalid(o_bvalid), .bready(o_bready));

  // Network parameters kept for the reference model.
  byte w1 [NH][NI];
  byte w2 [NH][NH], w3 [NH][NH], w4 [NC][NH];
  int  t1 [NH][NT], t2 [NH][NT], t3 [NH][NT];

  int n_split = 0, n_rd_bp = 0, n_done_clear = 0, n_idle = 0, n_cycles = 0, n_place = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (i_arvalid && i_arready && i_araddr[11:0] == 12'h000) n_split++;
    if (i_rvalid && !i_rready) n_rd_bp++;
  end

  task automatic lite_write(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); awaddr = a; awvalid = 1; wdata = d; wstrb = 4'hF; wvalid = 1; bready = 1;
    fork
      begin @(posedge clk); while (!awready) @(posedge clk); @(negedge clk); awvalid = 0; end
      begin @(posedge clk); while (!wready)  @(posedge clk); @(negedge clk); wvalid  = 0; end
    join
    while (!bvalid) @(posedge clk);
    @(negedge clk);
    checks++; if (bresp != AXI_RESP_OKAY) begin failures++; $display("write %h: bresp %0d", a, bresp); end
  endtask

  task automatic lite_read(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk); araddr = a; arvalid = 1; rready = 1;
    @(posedge clk); while (!arready) @(posedge clk);
    @(negedge clk); arvalid = 0;
    while (!rvalid) @(posedge clk);
    d = rdata;
    @(negedge clk);
  endtask

  task automatic cfg(input int l, input logic [1:0] s, input int a, input int d);
    @(negedge clk); we = 1; layer = 4'(l); sel = s; addr = 32'(a); data = 32'(d);
  endtask

  function automatic int thr_count(input int acc, input int t [NT]);
    int n = 0;
    for (int i = 0; i < NT; i++) if (acc >= t[i]) n++;
    return n;
  endfunction

  initial begin
    static logic [31:0] in_base  [RUNS] = '{32'h0000_0F80, 32'h0000_2000, 32'h0000_3000};
    static logic [31:0] out_base [RUNS] = '{32'h0000_0100, 32'h0000_0206, 32'h0000_0300};
    logic [31:0] r;
    awaddr = 0; awvalid = 0; wdata = 0; wstrb = 0; wvalid = 0; bready = 0;
    araddr = 0; arvalid = 0; rready = 0;
    we = 0; layer = 0; sel = 0; addr = 0; data = 0; clr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- network parameters --------------------------------------------------
    for (int rr = 0; rr < NH; rr++) begin
      int b;
      for (int c = 0; c < NI; c++) begin w1[rr][c] = byte'(int'($urandom % 8) - 4); cfg(0, CFG_WEIGHT, rr*NI + c, w1[rr][c]); end
      for (int c = 0; c < NH; c++) begin w2[rr][c] = byte'(int'($urandom % 8) - 4); cfg(1, CFG_WEIGHT, rr*NH + c, w2[rr][c]); end
      for (int c = 0; c < NH; c++) begin w3[rr][c] = byte'(int'($urandom % 8) - 4); cfg(2, CFG_WEIGHT, rr*NH + c, w3[rr][c]); end
      b = -38000 + int'($urandom % 8000);
      for (int t = 0; t < NT; t++) begin b += int'($urandom % 4000); t1[rr][t] = b; cfg(0, CFG_THRESHOLD, rr*NT + t, b); end
      b = -560 + int'($urandom % 200);
      for (int t = 0; t < NT; t++) begin b += int'($urandom % 60); t2[rr][t] = b; cfg(1, CFG_THRESHOLD, rr*NT + t, b); end
      b = -560 + int'($urandom % 200);
      for (int t = 0; t < NT; t++) begin b += int'($urandom % 60); t3[rr][t] = b; cfg(2, CFG_THRESHOLD, rr*NT + t, b); end
    end
    for (int rr = 0; rr < NC; rr++)
      for (int c = 0; c < NH; c++) begin w4[rr][c] = byte'(int'($urandom % 8) - 4); cfg(3, CFG_WEIGHT, rr*NH + c, w4[rr][c]); end
    @(negedge clk); we = 0;
    $display("parameters loaded at cycle %0d", cyc);

    // ---- inferences ----------------------------------------------------------------
    for (int run = 0; run < RUNS; run++) begin
      int x [NI]; int h1 [NH]; int h2 [NH]; int h3 [NH]; int best, bestv, got;
      longint t0;
      for (int c = 0; c < NI; c++) begin
        x[c] = int'($urandom % 256);
        u_imem.mem[in_base[run] + 2*c]     = 8'($urandom);   // fraction byte, dropped
        u_imem.mem[in_base[run] + 2*c + 1] = 8'(x[c]);       // integer byte
      end
      for (int k = 0; k < 8; k++) u_omem.mem[out_base[run] + k] = 8'hA5;
      for (int rr = 0; rr < NH; rr++) begin
        int a; a = 0; for (int c = 0; c < NI; c++) a += int'(w1[rr][c]) * x[c]; h1[rr] = thr_count(a, t1[rr]);
      end
      for (int rr = 0; rr < NH; rr++) begin
        int a; a = 0; for (int c = 0; c < NH; c++) a += int'(w2[rr][c]) * h1[c]; h2[rr] = thr_count(a, t2[rr]);
      end
      for (int rr = 0; rr < NH; rr++) begin
        int a; a = 0; for (int c = 0; c < NH; c++) a += int'(w3[rr][c]) * h2[c]; h3[rr] = thr_count(a, t3[rr]);
      end
      best = 0; bestv = 0;
      for (int rr = 0; rr < NC; rr++) begin
        int a; a = 0; for (int c = 0; c < NH; c++) a += int'(w4[rr][c]) * h3[c];
        if (rr == 0 || a > bestv) begin best = rr; bestv = a; end
      end

      lite_write(REG_IN_LO, in_base[run]);
      lite_write(REG_OUT_LO, out_base[run]);
      lite_write(REG_CTRL, 32'h1);
      t0 = cyc;
      do lite_read(REG_CTRL, r); while (!r[CTRL_DONE_BIT] && cyc - t0 < 100000);
      checks++; if (!r[CTRL_DONE_BIT]) begin failures++; $display("run %0d never finished", run); end
      lite_read(REG_CTRL, r);
      if (!r[CTRL_DONE_BIT]) n_done_clear++;
      if (r[CTRL_IDLE_BIT]) n_idle++;
      lite_read(REG_CYCLES, r);
      if (r != 0) n_cycles++;
      $display("run %0d: %0d cycles counted by the accelerator, class %0d expected (hidden sums %0d %0d %0d)", run, r, best, h1.sum(), h2.sum(), h3.sum());
      checks++; if (r > 5000) begin failures++; $display("run took %0d cycles", r); end
      lite_read(REG_STATUS, r);
      checks++; if (r != 0) begin failures++; $display("status %h", r); end

      got = int'({u_omem.mem[out_base[run] + 1], u_omem.mem[out_base[run]]});
      checks++; if (got != best) begin failures++; $display("run %0d: class %0d, expected %0d", run, got, best); end
      if (u_omem.mem[out_base[run] + 2] == 8'hA5 && u_omem.mem[out_base[run] + 7] == 8'hA5) n_place++;
    end

    checks++; if (u_imem.stalls == 0)     begin failures++; $display("no memory stall happened"); end
    checks++; if (u_imem.crossings != 0)  begin failures++; $display("a burst crossed 4 KiB"); end
    checks++; if (n_split == 0)           begin failures++; $display("no burst split at 4 KiB"); end
    checks++; if (n_rd_bp == 0)           begin failures++; $display("no read back-pressure"); end
    checks++; if (n_done_clear != RUNS)   begin failures++; $display("done did not clear on read"); end
    checks++; if (n_idle != RUNS)         begin failures++; $display("idle not set after run"); end
    checks++; if (n_cycles != RUNS)       begin failures++; $display("cycle counter stayed 0"); end
    checks++; if (n_place != RUNS)        begin failures++; $display("output bytes beyond result touched"); end
    for (int f = 0; f < 6; f++) begin
      checks++; if (fmax[f] == 0) begin failures++; $display("FIFO %0d never used", f); end
    end
    $display("stalls %0d, 4K splits %0d, read back-pressure cycles %0d, FIFO high-water %0d %0d %0d %0d %0d %0d",
             u_imem.stalls, n_split, n_rd_bp, fmax[0], fmax[1], fmax[2], fmax[3], fmax[4], fmax[5]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
