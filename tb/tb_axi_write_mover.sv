// tb_axi_write_mover: self-checking test of axi_write_mover.
// 13 12-bit signed elements arrive as stream words of one element (and in a
// second instance 12 4-bit unsigned elements in words of 4); they are written
// as 16-bit elements, 4 to a 64-bit word, in bursts of at most 2 beats (A
// starts 16 bytes below a 4 KiB boundary, so its first burst is cut) to a
// memory model that stalls 30% of the time. The memory contents are compared
// with the sign- or zero-extended values, the bytes just past the array must
// be untouched (write strobes of the partial last beat), done must come only
// after the last write response, and no burst may cross 4 KiB.
module tb_axi_write_mover;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // instance A: 13 signed 12-bit elements, PACK 1
  logic a_start, a_busy, a_done, a_err, a_iv, a_ir; logic [11:0] a_id;
  logic [31:0] a_awaddr; logic [7:0] a_awlen; logic [2:0] a_awsize; logic [1:0] a_awburst;
  logic a_awvalid, a_awready, a_wlast, a_wvalid, a_wready, a_bvalid, a_bready;
  logic [63:0] a_wdata; logic [7:0] a_wstrb; logic [1:0] a_bresp;
  // instance B: 12 unsigned 4-bit elements, PACK 4
  logic b_start, b_busy, b_done, b_err, b_iv, b_ir; logic [15:0] b_id;
  logic [31:0] b_awaddr; logic [7:0] b_awlen; logic [2:0] b_awsize; logic [1:0] b_awburst;
  logic b_awvalid, b_awready, b_wlast, b_wvalid, b_wready, b_bvalid, b_bready;
  logic [63:0] b_wdata; logic [7:0] b_wstrb; logic [1:0] b_bresp;
  // unused read channels of the memory models
  logic [31:0] araddr = 0; logic [7:0] arlen = 0; logic [2:0] arsize = 0; logic [1:0] arburst = 0;
  logic arvalid = 0, rready = 0;
  logic a_arready, a_rvalid, a_rlast, b_arready, b_rvalid, b_rlast;
  logic [63:0] a_rdata, b_rdata; logic [1:0] a_rresp, b_rresp;

  logic [31:0] a_base, b_base;

  axi_write_mover #(.DATA_W(64), .ELEM_W(16), .IN_W(12), .N_ELEMS(13), .PACK(1), .MAX_BURST(2),
                    .SIGN_EXT(1'b1)) dut_a (
    .clk, .rst_n, .start(a_start), .base_addr(a_base), .busy(a_busy), .done(a_done), .err(a_err),
    .in_valid(a_iv), .in_ready(a_ir), .in_data(a_id),
    .m_axi_awaddr(a_awaddr), .m_axi_awlen(a_awlen), .m_axi_awsize(a_awsize), .m_axi_awburst(a_awburst),
    .m_axi_awvalid(a_awvalid), .m_axi_awready(a_awready), .m_axi_wdata(a_wdata), .m_axi_wstrb(a_wstrb),
    .m_axi_wlast(a_wlast), .m_axi_wvalid(a_wvalid), .m_axi_wready(a_wready),
    .m_axi_bresp(a_bresp), .m_axi_bvalid(a_bvalid), .m_axi_bready(a_bready));
  axi_mem_model #(.DATA_W(64), .SIZE(16384), .STALL(30)) mem_a (.clk, .rst_n,
    .araddr, .arlen, .arsize, .arburst, .arvalid, .arready(a_arready), .rdata(a_rdata), .rresp(a_rresp),
    .rlast(a_rlast), .rvalid(a_rvalid), .rready,
    .awaddr(a_awaddr), .awlen(a_awlen), .awsize(a_awsize), .awburst(a_awburst), .awvalid(a_awvalid),
    .awready(a_awready), .wdata(a_wdata), .wstrb(a_wstrb), .wlast(a_wlast), .wvalid(a_wvalid),
    .wready(a_wready), .bresp(a_bresp), .bvalid(a_bvalid), .bready(a_bready));

  axi_write_mover #(.DATA_W(64), .ELEM_W(16), .IN_W(4), .N_ELEMS(12), .PACK(4), .MAX_BURST(2),
                    .SIGN_EXT(1'b0)) dut_b (
    .clk, .rst_n, .start(b_start), .base_addr(b_base), .busy(b_busy), .done(b_done), .err(b_err),
    .in_valid(b_iv), .in_ready(b_ir), .in_data(b_id),
    .m_axi_awaddr(b_awaddr), .m_axi_awlen(b_awlen), .m_axi_awsize(b_awsize), .m_axi_awburst(b_awburst),
    .m_axi_awvalid(b_awvalid), .m_axi_awready(b_awready), .m_axi_wdata(b_wdata), .m_axi_wstrb(b_wstrb),
    .m_axi_wlast(b_wlast), .m_axi_wvalid(b_wvalid), .m_axi_wready(b_wready),
    .m_axi_bresp(b_bresp), .m_axi_bvalid(b_bvalid), .m_axi_bready(b_bready));
  axi_mem_model #(.DATA_W(64), .SIZE(16384), .STALL(30)) mem_b (.clk, .rst_n,
    .araddr, .arlen, .arsize, .arburst, .arvalid, .arready(b_arready), .rdata(b_rdata), .rresp(b_rresp),
    .rlast(b_rlast), .rvalid(b_rvalid), .rready,
    .awaddr(b_awaddr), .awlen(b_awlen), .awsize(b_awsize), .awburst(b_awburst), .awvalid(b_awvalid),
    .awready(b_awready), .wdata(b_wdata), .wstrb(b_wstrb), .wlast(b_wlast), .wvalid(b_wvalid),
    .wready(b_wready), .bresp(b_bresp), .bvalid(b_bvalid), .bready(b_bready));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int a_vals [13], b_vals [12];
  bit a_early = 0, b_early = 0, a_seen = 0, b_seen = 0;
  // done must not come while a write response is still outstanding
  always @(posedge clk) if (rst_n) begin
    if (a_done && (mem_a.w_act || a_wvalid)) a_early = 1;
    if (b_done && (mem_b.w_act || b_wvalid)) b_early = 1;
    if (a_done) a_seen = 1;
    if (b_done) b_seen = 1;
  end

  function automatic int rd16(input int which, input int addr);
    if (which == 0) return int'({mem_a.mem[addr + 1], mem_a.mem[addr]});
    else            return int'({mem_b.mem[addr + 1], mem_b.mem[addr]});
  endfunction

  initial begin
    a_start = 0; b_start = 0; a_iv = 0; b_iv = 0; a_id = 0; b_id = 0; a_base = 0; b_base = 0;
    for (int i = 0; i < 16384; i++) begin mem_a.mem[i] = 8'h5A; mem_b.mem[i] = 8'h5A; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); a_base = 4096 - 16; b_base = 200; a_start = 1; b_start = 1;
    @(negedge clk); a_start = 0; b_start = 0;
    fork
      for (int i = 0; i < 13; i++) begin
        a_vals[i] = int'($urandom % 4096) - 2048;
        @(negedge clk); while ($urandom % 3 == 0) begin a_iv = 0; @(negedge clk); end
        a_iv = 1; a_id = 12'(a_vals[i]);
        @(posedge clk); while (!a_ir) @(posedge clk);
        @(negedge clk); a_iv = 0;
      end
      for (int w = 0; w < 3; w++) begin
        @(negedge clk); b_iv = 1;
        for (int e = 0; e < 4; e++) begin b_vals[w*4 + e] = int'($urandom % 16); b_id[e*4 +: 4] = 4'(b_vals[w*4 + e]); end
        @(posedge clk); while (!b_ir) @(posedge clk);
        @(negedge clk); b_iv = 0;
      end
    join
    while (!(a_seen && b_seen)) @(posedge clk);
    repeat (3) @(negedge clk);
    for (int i = 0; i < 13; i++) begin
      checks++;
      if (rd16(0, 4096 - 16 + 2*i) != (a_vals[i] & 32'hFFFF)) begin
        failures++; $display("A elem %0d: got %h exp %h", i, rd16(0, 4096 - 16 + 2*i), a_vals[i] & 32'hFFFF);
      end
    end
    for (int i = 0; i < 12; i++) begin
      checks++;
      if (rd16(1, 200 + 2*i) != b_vals[i]) begin failures++; $display("B elem %0d wrong", i); end
    end
    checks++; if (rd16(0, 4096 - 16 + 26) != 32'h5A5A) begin failures++; $display("A wrote past the array"); end
    checks++; if (rd16(1, 200 + 24) != 32'h5A5A) begin failures++; $display("B wrote past the array"); end
    checks++; if (mem_a.crossings != 0) begin failures++; $display("A crossed 4 KiB"); end
    checks++; if (mem_a.wr_bursts != 2 || mem_b.wr_bursts != 2) begin failures++; $display("bursts %0d %0d exp 2 2", mem_a.wr_bursts, mem_b.wr_bursts); end
    checks++; if (mem_a.bad_len != 0 || mem_b.bad_len != 0) begin failures++; $display("WLAST misplaced"); end
    checks++; if (a_early || b_early) begin failures++; $display("done before last response"); end
    checks++; if (a_busy || b_busy || a_err || b_err) begin failures++; $display("still busy or error"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
