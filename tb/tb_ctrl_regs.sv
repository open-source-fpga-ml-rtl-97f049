// tb_ctrl_regs: self-checking test of ctrl_regs.
// AXI4-Lite writes and reads with byte strobes and a slow response consumer:
// address registers read back, start is handed out as one pulse only while
// the core is idle, done is set by the core and cleared by reading CTRL,
// idle reflects the run state, CYCLES holds the run length and STATUS the
// error flags.
module tb_ctrl_regs;
  import tinyml_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [7:0] awaddr, araddr; logic awvalid, awready, wvalid, wready, bvalid, bready;
  logic [31:0] wdata, rdata; logic [3:0] wstrb; logic [1:0] bresp, rresp;
  logic arvalid, arready, rvalid, rready;
  logic core_start, core_done, in_err, out_err;
  logic [31:0] in_addr, out_addr;

  ctrl_regs dut (.clk, .rst_n, .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .core_start, .in_addr, .out_addr, .core_done, .in_err, .out_err);

  int starts = 0;
  always @(negedge clk) if (core_start) starts++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic axil_write(input logic [7:0] a, input logic [31:0] d, input logic [3:0] s);
    @(negedge clk); awaddr = a; wdata = d; wstrb = s; awvalid = 1; wvalid = 1;
    @(posedge clk); while (!(awready && wready)) @(posedge clk);
    @(negedge clk); awvalid = 0; wvalid = 0;
    repeat ($urandom % 3) @(negedge clk);
    bready = 1;
    @(posedge clk); while (!bvalid) @(posedge clk);
    @(negedge clk); bready = 0;
  endtask

  task automatic axil_read(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk); araddr = a; arvalid = 1;
    @(posedge clk); while (!arready) @(posedge clk);
    @(negedge clk); arvalid = 0;
    repeat ($urandom % 3) @(negedge clk);
    rready = 1;
    @(posedge clk); while (!rvalid) @(posedge clk);
    d = rdata;
    @(negedge clk); rready = 0;
  endtask

  task automatic expect_eq(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h expected %h", what, got, exp); end
  endtask

  initial begin
    logic [31:0] d;
    awaddr = 0; araddr = 0; awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0;
    wdata = 0; wstrb = 0; core_done = 0; in_err = 0; out_err = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    axil_read(REG_CTRL, d);  expect_eq("idle after reset", d, 32'h4);
    axil_write(REG_IN_LO, 32'h1234_5678, 4'hF);
    axil_write(REG_OUT_LO, 32'hCAFE_0000, 4'hF);
    axil_write(REG_OUT_LO, 32'h0000_BEEF, 4'h3);     // strobes: low half only
    axil_read(REG_IN_LO, d);  expect_eq("IN", d, 32'h1234_5678);
    axil_read(REG_OUT_LO, d); expect_eq("OUT", d, 32'hCAFE_BEEF);
    expect_eq("in_addr port", in_addr, 32'h1234_5678);
    expect_eq("out_addr port", out_addr, 32'hCAFE_BEEF);
    // run 1: 37 cycles
    axil_write(REG_CTRL, 32'h1, 4'h1);
    repeat (2) @(posedge clk);
    expect_eq("one start pulse", 32'(starts), 32'd1);
    axil_read(REG_CTRL, d);   expect_eq("running: not idle, not done", d & 32'h7, 32'h0);
    axil_write(REG_CTRL, 32'h1, 4'h1);                  // start while running: held
    repeat (3) @(posedge clk);
    expect_eq("no second pulse while running", 32'(starts), 32'd1);
    repeat (20) @(negedge clk);
    core_done = 1; @(negedge clk); core_done = 0;
    // the held start request begins run 2 right away
    repeat (2) @(posedge clk);
    expect_eq("held start taken after done", 32'(starts), 32'd2);
    axil_read(REG_CTRL, d);   expect_eq("done set", d[CTRL_DONE_BIT], 32'd1);
    axil_read(REG_CTRL, d);   expect_eq("done cleared on read", d[CTRL_DONE_BIT], 32'd0);
    axil_read(REG_CYCLES, d);
    checks++; if (d < 30 || d > 60) begin failures++; $display("cycles %0d out of range", d); end
    @(negedge clk); in_err = 1; @(negedge clk); in_err = 0;
    repeat (5) @(negedge clk);
    core_done = 1; @(negedge clk); core_done = 0;
    axil_read(REG_STATUS, d); expect_eq("status in_err", d, 32'h1);
    axil_read(REG_CTRL, d);   expect_eq("idle and done after run 2", d & 32'h7, 32'h6);
    axil_read(8'h40, d);      expect_eq("unmapped reads zero", d, 32'h0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
