// tb_axi_read_mover: self-checking test of axi_read_mover.
// 45 16-bit elements (not a whole number of 64-bit words) are placed in the
// memory model so that the array crosses a 4 KiB boundary; the mover reads
// them in bursts of at most 4 beats with a memory that stalls 30% of the time
// and a consumer that applies back-pressure. Each stream word must hold 5
// elements, each the element's upper byte (shift right by 8). Also checks:
// no burst crosses 4 KiB, the burst count, done, and a second run from
// another address.
module tb_axi_read_mover;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int N = 45, PACK = 5;
  logic start, busy, done, err;
  logic [31:0] base;
  logic [31:0] araddr; logic [7:0] arlen; logic [2:0] arsize; logic [1:0] arburst;
  logic arvalid, arready, rvalid, rready, rlast; logic [63:0] rdata; logic [1:0] rresp;
  logic ov, orr; logic [PACK*8-1:0] od;
  logic [31:0] awaddr = 0; logic [7:0] awlen = 0; logic [2:0] awsize = 0; logic [1:0] awburst = 0;
  logic awvalid = 0, wvalid = 0, wlast = 0, bready = 0; logic [63:0] wdata = 0; logic [7:0] wstrb = 0;
  logic awready, wready, bvalid; logic [1:0] bresp;

  axi_read_mover #(.DATA_W(64), .ELEM_W(16), .OUT_W(8), .SHIFT(8), .N_ELEMS(N), .PACK(PACK),
                   .MAX_BURST(4)) dut (
    .clk, .rst_n, .start, .base_addr(base), .busy, .done, .err,
    .m_axi_araddr(araddr), .m_axi_arlen(arlen), .m_axi_arsize(arsize), .m_axi_arburst(arburst),
    .m_axi_arvalid(arvalid), .m_axi_arready(arready), .m_axi_rdata(rdata), .m_axi_rresp(rresp),
    .m_axi_rlast(rlast), .m_axi_rvalid(rvalid), .m_axi_rready(rready),
    .out_valid(ov), .out_ready(orr), .out_data(od));

  axi_mem_model #(.DATA_W(64), .SIZE(16384), .STALL(30)) mem (.clk, .rst_n,
    .araddr, .arlen, .arsize, .arburst, .arvalid, .arready, .rdata, .rresp, .rlast, .rvalid, .rready,
    .awaddr, .awlen, .awsize, .awburst, .awvalid, .awready, .wdata, .wstrb, .wlast, .wvalid, .wready,
    .bresp, .bvalid, .bready);

  logic [7:0] exp_q [$];
  int words = 0, dones = 0;

  always @(negedge clk) orr <= ($urandom % 4) != 0;
  always @(posedge clk) if (rst_n) begin
    if (done) dones++;
    if (ov && orr) begin
      words++;
      for (int e = 0; e < PACK; e++) begin
        checks++;
        if (exp_q.size() == 0 || od[e*8 +: 8] != exp_q[0]) begin
          failures++; $display("word %0d elem %0d: got %h", words, e, od[e*8 +: 8]);
        end
        if (exp_q.size()) void'(exp_q.pop_front());
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int addr);
    int bursts0;
    for (int i = 0; i < N; i++) begin
      logic [15:0] v;
      v = 16'($urandom);
      mem.mem[addr + 2*i]     = v[7:0];
      mem.mem[addr + 2*i + 1] = v[15:8];
      exp_q.push_back(v[15:8]);
    end
    bursts0 = mem.rd_bursts;
    @(negedge clk); base = 32'(addr); start = 1;
    @(negedge clk); start = 0;
    checks++; if (!busy) begin failures++; $display("not busy after start"); end
    while (!done) @(posedge clk);
    @(negedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("%0d elements missing", exp_q.size()); end
    // 12 beats from 4 KiB - 40 bytes: 5 beats to the boundary -> 4+1, then 4+3
    checks++;
    if (addr == 4096 - 40 && mem.rd_bursts - bursts0 != 4) begin
      failures++; $display("bursts %0d, expected 4", mem.rd_bursts - bursts0);
    end
  endtask

  initial begin
    start = 0; base = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(4096 - 40);
    run(8192);
    checks++; if (mem.crossings != 0) begin failures++; $display("burst crossed 4 KiB"); end
    checks++; if (words != 2 * N / PACK) begin failures++; $display("words %0d", words); end
    checks++; if (dones != 2 || err) begin failures++; $display("done count %0d err %0d", dones, err); end
    checks++; if (arburst != 2'b01 || arsize != 3'd3) begin failures++; $display("AR burst/size fields wrong"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
