// tb_stream_fifo: self-checking test of stream_fifo.
// A depth-3 FIFO (not a power of two) and a depth-1 FIFO are driven with
// random valid and ready; every word read is compared with a queue model,
// the full/empty flags with the model's fill level, and max_occupancy with
// the largest fill level the model saw. Also checks that a word written in
// one cycle is readable in the next.
module tb_stream_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic       iv [2], ir [2], ov [2], orr [2];
  logic [7:0] id [2], od [2];
  logic [1:0] occ0, hwm0;
  logic [0:0] occ1, hwm1;
  logic       clr = 0;

  stream_fifo #(.WIDTH(8), .DEPTH(3)) dut0 (.clk, .rst_n, .in_valid(iv[0]), .in_ready(ir[0]),
    .in_data(id[0]), .out_valid(ov[0]), .out_ready(orr[0]), .out_data(od[0]),
    .occupancy(occ0), .max_occupancy(hwm0), .clear_max(clr));
  stream_fifo #(.WIDTH(8), .DEPTH(1)) dut1 (.clk, .rst_n, .in_valid(iv[1]), .in_ready(ir[1]),
    .in_data(id[1]), .out_valid(ov[1]), .out_ready(orr[1]), .out_data(od[1]),
    .occupancy(occ1), .max_occupancy(hwm1), .clear_max(clr));

  logic [7:0] q [2][$];
  int maxfill [2];
  int depth [2] = '{3, 1};
  int fulls = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 2; k++) begin iv[k] = 0; orr[k] = 0; id[k] = 0; maxfill[k] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // latency: a word written now is visible next cycle
    @(negedge clk); iv[0] = 1; id[0] = 8'hA5;
    @(negedge clk); iv[0] = 0;
    checks++; if (!(ov[0] && od[0] == 8'hA5)) begin failures++; $display("latency check failed"); end
    orr[0] = 1; @(negedge clk); orr[0] = 0;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      for (int k = 0; k < 2; k++) begin
        iv[k]  = ($urandom % 100) < ((cyc < 2000) ? 70 : 30);
        id[k]  = 8'($urandom);
        orr[k] = ($urandom % 100) < ((cyc < 2000) ? 30 : 70);
      end
      #1;
      for (int k = 0; k < 2; k++) begin
        checks++;
        if (ir[k] != (q[k].size() < depth[k])) begin failures++; $display("ready mismatch k=%0d", k); end
        checks++;
        if (ov[k] != (q[k].size() > 0)) begin failures++; $display("valid mismatch k=%0d", k); end
        if (ov[k] && orr[k]) begin
          checks++;
          if (od[k] !== q[k][0]) begin failures++; $display("data mismatch k=%0d", k); end
        end
        if (!ir[k]) fulls++;
      end
      @(posedge clk);
      for (int k = 0; k < 2; k++) begin
        logic pushed, popped;
        pushed = iv[k] && (q[k].size() < depth[k]);
        popped = orr[k] && (q[k].size() > 0);
        if (popped) void'(q[k].pop_front());
        if (pushed) q[k].push_back(id[k]);
        if (q[k].size() > maxfill[k]) maxfill[k] = q[k].size();
      end
    end
    @(negedge clk);
    for (int k = 0; k < 2; k++) begin iv[k] = 0; orr[k] = 0; end
    repeat (2) @(negedge clk);
    checks++; if (int'(hwm0) != maxfill[0]) begin failures++; $display("hwm0 %0d vs %0d", hwm0, maxfill[0]); end
    checks++; if (int'(hwm1) != maxfill[1]) begin failures++; $display("hwm1 %0d vs %0d", hwm1, maxfill[1]); end
    checks++; if (int'(occ0) != q[0].size()) begin failures++; $display("occ0 mismatch"); end
    checks++; if (fulls == 0) begin failures++; $display("FIFO never filled"); end
    clr = 1; @(negedge clk); clr = 0; @(negedge clk);
    checks++; if (int'(hwm0) != q[0].size()) begin failures++; $display("clear_max failed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
