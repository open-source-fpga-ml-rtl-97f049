// tb_ad_autoencoder: self-checking test of the anomaly-detection core at
// reduced size (8 -> 6 -> 6 -> 2 -> 6 -> 6 -> 8, reuse factor 12; the default
// network is 128-72-72-8-72-72-128 with reuse factor 144). Random 6-bit
// weights and 12-bit biases are loaded into the six layers, then 30 random
// input vectors go in, back to back with random output back-pressure. Each
// reconstruction is compared bit for bit with a fixed-point reference
// computed here: accumulate bias*16 + sum x*w, arithmetic shift right by the
// 4 weight fraction bits, ReLU on layers 1-5, saturate to 12 bits. The
// latency of an isolated vector is checked against six layers of RF+1
// cycles plus the FIFO hops, and saturation and ReLU clipping must occur.
module tb_ad_autoencoder;
  import tinyml_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NI = 8, NH = 6, NLAT = 2, RF = 12, NL = 6;
  localparam int WD [NL+1] = '{NI, NH, NH, NLAT, NH, NH, NI};
  logic we; logic [3:0] layer; logic [1:0] sel; logic [31:0] addr, data;
  logic iv, ir, ov, orr, clr;
  logic [NI*8-1:0]  id;
  logic [NI*12-1:0] od;
  logic [15:0] fmax [5];

  ad_autoencoder #(.N_IN(NI), .N_HID(NH), .N_LAT(NLAT), .RF(RF)) dut (
    .clk, .rst_n, .cfg_we(we), .cfg_layer(layer), .cfg_sel(sel), .cfg_addr(addr), .cfg_data(data),
    .in_valid(iv), .in_ready(ir), .in_data(id), .out_valid(ov), .out_ready(orr), .out_data(od),
    .clear_max(clr), .fifo_max(fmax));

  int w [NL][][];   // w[l][i][o]
  int b [NL][];
  int expv [64][NI];   // expected reconstructions, by vector number
  int n_sent = 0;
  int results = 0, sat_hits = 0, relu_hits = 0;
  int t_in = 0, t_out = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg(input int l, input logic [1:0] s, input int a, input int d);
    @(negedge clk); we = 1; layer = 4'(l); sel = s; addr = 32'(a); data = 32'(d);
  endtask

  function automatic int sat12(input int v);
    if (v > 2047) return 2047;
    if (v < -2048) return -2048;
    return v;
  endfunction

  always @(posedge clk) if (rst_n && ov && orr) begin
    int e [NI];
    t_out = $time;
    checks++;
    if (results >= n_sent) begin
      failures++; $display("unexpected output");
    end else begin
      e = expv[results];
      for (int o = 0; o < NI; o++) begin
        int got;
        got = int'(signed'(od[o*12 +: 12]));
        if (got != e[o]) begin
          failures++; $display("vector %0d out %0d = %0d, expected %0d", results, o, got, e[o]);
        end
      end
    end
    results++;
  end

  initial begin
    int nvec;
    we = 0; layer = 0; sel = 0; addr = 0; data = 0; iv = 0; id = 0; clr = 0; orr = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < NL; l++) begin
      w[l] = new[WD[l]];
      for (int i = 0; i < WD[l]; i++) begin
        w[l][i] = new[WD[l+1]];
        for (int o = 0; o < WD[l+1]; o++) begin
          w[l][i][o] = int'($urandom % 64) - 32;
          cfg(l, CFG_WEIGHT, i * WD[l+1] + o, w[l][i][o]);
        end
      end
      b[l] = new[WD[l+1]];
      for (int o = 0; o < WD[l+1]; o++) begin
        b[l][o] = int'($urandom % 4096) - 2048;
        cfg(l, CFG_BIAS, o, b[l][o]);
      end
    end
    @(negedge clk); we = 0;

    nvec = 30;
    for (int v = 0; v < nvec; v++) begin
      int x [NI]; int a [NI]; int y [];
      int e [NI];
      for (int i = 0; i < NI; i++) x[i] = int'($urandom % 256);
      for (int i = 0; i < NI; i++) a[i] = x[i];
      for (int l = 0; l < NL; l++) begin
        y = new[WD[l+1]];
        for (int o = 0; o < WD[l+1]; o++) begin
          int acc; int r;
          acc = b[l][o] * 16;
          for (int i = 0; i < WD[l]; i++) acc += a[i] * w[l][i][o];
          r = acc >>> 4;
          if (l != NL - 1 && r < 0) begin r = 0; relu_hits++; end
          if (r > 2047 || r < -2048) sat_hits++;
          y[o] = sat12(r);
        end
        for (int o = 0; o < WD[l+1]; o++) a[o] = y[o];
      end
      for (int o = 0; o < NI; o++) e[o] = a[o];
      expv[v] = e;
      n_sent = v + 1;
      @(negedge clk); iv = 1;
      for (int i = 0; i < NI; i++) id[i*8 +: 8] = 8'(x[i]);
      if (v == 0) t_in = $time;
      @(posedge clk); while (!ir) @(posedge clk);
      if (v == 0) begin
        // Isolated first vector: measure its latency before sending more.
        @(negedge clk); iv = 0;
        while (results < 1) @(posedge clk);
        checks++;
        if ((t_out - t_in) / 10 > NL * (RF + 1) + 2 * NL) begin
          failures++; $display("latency %0d cycles", (t_out - t_in) / 10);
        end
        $display("isolated latency: %0d cycles", (t_out - t_in) / 10);
      end
    end
    @(negedge clk); iv = 0;
    while (results < nvec) @(posedge clk);
    checks++; if (sat_hits == 0)  begin failures++; $display("saturation never exercised"); end
    checks++; if (relu_hits == 0) begin failures++; $display("ReLU never clipped"); end
    checks++; if (fmax[0] == 0)   begin failures++; $display("FIFO 0 never used"); end
    $display("saturations %0d, ReLU clips %0d", sat_hits, relu_hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (results > 0) orr <= ($urandom % 3) != 0;
endmodule
