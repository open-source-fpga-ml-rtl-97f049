// axi_mem_model: behavioural model of off-chip memory behind an AXI4 slave
// port, for testbenches only (behavioural model, not synthesizable design).
//
// A byte array of SIZE bytes with an AXI4 read channel pair (AR, R) and write
// channel triplet (AW, W, B), INCR bursts only, one burst at a time per
// direction. With STALL > 0 every ready and valid the model drives is held low
// on a random STALL% of cycles, so the masters see back-pressure. It counts
// read and write bursts, 4 KiB crossings (a protocol error) and stall cycles.
module axi_mem_model #(
  parameter int unsigned DATA_W = 64,
  parameter int unsigned SIZE   = 65536,
  parameter int unsigned STALL  = 0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [31:0]         araddr,
  input  logic [7:0]          arlen,
  input  logic [2:0]          arsize,
  input  logic [1:0]          arburst,
  input  logic                arvalid,
  output logic                arready,
  output logic [DATA_W-1:0]   rdata,
  output logic [1:0]          rresp,
  output logic                rlast,
  output logic                rvalid,
  input  logic                rready,
  input  logic [31:0]         awaddr,
  input  logic [7:0]          awlen,
  input  logic [2:0]          awsize,
  input  logic [1:0]          awburst,
  input  logic                awvalid,
  output logic                awready,
  input  logic [DATA_W-1:0]   wdata,
  input  logic [DATA_W/8-1:0] wstrb,
  input  logic                wlast,
  input  logic                wvalid,
  output logic                wready,
  output logic [1:0]          bresp,
  output logic                bvalid,
  input  logic                bready
);
  localparam int unsigned NB = DATA_W / 8;

  logic [7:0] mem [SIZE];
  int unsigned rd_bursts, wr_bursts, crossings, stalls, bad_len;

  logic        r_act, w_act;
  logic [31:0] r_addr, w_addr;
  logic [8:0]  r_left, w_left;
  logic        gate;

  always_ff @(posedge clk) gate <= (STALL == 0) ? 1'b1 : (($urandom % 100) >= STALL);

  assign arready = !r_act && gate;
  assign awready = !w_act && !bvalid && gate;
  assign rvalid  = r_act && gate;
  assign rlast   = (r_left == 9'd1);
  assign rresp   = 2'b00;
  assign wready  = w_act && gate;
  assign bresp   = 2'b00;

  always_comb begin
    for (int b = 0; b < int'(NB); b++) rdata[b*8 +: 8] = mem[(r_addr + 32'(b)) % SIZE];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_act <= 1'b0; w_act <= 1'b0; bvalid <= 1'b0;
      r_addr <= '0; w_addr <= '0; r_left <= '0; w_left <= '0;
      rd_bursts <= 0; wr_bursts <= 0; crossings <= 0; stalls <= 0; bad_len <= 0;
    end else begin
      if (!gate) stalls <= stalls + 1;
      if (arvalid && arready) begin
        r_act <= 1'b1; r_addr <= araddr; r_left <= 9'(arlen) + 9'd1;
        rd_bursts <= rd_bursts + 1;
        if ((araddr >> 12) != ((araddr + (32'(arlen) + 1) * NB - 1) >> 12)) crossings <= crossings + 1;
      end
      if (rvalid && rready) begin
        r_addr <= r_addr + NB;
        r_left <= r_left - 1'b1;
        if (r_left == 9'd1) r_act <= 1'b0;
      end
      if (awvalid && awready) begin
        w_act <= 1'b1; w_addr <= awaddr; w_left <= 9'(awlen) + 9'd1;
        wr_bursts <= wr_bursts + 1;
        if ((awaddr >> 12) != ((awaddr + (32'(awlen) + 1) * NB - 1) >> 12)) crossings <= crossings + 1;
      end
      if (wvalid && wready) begin
        for (int b = 0; b < int'(NB); b++)
          if (wstrb[b]) mem[(w_addr + 32'(b)) % SIZE] <= wdata[b*8 +: 8];
        w_addr <= w_addr + NB;
        w_left <= w_left - 1'b1;
        if ((w_left == 9'd1) != wlast) bad_len <= bad_len + 1;
        if (w_left == 9'd1) begin
          w_act  <= 1'b0;
          bvalid <= 1'b1;
        end
      end
      if (bvalid && bready) bvalid <= 1'b0;
    end
  end
endmodule
