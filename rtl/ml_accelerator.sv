// ml_accelerator: top level of the streaming neural-network accelerator.
//
// The accelerator sits between a processor and off-chip memory. The
// processor writes the addresses of an input and an output array into the
// AXI4-Lite control registers (s_axi) and sets start. The accelerator then
// runs on its own: the input data mover reads the input array over one AXI4
// master (IN bus), unpacks it into the input local buffer, the dataflow core
// computes the network layer by layer with FIFOs between the layers, and the
// output data mover writes the result from the output local buffer over a
// second AXI4 master (OUT bus). done is raised in the control register when
// the last write has been acknowledged; the processor polls for it.
//
// MODEL selects the network at build time (there is no run-time
// reconfiguration): MODEL_KWS builds the keyword-spotting MLP (490 8-bit
// features in, one class index out), MODEL_AD the anomaly-detection
// autoencoder (128 values in, 128 reconstructed values out). Input elements
// in memory are 16-bit, DATA_W/16 to a memory word; output elements are 16-bit
// as well. The network parameters are not in the bitstream here: they are
// written once after reset through the cfg_* port (see kws_mlp and
// ad_autoencoder for layer numbers and addresses). The s_axi/m_axi structure,
// the data movers, the FIFO local buffers and the dataflow cores follow the
// paper; the register map, the parameter-load port, element widths in memory
// and local-buffer depths are this design's choices.
//
// fifo_max[0] and [1] are the high-water marks of the input and output local
// buffers, fifo_max[2..] those of the core's inter-layer FIFOs (FIFO depth
// sizing by measured occupancy); clear_max clears them.
module ml_accelerator
  import tinyml_pkg::*;
#(
  parameter model_e      MODEL        = MODEL_KWS,
  parameter int unsigned DATA_W       = 64,
  parameter int unsigned MAX_BURST    = 16,
  parameter int unsigned IN_LOCAL     = 2,
  parameter int unsigned OUT_LOCAL    = 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // control bundle (AXI4-Lite slave)
  input  logic [7:0]            s_axi_awaddr,
  input  logic                  s_axi_awvalid,
  output logic                  s_axi_awready,
  input  logic [31:0]           s_axi_wdata,
  input  logic [3:0]            s_axi_wstrb,
  input  logic                  s_axi_wvalid,
  output logic                  s_axi_wready,
  output logic [1:0]            s_axi_bresp,
  output logic                  s_axi_bvalid,
  input  logic                  s_axi_bready,
  input  logic [7:0]            s_axi_araddr,
  input  logic                  s_axi_arvalid,
  output logic                  s_axi_arready,
  output logic [31:0]           s_axi_rdata,
  output logic [1:0]            s_axi_rresp,
  output logic                  s_axi_rvalid,
  input  logic                  s_axi_rready,
  // IN bus (AXI4 master, read only)
  output logic [31:0]           m_axi_in_araddr,
  output logic [7:0]            m_axi_in_arlen,
  output logic [2:0]            m_axi_in_arsize,
  output logic [1:0]            m_axi_in_arburst,
  output logic                  m_axi_in_arvalid,
  input  logic                  m_axi_in_arready,
  input  logic [DATA_W-1:0]     m_axi_in_rdata,
  input  logic [1:0]            m_axi_in_rresp,
  input  logic                  m_axi_in_rlast,
  input  logic                  m_axi_in_rvalid,
  output logic                  m_axi_in_rready,
  // OUT bus (AXI4 master, write only)
  output logic [31:0]           m_axi_out_awaddr,
  output logic [7:0]            m_axi_out_awlen,
  output logic [2:0]            m_axi_out_awsize,
  output logic [1:0]            m_axi_out_awburst,
  output logic                  m_axi_out_awvalid,
  input  logic                  m_axi_out_awready,
  output logic [DATA_W-1:0]     m_axi_out_wdata,
  output logic [DATA_W/8-1:0]   m_axi_out_wstrb,
  output logic                  m_axi_out_wlast,
  output logic                  m_axi_out_wvalid,
  input  logic                  m_axi_out_wready,
  input  logic [1:0]            m_axi_out_bresp,
  input  logic                  m_axi_out_bvalid,
  output logic                  m_axi_out_bready,
  // network parameter load
  input  logic                  cfg_we,
  input  logic [3:0]            cfg_layer,
  input  logic [1:0]            cfg_sel,
  input  logic [31:0]           cfg_addr,
  input  logic [31:0]           cfg_data,
  // FIFO occupancy monitor
  input  logic                  clear_max,
  output logic [15:0]           fifo_max [8]
);
  localparam bit          IS_KWS   = (MODEL == MODEL_KWS);
  localparam int unsigned KWS_IDX  = 4;                       // $clog2(12)
  localparam int unsigned N_IN     = IS_KWS ? 490 : 128;
  localparam int unsigned IN_PACK  = IS_KWS ? 10  : 128;
  localparam int unsigned N_OUT    = IS_KWS ? 1   : 128;
  localparam int unsigned OUT_PACK = IS_KWS ? 1   : 128;
  localparam int unsigned OUT_EW   = IS_KWS ? KWS_IDX : 12;
  localparam int unsigned IN_SW    = IN_PACK * 8;
  localparam int unsigned OUT_SW   = OUT_PACK * OUT_EW;

  logic        run_start, run_done, in_err, out_err;
  logic [31:0] in_addr, out_addr;

  ctrl_regs #(.ADDR_W(8)) u_ctrl (
    .clk, .rst_n,
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready, .s_axi_wdata, .s_axi_wstrb,
    .s_axi_wvalid, .s_axi_wready, .s_axi_bresp, .s_axi_bvalid, .s_axi_bready,
    .s_axi_araddr, .s_axi_arvalid, .s_axi_arready, .s_axi_rdata, .s_axi_rresp,
    .s_axi_rvalid, .s_axi_rready,
    .core_start(run_start), .in_addr, .out_addr, .core_done(run_done), .in_err, .out_err);

  // ---- input side ---------------------------------------------------------
  logic              rd_v, rd_r, li_v, li_r;
  logic [IN_SW-1:0]  rd_d, li_d;
  logic              rd_busy, rd_done;
  logic [$clog2(IN_LOCAL+1)-1:0]  in_hwm, in_occ;
  logic [$clog2(OUT_LOCAL+1)-1:0] out_hwm, out_occ;

  axi_read_mover #(.ADDR_W(32), .DATA_W(DATA_W), .ELEM_W(16), .OUT_W(8), .SHIFT(8),
                   .N_ELEMS(N_IN), .PACK(IN_PACK), .MAX_BURST(MAX_BURST)) u_rd (
    .clk, .rst_n, .start(run_start), .base_addr(in_addr), .busy(rd_busy), .done(rd_done),
    .err(in_err),
    .m_axi_araddr(m_axi_in_araddr), .m_axi_arlen(m_axi_in_arlen), .m_axi_arsize(m_axi_in_arsize),
    .m_axi_arburst(m_axi_in_arburst), .m_axi_arvalid(m_axi_in_arvalid),
    .m_axi_arready(m_axi_in_arready), .m_axi_rdata(m_axi_in_rdata), .m_axi_rresp(m_axi_in_rresp),
    .m_axi_rlast(m_axi_in_rlast), .m_axi_rvalid(m_axi_in_rvalid), .m_axi_rready(m_axi_in_rready),
    .out_valid(rd_v), .out_ready(rd_r), .out_data(rd_d));

  stream_fifo #(.WIDTH(IN_SW), .DEPTH(IN_LOCAL)) u_in_local (
    .clk, .rst_n, .in_valid(rd_v), .in_ready(rd_r), .in_data(rd_d),
    .out_valid(li_v), .out_ready(li_r), .out_data(li_d),
    .occupancy(in_occ), .max_occupancy(in_hwm), .clear_max);

  // ---- core -----------------------------------------------------------------
  logic              co_v, co_r, lo_v, lo_r;
  logic [OUT_SW-1:0] co_d, lo_d;

  if (IS_KWS) begin : g_kws
    logic [15:0] hwm [4];
    kws_mlp u_core (
      .clk, .rst_n, .cfg_we, .cfg_layer, .cfg_sel, .cfg_addr, .cfg_data,
      .in_valid(li_v), .in_ready(li_r), .in_data(li_d),
      .out_valid(co_v), .out_ready(co_r), .out_data(co_d),
      .clear_max, .fifo_max(hwm));
    always_comb begin
      for (int i = 2; i < 8; i++) fifo_max[i] = '0;
      for (int i = 0; i < 4; i++) fifo_max[2+i] = hwm[i];
    end
  end else begin : g_ad
    logic [15:0] hwm [5];
    ad_autoencoder u_core (
      .clk, .rst_n, .cfg_we, .cfg_layer, .cfg_sel, .cfg_addr, .cfg_data,
      .in_valid(li_v), .in_ready(li_r), .in_data(li_d),
      .out_valid(co_v), .out_ready(co_r), .out_data(co_d),
      .clear_max, .fifo_max(hwm));
    always_comb begin
      for (int i = 2; i < 8; i++) fifo_max[i] = '0;
      for (int i = 0; i < 5; i++) fifo_max[2+i] = hwm[i];
    end
  end

  // ---- output side ----------------------------------------------------------
  stream_fifo #(.WIDTH(OUT_SW), .DEPTH(OUT_LOCAL)) u_out_local (
    .clk, .rst_n, .in_valid(co_v), .in_ready(co_r), .in_data(co_d),
    .out_valid(lo_v), .out_ready(lo_r), .out_data(lo_d),
    .occupancy(out_occ), .max_occupancy(out_hwm), .clear_max);

  logic wr_busy;

  axi_write_mover #(.ADDR_W(32), .DATA_W(DATA_W), .ELEM_W(16), .IN_W(OUT_EW),
                    .N_ELEMS(N_OUT), .PACK(OUT_PACK), .MAX_BURST(MAX_BURST),
                    .SIGN_EXT(!IS_KWS)) u_wr (
    .clk, .rst_n, .start(run_start), .base_addr(out_addr), .busy(wr_busy), .done(run_done),
    .err(out_err), .in_valid(lo_v), .in_ready(lo_r), .in_data(lo_d),
    .m_axi_awaddr(m_axi_out_awaddr), .m_axi_awlen(m_axi_out_awlen),
    .m_axi_awsize(m_axi_out_awsize), .m_axi_awburst(m_axi_out_awburst),
    .m_axi_awvalid(m_axi_out_awvalid), .m_axi_awready(m_axi_out_awready),
    .m_axi_wdata(m_axi_out_wdata), .m_axi_wstrb(m_axi_out_wstrb), .m_axi_wlast(m_axi_out_wlast),
    .m_axi_wvalid(m_axi_out_wvalid), .m_axi_wready(m_axi_out_wready),
    .m_axi_bresp(m_axi_out_bresp), .m_axi_bvalid(m_axi_out_bvalid),
    .m_axi_bready(m_axi_out_bready));

  assign fifo_max[0] = 16'(in_hwm);
  assign fifo_max[1] = 16'(out_hwm);
endmodule
