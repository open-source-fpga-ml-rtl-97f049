// ad_autoencoder: dataflow core of the anomaly-detection network (hls4ml
// style).
//
// Network: a fully connected autoencoder 128 -> 72 -> 72 -> 8 -> 72 -> 72 ->
// 128. The five hidden layers have batch-norm folded into their weights and
// biases and a merged ReLU; the last layer is linear and reconstructs the
// 128 inputs. The host computes the anomaly score (the mean squared error
// between input and reconstruction). The 128 inputs, 72-unit encoder and
// decoder layers, five hidden layers, BN folding, ReLU and reuse factor 144
// follow the paper; the 8-unit bottleneck in the middle is this design's
// reading of "five hidden layers" (the paper does not give its width).
//
// Each layer is a dense_rf with reuse factor RF = 144, i.e. 64, 36, 4, 4, 36
// and 64 multipliers (208 in all). Layers exchange whole vectors through
// FIFOs of depth FIFO_DEPTH = 1 (the paper reports FIFO size 1 for this
// network). Inputs arrive as 128 8-bit unsigned fractions (value/256), which
// are widened without change of value to the 12-bit activation format with 8
// fraction bits; the output is 128 12-bit signed values in the same format.
// Latency about 6*(RF+1) cycles plus one cycle per FIFO.
//
// Parameters load through cfg_*: cfg_layer 0..5 selects the layer, see
// dense_rf for addresses. fifo_max reports the FIFO high-water marks.
module ad_autoencoder
  import tinyml_pkg::*;
#(
  parameter int unsigned N_IN       = 128,
  parameter int unsigned N_HID      = 72,
  parameter int unsigned N_LAT      = 8,
  parameter int unsigned RF         = 144,
  parameter int unsigned IN_BITS    = 8,
  parameter int unsigned ACT_W      = 12,
  parameter int unsigned W_W        = 6,
  parameter int unsigned W_FRAC     = 4,
  parameter int unsigned FIFO_DEPTH = 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cfg_we,
  input  logic [3:0]               cfg_layer,
  input  logic [1:0]               cfg_sel,
  input  logic [31:0]              cfg_addr,
  input  logic [31:0]              cfg_data,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [N_IN*IN_BITS-1:0]  in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [N_IN*ACT_W-1:0]    out_data,
  input  logic                     clear_max,
  output logic [15:0]              fifo_max [5]
);
  localparam int unsigned NL = 6;
  localparam int unsigned FW = $clog2(FIFO_DEPTH + 1);
  localparam int unsigned WIDTHS [NL+1] = '{N_IN, N_HID, N_HID, N_LAT, N_HID, N_HID, N_IN};
  localparam int unsigned MAXW = (N_IN > N_HID) ? N_IN : N_HID;

  // Vector buses between stages, sized for the widest layer.
  logic                  lv [NL];     // layer out valid
  logic                  lr [NL];
  logic [MAXW*ACT_W-1:0] ld [NL];
  logic                  fv [NL];     // FIFO out (layer in) valid
  logic                  fr [NL];
  logic [MAXW*ACT_W-1:0] fd [NL];
  logic [FW-1:0]         occ [NL-1];
  logic [FW-1:0]         hwm [NL-1];

  // Input: 8-bit unsigned fractions -> 12-bit signed, same fraction bits.
  always_comb begin
    fd[0] = '0;
    for (int i = 0; i < int'(N_IN); i++)
      fd[0][i*ACT_W +: ACT_W] = ACT_W'(in_data[i*IN_BITS +: IN_BITS]);
  end
  assign fv[0]    = in_valid;
  assign in_ready = fr[0];

  for (genvar l = 0; l < NL; l++) begin : g_layer
    localparam int unsigned NI = WIDTHS[l];
    localparam int unsigned NO = WIDTHS[l+1];
    logic [NO*ACT_W-1:0] y;

    dense_rf #(.N_IN(NI), .N_OUT(NO), .RF(RF), .IN_W(ACT_W), .OUT_W(ACT_W), .W_W(W_W),
               .W_FRAC(W_FRAC), .B_W(ACT_W), .ACC_W(32), .RELU(l != NL - 1)) u_fc (
      .clk, .rst_n, .cfg_we(cfg_we && cfg_layer == 4'(l)), .cfg_sel, .cfg_addr, .cfg_data,
      .in_valid(fv[l]), .in_ready(fr[l]), .in_data(fd[l][NI*ACT_W-1:0]),
      .out_valid(lv[l]), .out_ready(lr[l]), .out_data(y));
    assign ld[l] = (MAXW*ACT_W)'(y);

    if (l < NL - 1) begin : g_fifo
      logic [NO*ACT_W-1:0] q;
      stream_fifo #(.WIDTH(NO*ACT_W), .DEPTH(FIFO_DEPTH)) u_q (
        .clk, .rst_n, .in_valid(lv[l]), .in_ready(lr[l]), .in_data(y),
        .out_valid(fv[l+1]), .out_ready(fr[l+1]), .out_data(q),
        .occupancy(occ[l]), .max_occupancy(hwm[l]), .clear_max);
      assign fd[l+1] = (MAXW*ACT_W)'(q);
    end
  end

  assign out_valid  = lv[NL-1];
  assign lr[NL-1]   = out_ready;
  assign out_data   = ld[NL-1][N_IN*ACT_W-1:0];

  always_comb for (int i = 0; i < NL - 1; i++) fifo_max[i] = 16'(hwm[i]);
endmodule
