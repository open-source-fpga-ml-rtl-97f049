// kws_mlp: dataflow core of the keyword-spotting network (FINN style).
//
// Network: 490 input features (8-bit) -> three fully connected layers of 256
// neurons, each with batch-norm and ReLU folded into 3-bit multithreshold
// activations, 3-bit weights -> output layer of 12 neurons -> top-1 node.
// The core's output is the index of the predicted class. Three hidden FC
// layers with BN/ReLU, 3-bit weights and activations, an 8-bit input and the
// in-hardware top-k node follow the paper. The widths 490 and 256 and the 12
// outputs are this design's reading of the paper's parameter count (259,584
// = 490*256 + 256*256 + 256*256 + 256*12); the paper's text says the output
// layer has 10 neurons, which does not match its count or its twelve-class
// task, so 12 is used.
//
// Every layer is an mvau; the layers are linked by FIFOs of FIFO_DEPTH words
// (the paper reports 32-64 for this network). The folding (SIMD, PE of every
// layer) is this design's choice and sets the latency: about
// 49 + 8*50 + 8 + 16*17 + 16 + 16*17 + 16 + 3*17 + 13 cycles after the input
// is complete.
//
// Parameters load through cfg_*: cfg_layer 0..3 selects the layer, see mvau
// for addresses. fifo_max reports the largest occupancy each inter-layer
// FIFO has reached since reset (cleared by clear_max).
module kws_mlp
  import tinyml_pkg::*;
#(
  parameter int unsigned N_IN       = 490,
  parameter int unsigned N_HID      = 256,
  parameter int unsigned N_CLASS    = 12,
  parameter int unsigned IN_BITS    = 8,
  parameter int unsigned WBITS      = 3,
  parameter int unsigned ABITS      = 3,
  parameter int unsigned ACC_W      = 24,
  parameter int unsigned IN_ELEMS   = 10,
  parameter int unsigned SIMD1      = 10,
  parameter int unsigned PE1        = 32,
  parameter int unsigned SIMD_H     = 16,
  parameter int unsigned PE_H       = 16,
  parameter int unsigned PE_OUT     = 4,
  parameter int unsigned FIFO_DEPTH = 32,
  parameter int unsigned IDX_W      = $clog2(N_CLASS)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        cfg_we,
  input  logic [3:0]                  cfg_layer,
  input  logic [1:0]                  cfg_sel,
  input  logic [31:0]                 cfg_addr,
  input  logic [31:0]                 cfg_data,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [IN_ELEMS*IN_BITS-1:0] in_data,
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [IDX_W-1:0]            out_data,
  input  logic                        clear_max,
  output logic [15:0]                 fifo_max [4]
);
  localparam int unsigned FW = $clog2(FIFO_DEPTH + 1);

  // layer outputs and FIFO outputs
  logic l1_v, l1_r, l2_v, l2_r, l3_v, l3_r, l4_v, l4_r;
  logic f1_v, f1_r, f2_v, f2_r, f3_v, f3_r, f4_v, f4_r;
  logic [PE1*ABITS-1:0]   l1_d, f1_d;
  logic [PE_H*ABITS-1:0]  l2_d, f2_d, l3_d, f3_d;
  logic [PE_OUT*ACC_W-1:0] l4_d, f4_d;
  logic [FW-1:0] occ [4];
  logic [FW-1:0] hwm [4];

  mvau #(.MW(N_IN), .MH(N_HID), .SIMD(SIMD1), .PE(PE1), .IN_ELEMS(IN_ELEMS),
         .IBITS(IN_BITS), .WBITS(WBITS), .ABITS(ABITS), .ACC_W(ACC_W), .USE_ACT(1'b1)) u_fc1 (
    .clk, .rst_n, .cfg_we(cfg_we && cfg_layer == 4'd0), .cfg_sel, .cfg_addr, .cfg_data,
    .in_valid, .in_ready, .in_data, .out_valid(l1_v), .out_ready(l1_r), .out_data(l1_d));

  stream_fifo #(.WIDTH(PE1*ABITS), .DEPTH(FIFO_DEPTH)) u_q1 (
    .clk, .rst_n, .in_valid(l1_v), .in_ready(l1_r), .in_data(l1_d),
    .out_valid(f1_v), .out_ready(f1_r), .out_data(f1_d),
    .occupancy(occ[0]), .max_occupancy(hwm[0]), .clear_max);

  mvau #(.MW(N_HID), .MH(N_HID), .SIMD(SIMD_H), .PE(PE_H), .IN_ELEMS(PE1),
         .IBITS(ABITS), .WBITS(WBITS), .ABITS(ABITS), .ACC_W(ACC_W), .USE_ACT(1'b1)) u_fc2 (
    .clk, .rst_n, .cfg_we(cfg_we && cfg_layer == 4'd1), .cfg_sel, .cfg_addr, .cfg_data,
    .in_valid(f1_v), .in_ready(f1_r), .in_data(f1_d),
    .out_valid(l2_v), .out_ready(l2_r), .out_data(l2_d));

  stream_fifo #(.WIDTH(PE_H*ABITS), .DEPTH(FIFO_DEPTH)) u_q2 (
    .clk, .rst_n, .in_valid(l2_v), .in_ready(l2_r), .in_data(l2_d),
    .out_valid(f2_v), .out_ready(f2_r), .out_data(f2_d),
    .occupancy(occ[1]), .max_occupancy(hwm[1]), .clear_max);

  mvau #(.MW(N_HID), .MH(N_HID), .SIMD(SIMD_H), .PE(PE_H), .IN_ELEMS(PE_H),
         .IBITS(ABITS), .WBITS(WBITS), .ABITS(ABITS), .ACC_W(ACC_W), .USE_ACT(1'b1)) u_fc3 (
    .clk, .rst_n, .cfg_we(cfg_we && cfg_layer == 4'd2), .cfg_sel, .cfg_addr, .cfg_data,
    .in_valid(f2_v), .in_ready(f2_r), .in_data(f2_d),
    .out_valid(l3_v), .out_ready(l3_r), .out_data(l3_d));

  stream_fifo #(.WIDTH(PE_H*ABITS), .DEPTH(FIFO_DEPTH)) u_q3 (
    .clk, .rst_n, .in_valid(l3_v), .in_ready(l3_r), .in_data(l3_d),
    .out_valid(f3_v), .out_ready(f3_r), .out_data(f3_d),
    .occupancy(occ[2]), .max_occupancy(hwm[2]), .clear_max);

  mvau #(.MW(N_HID), .MH(N_CLASS), .SIMD(SIMD_H), .PE(PE_OUT), .IN_ELEMS(PE_H),
         .IBITS(ABITS), .WBITS(WBITS), .ABITS(ABITS), .ACC_W(ACC_W), .USE_ACT(1'b0)) u_fc4 (
    .clk, .rst_n, .cfg_we(cfg_we && cfg_layer == 4'd3), .cfg_sel, .cfg_addr, .cfg_data,
    .in_valid(f3_v), .in_ready(f3_r), .in_data(f3_d),
    .out_valid(l4_v), .out_ready(l4_r), .out_data(l4_d));

  stream_fifo #(.WIDTH(PE_OUT*ACC_W), .DEPTH(FIFO_DEPTH)) u_q4 (
    .clk, .rst_n, .in_valid(l4_v), .in_ready(l4_r), .in_data(l4_d),
    .out_valid(f4_v), .out_ready(f4_r), .out_data(f4_d),
    .occupancy(occ[3]), .max_occupancy(hwm[3]), .clear_max);

  topk #(.ACC_W(ACC_W), .PE(PE_OUT), .NCLASS(N_CLASS), .IDX_W(IDX_W)) u_topk (
    .clk, .rst_n, .in_valid(f4_v), .in_ready(f4_r), .in_data(f4_d),
    .out_valid, .out_ready, .out_data);

  always_comb for (int i = 0; i < 4; i++) fifo_max[i] = 16'(hwm[i]);
endmodule
