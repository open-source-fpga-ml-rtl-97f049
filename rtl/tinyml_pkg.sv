// tinyml_pkg: types and constants shared by the streaming accelerator.
//
// The accelerator is controlled through an AXI4-Lite register file whose map
// follows the usual layout of an HLS-generated control bundle: a control and
// status word at 0x00, the input buffer address at 0x10 and the output buffer
// address at 0x18. The map layout and bit positions are this design's choice.
// The model selector picks which of the dataflow cores is built; a core cannot
// be changed at run time.
package tinyml_pkg;

  // Which network the accelerator is built for (fixed at build time).
  typedef enum logic [1:0] {
    MODEL_KWS = 2'd0,   // keyword spotting, FINN-style 3-bit MLP
    MODEL_AD  = 2'd1    // anomaly detection, hls4ml-style autoencoder
  } model_e;

  // AXI4-Lite register offsets of the control bundle.
  localparam logic [7:0] REG_CTRL    = 8'h00;  // bit0 start, bit1 done, bit2 idle, bit3 ready
  localparam logic [7:0] REG_IN_LO   = 8'h10;  // input buffer address, bits 31:0
  localparam logic [7:0] REG_OUT_LO  = 8'h18;  // output buffer address, bits 31:0
  localparam logic [7:0] REG_CYCLES  = 8'h20;  // cycles taken by the last run (read only)
  localparam logic [7:0] REG_STATUS  = 8'h24;  // bus error flags (read only)

  localparam int CTRL_START_BIT = 0;
  localparam int CTRL_DONE_BIT  = 1;
  localparam int CTRL_IDLE_BIT  = 2;
  localparam int CTRL_READY_BIT = 3;

  // AXI response codes.
  localparam logic [1:0] AXI_RESP_OKAY   = 2'b00;
  localparam logic [1:0] AXI_RESP_SLVERR = 2'b10;

  // AXI burst type INCR.
  localparam logic [1:0] AXI_BURST_INCR = 2'b01;

  // Parameter-load bus selectors (weights, thresholds, biases).
  localparam logic [1:0] CFG_WEIGHT    = 2'd0;
  localparam logic [1:0] CFG_THRESHOLD = 2'd1;
  localparam logic [1:0] CFG_BIAS      = 2'd2;

  // Saturate a signed value held in 64 bits to W bits.
  function automatic logic signed [63:0] sat_signed(input logic signed [63:0] v, input int w);
    logic signed [63:0] hi, lo;
    hi = (64'sd1 <<< (w - 1)) - 64'sd1;
    lo = -(64'sd1 <<< (w - 1));
    if (v > hi) return hi;
    if (v < lo) return lo;
    return v;
  endfunction

endpackage
