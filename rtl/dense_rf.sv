// dense_rf: hls4ml-style fully connected layer with a reuse factor.
//
// y[o] = relu( sum_i x[i] * w[i][o] + b[o] ), in fixed point. Batch-norm has
// been folded into w and b before the weights are loaded (k_folded = v k,
// b_folded = v (b - mu) + beta), so the layer has no separate BN stage, and
// the ReLU is merged into the layer instead of being a dataflow stage of its
// own. Both foldings follow the paper.
//
// Reuse factor: the layer has NMULT = N_IN*N_OUT/RF multipliers, each used RF
// times per input vector. Weights are numbered input-major, k = i*N_OUT + o;
// multiplier m handles the RF consecutive weights k = m*RF .. m*RF+RF-1, one
// per cycle, and adds its product into accumulator o(k). Several multipliers
// may hit the same accumulator in one cycle; their products are summed.
//
// Number formats (this design's choice, the paper gives only "6-12 bits"):
// x and y are IN_W/OUT_W-bit signed with the same number of fraction bits,
// w is W_W-bit signed with W_FRAC fraction bits, b is B_W-bit signed in the
// output format. Products are summed at full precision, shifted right by
// W_FRAC (truncation) and saturated to OUT_W bits.
//
// Interface and timing: the whole input vector arrives in one word
// (in_valid/in_ready), the layer computes for RF cycles and offers the whole
// output vector (out_valid/out_ready); a new input is taken once the result
// has been taken. Latency RF + 1 cycles from input accepted to out_valid.
// Weights load with CFG_WEIGHT at address i*N_OUT + o, biases with CFG_BIAS
// at address o.
module dense_rf
  import tinyml_pkg::*;
#(
  parameter int unsigned N_IN   = 72,
  parameter int unsigned N_OUT  = 72,
  parameter int unsigned RF     = 144,
  parameter int unsigned IN_W   = 12,
  parameter int unsigned OUT_W  = 12,
  parameter int unsigned W_W    = 6,
  parameter int unsigned W_FRAC = 4,
  parameter int unsigned B_W    = 12,
  parameter int unsigned ACC_W  = 32,
  parameter bit          RELU   = 1'b1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cfg_we,
  input  logic [1:0]              cfg_sel,
  input  logic [31:0]             cfg_addr,
  input  logic [31:0]             cfg_data,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [N_IN*IN_W-1:0]    in_data,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [N_OUT*OUT_W-1:0]  out_data
);
  localparam int unsigned NMULT = (N_IN * N_OUT) / RF;
  localparam int unsigned RFW   = (RF > 1) ? $clog2(RF) : 1;
  localparam int unsigned IW    = (N_IN > 1) ? $clog2(N_IN) : 1;
  localparam int unsigned OW    = (N_OUT > 1) ? $clog2(N_OUT) : 1;

  typedef enum logic [1:0] {S_IDLE, S_COMP, S_OUT} state_e;

  logic signed [W_W-1:0]   wmem [NMULT][RF];
  logic signed [B_W-1:0]   bmem [N_OUT];
  logic signed [IN_W-1:0]  xbuf [N_IN];
  logic signed [ACC_W-1:0] acc  [N_OUT];
  logic signed [ACC_W-1:0] acc_n[N_OUT];
  logic [IW-1:0]           in_idx  [NMULT];
  logic [OW-1:0]           out_idx [NMULT];
  logic [RFW-1:0]          cyc;
  state_e                  state;

  // ---- parameter load -----------------------------------------------------
  always_ff @(posedge clk) begin
    if (cfg_we && cfg_sel == CFG_WEIGHT && cfg_addr < 32'(N_IN * N_OUT))
      wmem[cfg_addr / RF][cfg_addr % RF] <= W_W'(cfg_data);
    if (cfg_we && cfg_sel == CFG_BIAS && cfg_addr < 32'(N_OUT))
      bmem[cfg_addr] <= B_W'(cfg_data);
  end

  // ---- one reuse cycle: NMULT products into their accumulators -----------
  always_comb begin
    for (int o = 0; o < int'(N_OUT); o++) acc_n[o] = acc[o];
    for (int m = 0; m < int'(NMULT); m++) begin
      logic signed [IN_W+W_W-1:0] prod;
      prod = xbuf[in_idx[m]] * wmem[m][cyc];
      acc_n[out_idx[m]] = acc_n[out_idx[m]] + ACC_W'(prod);
    end
  end

  assign in_ready = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cyc       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      for (int o = 0; o < int'(N_OUT); o++) acc[o] <= '0;
      for (int m = 0; m < int'(NMULT); m++) begin
        in_idx[m]  <= '0;
        out_idx[m] <= '0;
      end
    end else begin
      case (state)
        S_IDLE: if (in_valid) begin
          for (int i = 0; i < int'(N_IN); i++) xbuf[i] <= in_data[i*IN_W +: IN_W];
          // bias enters at the product's scale
          for (int o = 0; o < int'(N_OUT); o++)
            acc[o] <= ACC_W'(bmem[o]) <<< W_FRAC;
          for (int m = 0; m < int'(NMULT); m++) begin
            in_idx[m]  <= IW'((m * RF) / N_OUT);
            out_idx[m] <= OW'((m * RF) % N_OUT);
          end
          cyc   <= '0;
          state <= S_COMP;
        end
        S_COMP: begin
          for (int o = 0; o < int'(N_OUT); o++) acc[o] <= acc_n[o];
          for (int m = 0; m < int'(NMULT); m++) begin
            if (out_idx[m] == OW'(N_OUT - 1)) begin
              out_idx[m] <= '0;
              in_idx[m]  <= in_idx[m] + 1'b1;
            end else begin
              out_idx[m] <= out_idx[m] + 1'b1;
            end
          end
          if (cyc == RFW'(RF - 1)) begin
            state     <= S_OUT;
            out_valid <= 1'b1;
            for (int o = 0; o < int'(N_OUT); o++) begin
              logic signed [63:0] v;
              v = 64'(acc_n[o] >>> W_FRAC);
              if (RELU && v < 0) v = '0;
              out_data[o*OUT_W +: OUT_W] <= OUT_W'(sat_signed(v, OUT_W));
            end
          end else begin
            cyc <= cyc + 1'b1;
          end
        end
        S_OUT: if (out_ready) begin
          out_valid <= 1'b0;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  initial assert ((N_IN * N_OUT) % RF == 0) else $fatal(1, "dense_rf: RF must divide N_IN*N_OUT");
endmodule
