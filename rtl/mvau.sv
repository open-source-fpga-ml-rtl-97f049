// mvau: FINN-style matrix-vector-activation unit, one fully connected layer.
//
// Computes y = act(W x) for an MH x MW weight matrix W. The work is folded:
// PE output neurons are computed in parallel, each from SIMD inputs per
// cycle, so one input vector takes NF = MH/PE neuron folds of SF = MW/SIMD
// cycles each. With USE_ACT = 1 the accumulator of each neuron goes through
// a multithreshold activation (batch-norm and ReLU folded into thresholds,
// ABITS-bit unsigned output); with USE_ACT = 0 the raw ACC_W-bit accumulator
// is output (the network's last layer, feeding the top-k node).
//
// Dataflow: the input vector arrives as words of IN_ELEMS elements of IBITS
// bits (unsigned, activations of the layer before) and is buffered whole
// (MW/IN_ELEMS cycles). Then each neuron fold takes SF cycles and one cycle to
// hand its PE results to out_valid/out_ready; the output stream is NF words
// of PE elements. Weights are WBITS-bit signed, stored per PE, one SIMD-wide
// word per (neuron fold, synapse fold).
//
// Parameters are loaded through the cfg port before use: CFG_WEIGHT at
// address row*MW + col, CFG_THRESHOLD at address row*NT + index (ascending
// per row). In the paper's flow weights are fixed in the bitstream; the load
// port, the unoverlapped load/compute schedule and the folding values are
// this design's choices, the folded PE/SIMD structure and thresholds follow
// the FINN flow the paper uses.
module mvau
  import tinyml_pkg::*;
#(
  parameter int unsigned MW       = 256,
  parameter int unsigned MH       = 256,
  parameter int unsigned SIMD     = 16,
  parameter int unsigned PE       = 16,
  parameter int unsigned IN_ELEMS = 16,
  parameter int unsigned IBITS    = 3,
  parameter int unsigned WBITS    = 3,
  parameter int unsigned ABITS    = 3,
  parameter int unsigned ACC_W    = 24,
  parameter bit          USE_ACT  = 1'b1,
  parameter int unsigned OBITS    = USE_ACT ? ABITS : ACC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // parameter load
  input  logic                     cfg_we,
  input  logic [1:0]               cfg_sel,
  input  logic [31:0]              cfg_addr,
  input  logic [31:0]              cfg_data,
  // input activations
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [IN_ELEMS*IBITS-1:0] in_data,
  // output activations
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [PE*OBITS-1:0]      out_data
);
  localparam int unsigned NF  = MH / PE;
  localparam int unsigned SF  = MW / SIMD;
  localparam int unsigned NL  = MW / IN_ELEMS;
  localparam int unsigned NT  = (1 << ABITS) - 1;
  localparam int unsigned WD  = NF * SF;
  localparam int unsigned NFW = (NF > 1) ? $clog2(NF) : 1;
  localparam int unsigned SFW = (SF > 1) ? $clog2(SF) : 1;
  localparam int unsigned NLW = (NL > 1) ? $clog2(NL) : 1;
  localparam int unsigned WDW = (WD > 1) ? $clog2(WD) : 1;

  typedef enum logic [1:0] {S_LOAD, S_COMP, S_OUT} state_e;

  logic [SIMD*WBITS-1:0]   wmem [PE][WD];
  logic signed [ACC_W-1:0] tmem [PE][NF][NT];
  logic [IBITS-1:0]        ibuf [MW];

  state_e                  state;
  logic [NLW-1:0]          ld_cnt;
  logic [NFW-1:0]          nf;
  logic [SFW-1:0]          sf;
  logic signed [ACC_W-1:0] acc     [PE];
  logic signed [ACC_W-1:0] acc_sum [PE];
  logic [ABITS-1:0]        act     [PE];

  // ---- parameter load -----------------------------------------------------
  always_ff @(posedge clk) begin
    if (cfg_we && cfg_sel == CFG_WEIGHT && cfg_addr < 32'(MW * MH)) begin
      automatic int unsigned row = cfg_addr / MW;
      automatic int unsigned col = cfg_addr % MW;
      wmem[row % PE][(row / PE) * SF + col / SIMD][(col % SIMD) * WBITS +: WBITS]
        <= cfg_data[WBITS-1:0];
    end
    if (cfg_we && cfg_sel == CFG_THRESHOLD && cfg_addr < 32'(MH * NT)) begin
      automatic int unsigned row = cfg_addr / NT;
      tmem[row % PE][row / PE][cfg_addr % NT] <= ACC_W'(signed'(cfg_data));
    end
  end

  // ---- datapath: PE dot products of SIMD elements ---------------------------
  always_comb begin
    for (int p = 0; p < int'(PE); p++) begin
      logic [SIMD*WBITS-1:0]   wrow;
      logic signed [ACC_W-1:0] s;
      wrow = wmem[p][WDW'(int'(nf) * int'(SF) + int'(sf))];
      s = acc[p];
      for (int i = 0; i < int'(SIMD); i++) begin
        logic signed [WBITS-1:0] w;
        logic signed [IBITS:0]   x;
        w = wrow[i*WBITS +: WBITS];
        x = signed'({1'b0, ibuf[int'(sf) * int'(SIMD) + i]});
        s = s + ACC_W'(w) * ACC_W'(x);
      end
      acc_sum[p] = s;
    end
  end

  for (genvar p = 0; p < PE; p++) begin : g_act
    if (USE_ACT) begin : g_thr
      multithreshold #(.ACC_W(ACC_W), .ABITS(ABITS), .NT(NT)) u_thr (
        .acc(acc_sum[p]), .thr(tmem[p][nf]), .out(act[p]));
    end else begin : g_none
      assign act[p] = '0;
    end
  end

  assign in_ready = (state == S_LOAD);

  // ---- control --------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_LOAD;
      ld_cnt    <= '0;
      nf        <= '0;
      sf        <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      for (int p = 0; p < int'(PE); p++) acc[p] <= '0;
    end else begin
      case (state)
        S_LOAD: if (in_valid) begin
          for (int e = 0; e < int'(IN_ELEMS); e++)
            ibuf[int'(ld_cnt) * int'(IN_ELEMS) + e] <= in_data[e*IBITS +: IBITS];
          if (ld_cnt == NLW'(NL - 1)) begin
            ld_cnt <= '0;
            state  <= S_COMP;
          end else begin
            ld_cnt <= ld_cnt + 1'b1;
          end
        end
        S_COMP: begin
          if (sf == SFW'(SF - 1)) begin
            sf        <= '0;
            state     <= S_OUT;
            out_valid <= 1'b1;
            for (int p = 0; p < int'(PE); p++) begin
              acc[p] <= '0;
              if (USE_ACT) out_data[p*OBITS +: OBITS] <= OBITS'(act[p]);
              else         out_data[p*OBITS +: OBITS] <= OBITS'(acc_sum[p]);
            end
          end else begin
            sf <= sf + 1'b1;
            for (int p = 0; p < int'(PE); p++) acc[p] <= acc_sum[p];
          end
        end
        S_OUT: if (out_ready) begin
          out_valid <= 1'b0;
          if (nf == NFW'(NF - 1)) begin
            nf    <= '0;
            state <= S_LOAD;
          end else begin
            nf    <= nf + 1'b1;
            state <= S_COMP;
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  initial begin
    assert (MH % PE == 0)       else $fatal(1, "mvau: PE must divide MH");
    assert (MW % SIMD == 0)     else $fatal(1, "mvau: SIMD must divide MW");
    assert (MW % IN_ELEMS == 0) else $fatal(1, "mvau: IN_ELEMS must divide MW");
  end

  // Stream rule: once offered, an output word holds until it is taken.
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data))
    else $error("mvau: output word changed before it was taken");
endmodule
