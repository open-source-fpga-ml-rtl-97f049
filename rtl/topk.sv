// topk: top-1 classification node at the end of the FINN-style networks.
//
// Takes the output layer's logits as a stream of words with PE logits each,
// NCLASS logits in all, and emits one word holding the index of the largest
// one. Since the final softmax is monotonic it is dropped and this argmax is
// all the benchmark needs (top-1 accuracy). The paper inserts a "top-k" node;
// k = 1 and the tie rule (the lowest index wins) are this design's choice.
//
// Timing: one input word per cycle; the index is offered in the cycle after
// the last logit word and held until out_ready. No new logits are taken while
// the result waits.
module topk #(
  parameter int unsigned ACC_W  = 24,
  parameter int unsigned PE     = 4,
  parameter int unsigned NCLASS = 12,
  parameter int unsigned IDX_W  = (NCLASS > 1) ? $clog2(NCLASS) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [PE*ACC_W-1:0]   in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [IDX_W-1:0]      out_data
);
  localparam int unsigned NF  = NCLASS / PE;
  localparam int unsigned NFW = (NF > 1) ? $clog2(NF) : 1;

  logic [NFW-1:0]          word_cnt;
  logic signed [ACC_W-1:0] best_val;
  logic [IDX_W-1:0]        best_idx;
  logic signed [ACC_W-1:0] nbest_val;
  logic [IDX_W-1:0]        nbest_idx;

  assign in_ready = !out_valid;

  // Compare the incoming word against the running best, lowest index first.
  always_comb begin
    nbest_val = (word_cnt == '0) ? in_data[ACC_W-1:0] : best_val;
    nbest_idx = (word_cnt == '0) ? IDX_W'(word_cnt) * IDX_W'(PE) : best_idx;
    for (int p = 0; p < int'(PE); p++) begin
      logic signed [ACC_W-1:0] v;
      v = in_data[p*ACC_W +: ACC_W];
      if (v > nbest_val) begin
        nbest_val = v;
        nbest_idx = IDX_W'(int'(word_cnt) * int'(PE) + p);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      word_cnt  <= '0;
      best_val  <= '0;
      best_idx  <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        best_val <= nbest_val;
        best_idx <= nbest_idx;
        if (word_cnt == NFW'(NF - 1)) begin
          word_cnt  <= '0;
          out_valid <= 1'b1;
          out_data  <= nbest_idx;
        end else begin
          word_cnt <= word_cnt + 1'b1;
        end
      end
    end
  end

  initial assert (NCLASS % PE == 0) else $fatal(1, "topk: PE must divide NCLASS");
endmodule
