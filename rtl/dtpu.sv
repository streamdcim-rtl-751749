// dtpu: dynamic token pruning unit.
//
// While snoop_valid is high the unit adds each lane of the word on
// snoop_data (one row of attention probabilities over 64 key tokens, Q0.15)
// to that token's column sum. The column mean that ranks a token's
// importance is the column sum divided by the number of rows, the same
// divisor for every token, so the ranking uses the sums directly.
// On finalize the 64 tokens are ranked in parallel: rank(i) counts the
// tokens with a larger sum, or an equal sum and a lower index. Tokens with
// rank < keep_cnt stay set in keep_mask; the others are pruned. keep_mask is
// updated and mask_valid pulses one cycle after finalize. clear (and reset)
// zero the sums and set keep_mask to all ones (nothing pruned).
//
// Ranking by column mean of the attention probabilities follows the paper;
// the 64-token tile, tie rule and widths are this design's choices.
module dtpu
  import sdcim_pkg::*;
#(
  parameter int SUM_W = 28
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             snoop_valid,
  input  vec_t             snoop_data,
  input  logic             finalize,
  input  logic [6:0]       keep_cnt,
  output logic [LANES-1:0] keep_mask,
  output logic             mask_valid
);
  logic [SUM_W-1:0] colsum [LANES];

  // One ranking circuit per token: 63 comparisons and a population count.
  logic [LANES-1:0] keep_c;
  for (genvar i = 0; i < LANES; i++) begin : g_rank
    logic [LANES-1:0] above;
    always_comb begin
      for (int j = 0; j < LANES; j++)
        above[j] = (colsum[j] > colsum[i]) || (colsum[j] == colsum[i] && j < i);
    end
    assign keep_c[i] = ($countones(above) < int'(keep_cnt));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LANES; i++) colsum[i] <= '0;
      keep_mask  <= '1;
      mask_valid <= 1'b0;
    end else begin
      mask_valid <= finalize;
      if (clear) begin
        for (int i = 0; i < LANES; i++) colsum[i] <= '0;
        keep_mask <= '1;
      end else begin
        if (snoop_valid)
          for (int i = 0; i < LANES; i++) colsum[i] <= colsum[i] + SUM_W'(snoop_data[i]);
        if (finalize) keep_mask <= keep_c;
      end
    end
  end
endmodule
