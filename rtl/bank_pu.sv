// bank_pu -- near-bank processing unit of a PIM DRAM chip.
//
// Each PIM_MAC step the bank PU consumes one 64-bit word read from its bank
// (four Q8.8 elements) and works in one of two paradigms chosen by PIM_WR_R:
//   * MODE_TREE (score): an adder tree forms q_g . kv over the four elements
//     for each of the N_CMR queries and adds it to a per-query running sum.
//     On the token's last word the sum, shifted back to Q8.8 and saturated,
//     is written into result-buffer slot `slot`, and the sum restarts. The
//     two slots let the rank PU read chunk c while chunk c+1 is computed.
//   * MODE_ACC (context): for word k of the V row, each element is multiplied
//     by this bank's probability s_g (unsigned Q0.16) and accumulated into
//     ctx[g][k][j]; the accumulators sum over all tokens held by the bank.
// N_CMR is the compute-memory ratio: N_CMR queries reuse every K/V read (GQA).
// Timing: inputs are sampled at the clock edge when mac_valid is high; the
// result buffer is read combinationally (rb_score for tree results,
// rb_ctx for context words, saturated to Q8.8). clear zeroes all sums.
// The MAC role, the result buffer and the two paradigms are the paper's;
// fixed point, widths and read-out format are this design's choice.
// Lint: Indices rb_g/k are compared against N_CMR/WPT before use, so the lint notes that the
// 8/16-bit index is wider than the array are expected.
module bank_pu
  import chime_pkg::*;
#(
  parameter int N_CMR = 1,
  parameter int WPT   = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  mac_mode_e   mode,
  input  logic        mac_valid,
  input  logic [15:0] k,
  input  logic        last,
  input  logic        slot,
  input  logic [63:0] kv_word,
  input  logic [63:0] q_words [N_CMR],
  input  logic [15:0] s_vals  [N_CMR],
  input  logic        rb_slot,
  input  logic [7:0]  rb_g,
  input  logic [15:0] rb_k,
  output elem_t       rb_score,
  output logic [63:0] rb_ctx
);
  logic signed [ACC_W-1:0] tsum  [N_CMR];
  logic signed [ACC_W-1:0] ctx   [N_CMR][WPT][EPW];
  elem_t                   score [2][N_CMR];
  logic signed [ACC_W-1:0] dot   [N_CMR];

  // Adder tree over the four products of one word.
  always_comb begin
    for (int g = 0; g < N_CMR; g++) begin
      dot[g] = '0;
      for (int j = 0; j < EPW; j++)
        dot[g] += ACC_W'($signed(q_words[g][16*j +: 16]) * $signed(kv_word[16*j +: 16]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < N_CMR; g++) begin
        tsum[g] <= '0;
        score[0][g] <= '0;
        score[1][g] <= '0;
        for (int w = 0; w < WPT; w++)
          for (int j = 0; j < EPW; j++) ctx[g][w][j] <= '0;
      end
    end else if (clear) begin
      for (int g = 0; g < N_CMR; g++) begin
        tsum[g] <= '0;
        for (int w = 0; w < WPT; w++)
          for (int j = 0; j < EPW; j++) ctx[g][w][j] <= '0;
      end
    end else if (mac_valid) begin
      for (int g = 0; g < N_CMR; g++) begin
        if (mode == MODE_TREE) begin
          if (last) begin
            score[slot][g] <= sat16((tsum[g] + dot[g]) >>> 8);
            tsum[g]        <= '0;
          end else begin
            tsum[g] <= tsum[g] + dot[g];
          end
        end else if (k < 16'(WPT)) begin
          for (int j = 0; j < EPW; j++)
            ctx[g][k][j] <= ctx[g][k][j] +
              ACC_W'($signed({1'b0, s_vals[g]}) * $signed(kv_word[16*j +: 16]));
        end
      end
    end
  end

  always_comb begin
    rb_score = (rb_g < 8'(N_CMR)) ? score[rb_slot][rb_g] : '0;
    rb_ctx   = '0;
    if (rb_g < 8'(N_CMR) && rb_k < 16'(WPT))
      for (int j = 0; j < EPW; j++)
        rb_ctx[16*j +: 16] = sat16(ctx[rb_g][rb_k][j] >>> 16);
  end
endmodule
