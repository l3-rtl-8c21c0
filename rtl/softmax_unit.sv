// softmax_unit -- chunk-streaming softmax of the rank PU.
//
// Scores reach the rank PU chunk by chunk while the bank PUs are already
// computing the next chunk, so the softmax cannot wait for the global maximum.
// For every head group h (G = N_CHIPS/N_HC groups) and query g it keeps a
// running maximum m and a running sum l of exp(x - m):
//   accumulate (acc_valid): LANES scores of query acc_g arrive per group; with
//     v = max of the unmasked lanes, m' = max(m, v) and
//     l' = l * exp(m - m') + sum_i exp(x_i - m'). The first update of a pair
//     after `clear` just takes m' = v.
//   finalize (fin_start): computes 1/l for every pair, one query index per
//     cycle for all groups in parallel; fin_done pulses when done.
//   normalize (nrm_valid): stored scores come back and leave one cycle later
//     as probabilities p = exp(x - m) / l in unsigned Q0.16 (65535 = 1.0);
//     masked lanes give 0.
// Scores are Q8.8; exp uses exp_neg() from chime_pkg. This is the paper's
// chunk softmax followed by a cross-chunk normalization pass, computed as an
// online update per arriving burst (this design's choice, equal in result).
// Lint: acc_g/nrm_g are reduced modulo N_GQA before indexing, so the lint notes on index and
// modulo widths (8-bit query index into a 1..8-entry array) are expected.
module softmax_unit
  import chime_pkg::*;
#(
  parameter int N_CHIPS = 8,
  parameter int N_HC    = 8,
  parameter int N_GQA   = 1,
  parameter int LANES   = 4,
  localparam int G      = N_CHIPS / N_HC
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        acc_valid,
  input  logic [7:0]  acc_g,
  input  elem_t       acc_x    [G][LANES],
  input  logic [LANES-1:0] acc_mask,
  input  logic        fin_start,
  output logic        fin_done,
  input  logic        nrm_valid,
  input  logic [7:0]  nrm_g,
  input  elem_t       nrm_x    [G][LANES],
  input  logic [LANES-1:0] nrm_mask,
  output logic        p_valid,
  output logic [15:0] p_out    [G][LANES]
);
  localparam int L_W = 40;

  elem_t          m_q    [G][N_GQA];
  logic [L_W-1:0] l_q    [G][N_GQA];
  logic [16:0]    rcp_q  [G][N_GQA];
  logic           seen_q [N_GQA];
  logic           fin_busy;
  logic [7:0]     fin_idx;

  // Online update for the pair (h, acc_g).
  elem_t          vmax  [G];
  elem_t          m_new [G];
  logic [L_W-1:0] l_new [G];
  always_comb begin
    for (int h = 0; h < G; h++) begin
      automatic logic any = 1'b0;
      automatic elem_t m_old = m_q[h][acc_g % N_GQA];
      automatic logic [L_W-1:0] s = '0;
      vmax[h] = 16'sh8000;
      for (int i = 0; i < LANES; i++)
        if (acc_mask[i]) begin
          any = 1'b1;
          if (acc_x[h][i] > vmax[h]) vmax[h] = acc_x[h][i];
        end
      if (!seen_q[acc_g % N_GQA]) m_new[h] = vmax[h];
      else m_new[h] = (vmax[h] > m_old && any) ? vmax[h] : m_old;
      for (int i = 0; i < LANES; i++)
        if (acc_mask[i])
          s += L_W'(exp_neg(17'(acc_x[h][i]) - 17'(m_new[h])));
      if (!seen_q[acc_g % N_GQA])
        l_new[h] = s;
      else
        l_new[h] = L_W'((64'(l_q[h][acc_g % N_GQA]) * 64'(exp_neg(17'(m_old) - 17'(m_new[h])))) >> 16) + s;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < N_GQA; g++) begin
        seen_q[g] <= 1'b0;
        for (int h = 0; h < G; h++) begin
          m_q[h][g] <= '0; l_q[h][g] <= '0; rcp_q[h][g] <= '0;
        end
      end
      fin_busy <= 1'b0;
      fin_idx  <= '0;
      fin_done <= 1'b0;
    end else begin
      fin_done <= 1'b0;
      if (clear) begin
        for (int g = 0; g < N_GQA; g++) seen_q[g] <= 1'b0;
        fin_busy <= 1'b0;
      end else if (acc_valid && |acc_mask) begin
        seen_q[acc_g % N_GQA] <= 1'b1;
        for (int h = 0; h < G; h++) begin
          m_q[h][acc_g % N_GQA] <= m_new[h];
          l_q[h][acc_g % N_GQA] <= l_new[h];
        end
      end
      if (fin_start && !clear) begin
        fin_busy <= 1'b1;
        fin_idx  <= '0;
      end else if (fin_busy) begin
        // 1/l in Q0.16: 2^32 / l, with l in Q.16 (l >= 1.0 after any update).
        for (int h = 0; h < G; h++)
          rcp_q[h][fin_idx] <= (l_q[h][fin_idx] == '0) ? 17'd0 : 17'(64'h1_0000_0000 / 64'(l_q[h][fin_idx]));
        if (int'(fin_idx) == N_GQA - 1) begin
          fin_busy <= 1'b0;
          fin_done <= 1'b1;
        end
        fin_idx <= fin_idx + 8'd1;
      end
    end
  end

  // Normalization pass.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_valid <= 1'b0;
      for (int h = 0; h < G; h++)
        for (int i = 0; i < LANES; i++) p_out[h][i] <= '0;
    end else begin
      p_valid <= nrm_valid;
      if (nrm_valid)
        for (int h = 0; h < G; h++)
          for (int i = 0; i < LANES; i++) begin
            automatic logic [33:0] p = 34'(exp_neg(17'(nrm_x[h][i]) - 17'(m_q[h][nrm_g % N_GQA])))
                                     * 34'(rcp_q[h][nrm_g % N_GQA]);
            automatic logic [17:0] q = 18'(p >> 16);
            p_out[h][i] <= !nrm_mask[i] ? 16'd0 : (q > 18'd65535) ? 16'hffff : q[15:0];
          end
    end
  end
endmodule
