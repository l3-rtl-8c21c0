// shared_buffer -- per-chip buffer that broadcasts input vectors to all bank PUs.
//
// The buffer holds two kinds of data, both written one 64-bit word at a time
// through a single write port (from PIM_WR_SB or PIM_LD_SB):
//   * the query block: N_CMR query vectors, WPT words each, at indices
//     g*WPT + k. The query read port returns word k of every query at once,
//     so the N_CMR queries of a GQA group share one K read in the bank PUs.
//   * two slots of softmax probabilities, one per chunk parity (double
//     buffering lets the rank PU fill one slot while the bank PUs use the
//     other). A slot holds N_BK*N_CMR 16-bit values in g-major order
//     (value g*N_BK + bank), four per word, starting at S_BASE + slot*S_WORDS.
//     The probability read port returns the whole selected slot.
// Reads are combinational; writes take effect at the clock edge. The
// broadcast role is the paper's; sizes and ports are this design's choice.
// Lint: q_k and the slot address are in range by construction (q_k < WPT is checked); the lint
// notes on index width and on the unused upper bits of the word index are expected.
module shared_buffer #(
  parameter int N_BK  = 16,
  parameter int N_CMR = 1,
  parameter int WPT   = 4,
  localparam int S_WORDS = (N_BK * N_CMR + 3) / 4,
  localparam int S_BASE  = N_CMR * WPT,
  localparam int DEPTH   = S_BASE + 2 * S_WORDS
) (
  input  logic        clk,
  input  logic        we,
  input  logic [15:0] widx,
  input  logic [63:0] wdata,
  input  logic [15:0] q_k,                         // word index within a query
  output logic [63:0] q_words [N_CMR],             // word q_k of each query
  input  logic        s_slot,
  output logic [15:0] s_vals  [N_CMR][N_BK]        // probabilities of the slot
);
  logic [63:0] mem [DEPTH];

  always_ff @(posedge clk)
    if (we && widx < 16'(DEPTH)) mem[widx] <= wdata;

  always_comb begin
    for (int g = 0; g < N_CMR; g++) begin
      q_words[g] = (q_k < 16'(WPT)) ? mem[g * WPT + int'(q_k)] : '0;
      for (int b = 0; b < N_BK; b++) begin
        automatic int pos = g * N_BK + b;
        automatic int w   = S_BASE + int'(s_slot) * S_WORDS + pos / 4;
        s_vals[g][b] = mem[w][16 * (pos % 4) +: 16];
      end
    end
  end
endmodule
