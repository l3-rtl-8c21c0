// adder_unit -- adder of the rank PU.
//
// Tree mode (score pass): each cycle with in_valid, chip c delivers four
// partial scores (Q8.8) of tokens belonging to head group c div N_HC. The unit
// adds the N_HC partials of each group lane by lane and registers the full
// scores on score_out one cycle later (score_valid), saturated to Q8.8.
// Accumulate mode (context pass): each cycle with in_valid, chip c delivers
// word k of the partial context vector of query in_g from one bank; the unit
// adds it into the output accumulator of head element r + N_HC*(4k + j)
// (r = c mod N_HC) of group c div N_HC. `clear` zeroes the accumulators.
// The read port returns, for query rd_g and chip word rd_k, the saturated
// output elements in the same chip order, ready for the re-layout unit.
// Summing partials across chips and banks is the paper's; the lane order and
// widths are this design's choice.
// Lint: in_g/rd_g are checked against N_GQA before use; the lint notes on index width are expected.
module adder_unit
  import chime_pkg::*;
#(
  parameter int N_CHIPS = 8,
  parameter int E_H     = 128,
  parameter int N_HC    = 8,
  parameter int N_GQA   = 1,
  localparam int G      = N_CHIPS / N_HC,
  localparam int WPT    = E_H / (N_HC * EPW)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  mac_mode_e   mode,
  input  logic        in_valid,
  input  logic [7:0]  in_g,
  input  logic [15:0] in_k,
  input  logic [63:0] in_words [N_CHIPS],
  output logic        score_valid,
  output elem_t       score_out   [G][EPW],
  input  logic [7:0]  rd_g,
  input  logic [15:0] rd_k,
  output logic [63:0] rd_words [N_CHIPS]
);
  logic signed [31:0] acc [G][N_GQA][E_H];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      score_valid <= 1'b0;
      for (int h = 0; h < G; h++) begin
        for (int j = 0; j < EPW; j++) score_out[h][j] <= '0;
        for (int g = 0; g < N_GQA; g++)
          for (int e = 0; e < E_H; e++) acc[h][g][e] <= '0;
      end
    end else begin
      score_valid <= in_valid && (mode == MODE_TREE);
      if (clear) begin
        for (int h = 0; h < G; h++)
          for (int g = 0; g < N_GQA; g++)
            for (int e = 0; e < E_H; e++) acc[h][g][e] <= '0;
      end else if (in_valid && mode == MODE_TREE) begin
        for (int h = 0; h < G; h++)
          for (int j = 0; j < EPW; j++) begin
            automatic logic signed [ACC_W-1:0] s = '0;
            for (int r = 0; r < N_HC; r++)
              s += ACC_W'($signed(in_words[h * N_HC + r][16*j +: 16]));
            score_out[h][j] <= sat16(s);
          end
      end else if (in_valid && mode == MODE_ACC && int'(in_g) < N_GQA && int'(in_k) < WPT) begin
        for (int c = 0; c < N_CHIPS; c++)
          for (int j = 0; j < EPW; j++)
            acc[c / N_HC][in_g][(c % N_HC) + N_HC * (EPW * int'(in_k) + j)] <=
              acc[c / N_HC][in_g][(c % N_HC) + N_HC * (EPW * int'(in_k) + j)] +
              32'($signed(in_words[c][16*j +: 16]));
      end
    end
  end

  always_comb begin
    for (int c = 0; c < N_CHIPS; c++) begin
      rd_words[c] = '0;
      if (int'(rd_g) < N_GQA && int'(rd_k) < WPT)
        for (int j = 0; j < EPW; j++)
          rd_words[c][16*j +: 16] =
            sat16(ACC_W'(acc[c / N_HC][rd_g][(c % N_HC) + N_HC * (EPW * int'(rd_k) + j)]));
    end
  end
endmodule
