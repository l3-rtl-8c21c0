// tb_adder_unit -- adder of the rank PU with 8 chips, N_HC = 4 (two head
// groups) and N_GQA = 2. Tree mode: random chip partials must come out one
// cycle later as the saturated sum over the four chips of each group.
// Accumulate mode: random partial context words from several banks are
// accumulated and read back per query and chip word, in the same chip order,
// and `clear` must empty the accumulators.
module tb_adder_unit;
  import chime_pkg::*;
  localparam int N_CHIPS = 8, E_H = 128, N_HC = 4, N_GQA = 2;
  localparam int G = N_CHIPS / N_HC, WPT = E_H / (N_HC * 4);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n = 1'b0, clear = 1'b0, in_valid = 1'b0;
  mac_mode_e mode = MODE_TREE;
  logic [7:0] in_g = '0, rd_g = '0;
  logic [15:0] in_k = '0, rd_k = '0;
  logic [63:0] in_words [N_CHIPS];
  logic score_valid;
  elem_t score_out [G][4];
  logic [63:0] rd_words [N_CHIPS];
  longint ref_acc [N_GQA][WPT][N_CHIPS][4];

  adder_unit #(.N_CHIPS(N_CHIPS), .E_H(E_H), .N_HC(N_HC), .N_GQA(N_GQA)) dut (
    .clk, .rst_n, .clear, .mode, .in_valid, .in_g, .in_k, .in_words, .score_valid,
    .score_out, .rd_g, .rd_k, .rd_words);

  function automatic elem_t sat_ref(longint v);
    if (v > 32767) return 16'h7fff;
    if (v < -32768) return 16'h8000;
    return 16'(v);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < N_CHIPS; c++) in_words[c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 50; n++) begin
      automatic longint sum [G][4];
      automatic int rng = (n < 25) ? 4000 : 32767;
      @(negedge clk);
      mode = MODE_TREE; in_valid = 1'b1;
      for (int h = 0; h < G; h++) for (int j = 0; j < 4; j++) sum[h][j] = 0;
      for (int c = 0; c < N_CHIPS; c++)
        for (int j = 0; j < 4; j++) begin
          in_words[c][16*j +: 16] = 16'($signed($urandom_range(2*rng, 0)) - rng);
          sum[c / N_HC][j] += longint'($signed(in_words[c][16*j +: 16]));
        end
      @(negedge clk);
      in_valid = 1'b0;
      checks++;
      if (!score_valid) begin failures++; $display("FAIL score_valid n=%0d", n); end
      for (int h = 0; h < G; h++)
        for (int j = 0; j < 4; j++) begin
          checks++;
          if (score_out[h][j] !== sat_ref(sum[h][j])) begin
            failures++; $display("FAIL score n=%0d h=%0d j=%0d", n, h, j);
          end
        end
    end
    @(negedge clk);
    checks++;
    if (score_valid) begin failures++; $display("FAIL score_valid held"); end
    for (int g = 0; g < N_GQA; g++)
      for (int k = 0; k < WPT; k++)
        for (int c = 0; c < N_CHIPS; c++)
          for (int j = 0; j < 4; j++) ref_acc[g][k][c][j] = 0;
    for (int n = 0; n < 120; n++) begin
      @(negedge clk);
      mode = MODE_ACC; in_valid = 1'b1;
      in_g = 8'($urandom_range(N_GQA-1, 0)); in_k = 16'($urandom_range(WPT-1, 0));
      for (int c = 0; c < N_CHIPS; c++)
        for (int j = 0; j < 4; j++) begin
          in_words[c][16*j +: 16] = 16'($signed($urandom_range(2000, 0)) - 1000);
          ref_acc[in_g][in_k][c][j] += longint'($signed(in_words[c][16*j +: 16]));
        end
    end
    @(negedge clk);
    in_valid = 1'b0;
    for (int g = 0; g < N_GQA; g++)
      for (int k = 0; k < WPT; k++) begin
        rd_g = 8'(g); rd_k = 16'(k); #1;
        for (int c = 0; c < N_CHIPS; c++)
          for (int j = 0; j < 4; j++) begin
            checks++;
            if (rd_words[c][16*j +: 16] !== sat_ref(ref_acc[g][k][c][j])) begin
              failures++; $display("FAIL acc g=%0d k=%0d c=%0d j=%0d", g, k, c, j);
            end
          end
      end
    @(negedge clk);
    clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    #1;
    checks++;
    if (rd_words[0] !== '0) begin failures++; $display("FAIL clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
