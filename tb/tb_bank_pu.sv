// tb_bank_pu -- bank processing unit with two queries sharing the bank
// (N_CMR = 2). Tree mode: streams random key tokens of WPT words, one word per
// MAC, and checks each token's score for both queries against an integer dot
// product, alternating the score slot so the previous slot stays readable.
// Accumulation mode: streams value words with random probabilities and checks
// the context accumulators, then checks that clear empties them.
module tb_bank_pu;
  import chime_pkg::*;
  localparam int N_CMR = 2, WPT = 4;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n = 1'b0, clear = 1'b0, mac_valid = 1'b0, last = 1'b0, slot = 1'b0, rb_slot = 1'b0;
  mac_mode_e mode = MODE_TREE;
  logic [15:0] k = '0, rb_k = '0;
  logic [7:0] rb_g = '0;
  logic [63:0] kv_word = '0;
  logic [63:0] q_words [N_CMR];
  logic [15:0] s_vals [N_CMR];
  elem_t rb_score;
  logic [63:0] rb_ctx;
  longint ctx_ref [N_CMR][WPT][4];
  elem_t prev_ref [N_CMR];

  bank_pu #(.N_CMR(N_CMR), .WPT(WPT)) dut (.clk, .rst_n, .clear, .mode, .mac_valid, .k,
    .last, .slot, .kv_word, .q_words, .s_vals, .rb_slot, .rb_g, .rb_k, .rb_score, .rb_ctx);

  function automatic logic [15:0] rnd_elem(int range);
    return 16'($signed($urandom_range(2*range, 0)) - range);
  endfunction

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
    automatic logic [63:0] q [N_CMR][WPT];
    for (int g = 0; g < N_CMR; g++) begin q_words[g] = '0; s_vals[g] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int g = 0; g < N_CMR; g++)
      for (int w = 0; w < WPT; w++)
        for (int j = 0; j < 4; j++) q[g][w][16*j +: 16] = rnd_elem(2000);
    // Tree mode: 20 tokens.
    for (int t = 0; t < 20; t++) begin
      automatic longint sum [N_CMR];
      for (int g = 0; g < N_CMR; g++) sum[g] = 0;
      for (int w = 0; w < WPT; w++) begin
        @(negedge clk);
        mode = MODE_TREE; mac_valid = 1'b1; k = 16'(w); last = (w == WPT-1); slot = t[0];
        for (int j = 0; j < 4; j++) kv_word[16*j +: 16] = rnd_elem(30000);
        for (int g = 0; g < N_CMR; g++) begin
          q_words[g] = q[g][w];
          for (int j = 0; j < 4; j++)
            sum[g] += longint'($signed(q[g][w][16*j +: 16])) * longint'($signed(kv_word[16*j +: 16]));
        end
      end
      @(negedge clk);
      mac_valid = 1'b0;
      for (int g = 0; g < N_CMR; g++) begin
        rb_slot = t[0]; rb_g = 8'(g); #1;
        checks++;
        if (rb_score !== sat_ref(sum[g] >>> 8)) begin
          failures++; $display("FAIL score t=%0d g=%0d got %0d exp %0d", t, g, $signed(rb_score), sum[g] >>> 8);
        end
        if (t > 0) begin
          rb_slot = ~t[0]; #1;
          checks++;
          if (rb_score !== prev_ref[g]) begin failures++; $display("FAIL previous slot t=%0d g=%0d", t, g); end
        end
        prev_ref[g] = sat_ref(sum[g] >>> 8);
      end
    end
    // Accumulation mode.
    @(negedge clk);
    clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    for (int g = 0; g < N_CMR; g++)
      for (int w = 0; w < WPT; w++)
        for (int j = 0; j < 4; j++) ctx_ref[g][w][j] = 0;
    for (int t = 0; t < 30; t++) begin
      automatic logic [15:0] sv [N_CMR];
      for (int g = 0; g < N_CMR; g++) sv[g] = 16'($urandom_range(65535, 0));
      for (int w = 0; w < WPT; w++) begin
        @(negedge clk);
        s_vals = sv;
        mode = MODE_ACC; mac_valid = 1'b1; k = 16'(w); last = (w == WPT-1);
        for (int j = 0; j < 4; j++) kv_word[16*j +: 16] = rnd_elem(1024);
        for (int g = 0; g < N_CMR; g++)
          for (int j = 0; j < 4; j++)
            ctx_ref[g][w][j] += longint'(s_vals[g]) * longint'($signed(kv_word[16*j +: 16]));
      end
    end
    @(negedge clk);
    mac_valid = 1'b0;
    for (int g = 0; g < N_CMR; g++)
      for (int w = 0; w < WPT; w++) begin
        rb_g = 8'(g); rb_k = 16'(w); #1;
        for (int j = 0; j < 4; j++) begin
          checks++;
          if (rb_ctx[16*j +: 16] !== sat_ref(ctx_ref[g][w][j] >>> 16)) begin
            failures++; $display("FAIL ctx g=%0d w=%0d j=%0d got %0d exp %0d", g, w, j,
              $signed(rb_ctx[16*j +: 16]), ctx_ref[g][w][j] >>> 16);
          end
        end
      end
    @(negedge clk);
    clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    rb_g = 0; rb_k = 0; #1;
    checks++;
    if (rb_ctx !== '0) begin failures++; $display("FAIL clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
