// tb_shared_buffer -- fills the query region and both probability slots of a
// shared buffer with N_CMR = 2 and checks the query read port (word k of every
// query) and the probability read port (value g*N_BK + bank of a slot).
module tb_shared_buffer;
  localparam int N_BK = 16, N_CMR = 2, WPT = 4;
  localparam int S_WORDS = N_BK * N_CMR / 4, S_BASE = N_CMR * WPT;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we = 1'b0, s_slot = 1'b0;
  logic [15:0] widx = '0, q_k = '0;
  logic [63:0] wdata = '0;
  logic [63:0] q_words [N_CMR];
  logic [15:0] s_vals [N_CMR][N_BK];
  logic [63:0] model [S_BASE + 2*S_WORDS];

  shared_buffer #(.N_BK(N_BK), .N_CMR(N_CMR), .WPT(WPT)) dut (
    .clk, .we, .widx, .wdata, .q_k, .q_words, .s_slot, .s_vals);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < S_BASE + 2*S_WORDS; i++) begin
      @(negedge clk);
      we = 1'b1; widx = 16'(i); wdata = {$urandom, $urandom}; model[i] = wdata;
    end
    @(negedge clk); we = 1'b0;
    for (int k = 0; k < WPT; k++) begin
      q_k = 16'(k); #1;
      for (int g = 0; g < N_CMR; g++) begin
        checks++;
        if (q_words[g] !== model[g*WPT + k]) begin failures++; $display("FAIL q g=%0d k=%0d", g, k); end
      end
    end
    for (int s = 0; s < 2; s++) begin
      s_slot = s[0]; #1;
      for (int g = 0; g < N_CMR; g++)
        for (int b = 0; b < N_BK; b++) begin
          automatic int pos = g*N_BK + b;
          checks++;
          if (s_vals[g][b] !== model[S_BASE + s*S_WORDS + pos/4][16*(pos%4) +: 16]) begin
            failures++; $display("FAIL s slot=%0d g=%0d b=%0d", s, g, b);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
