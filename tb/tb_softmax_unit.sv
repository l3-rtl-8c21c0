// tb_softmax_unit -- chunk-streaming softmax with two head groups (N_HC = 4 of
// 8 chips) and two queries per head (N_GQA = 2). Random Q8.8 scores arrive as
// 4-lane bursts with the last burst partly masked; after finalize, every
// score is sent back and its probability is compared with a floating-point
// softmax (tolerance 0.004 + 2 %). Checks that masked lanes give 0, that the
// probabilities of each row sum to about 1, and that finalize takes
// N_GQA + 1 cycles.
module tb_softmax_unit;
  import chime_pkg::*;
  localparam int N_HC = 4, N_GQA = 2, G = 2, NB = 12, LEN = 46;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n = 1'b0, clear = 1'b0, acc_valid = 1'b0, fin_start = 1'b0, nrm_valid = 1'b0;
  logic fin_done, p_valid;
  logic [7:0] acc_g = '0, nrm_g = '0;
  elem_t acc_x [G][4], nrm_x [G][4];
  logic [3:0] acc_mask = '0, nrm_mask = '0;
  logic [15:0] p_out [G][4];
  elem_t x [G][N_GQA][NB*4];

  softmax_unit #(.N_CHIPS(8), .N_HC(N_HC), .N_GQA(N_GQA)) dut (.clk, .rst_n, .clear,
    .acc_valid, .acc_g, .acc_x, .acc_mask, .fin_start, .fin_done, .nrm_valid, .nrm_g,
    .nrm_x, .nrm_mask, .p_valid, .p_out);

  function automatic logic [3:0] mask_of(int b);
    logic [3:0] m;
    for (int i = 0; i < 4; i++) m[i] = (b*4 + i) < LEN;
    return m;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic real ref_p [G][N_GQA][NB*4];
    automatic real psum [G][N_GQA];
    for (int h = 0; h < G; h++)
      for (int i = 0; i < 4; i++) begin acc_x[h][i] = '0; nrm_x[h][i] = '0; end
    for (int h = 0; h < G; h++)
      for (int g = 0; g < N_GQA; g++) begin
        automatic real mx = -1.0e9, sum = 0.0;
        for (int t = 0; t < NB*4; t++) begin
          // Scores between -6 and +6; head 1 query 1 gets a steadily
          // rising ramp so the running maximum moves many times.
          x[h][g][t] = (h == 1 && g == 1) ? 16'(t * 40 - 900)
                                          : 16'($signed($urandom_range(3072, 0)) - 1536);
          if (t < LEN && $itor($signed(x[h][g][t])) / 256.0 > mx) mx = $itor($signed(x[h][g][t])) / 256.0;
        end
        for (int t = 0; t < LEN; t++) sum += $exp($itor($signed(x[h][g][t])) / 256.0 - mx);
        for (int t = 0; t < NB*4; t++)
          ref_p[h][g][t] = (t < LEN) ? $exp($itor($signed(x[h][g][t])) / 256.0 - mx) / sum : 0.0;
        psum[h][g] = 0.0;
      end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    for (int b = 0; b < NB; b++)
      for (int g = 0; g < N_GQA; g++) begin
        @(negedge clk);
        acc_valid = 1'b1; acc_g = 8'(g); acc_mask = mask_of(b);
        for (int h = 0; h < G; h++) for (int i = 0; i < 4; i++) acc_x[h][i] = x[h][g][b*4 + i];
      end
    @(negedge clk);
    acc_valid = 1'b0; fin_start = 1'b1;
    begin
      automatic int lat = 0;
      @(negedge clk);
      fin_start = 1'b0;
      lat = 1;
      while (!fin_done && lat < 100) begin @(negedge clk); lat++; end
      checks++;
      if (lat != N_GQA + 1) begin failures++; $display("FAIL finalize latency %0d", lat); end
    end
    for (int b = 0; b < NB; b++)
      for (int g = 0; g < N_GQA; g++) begin
        @(negedge clk);
        nrm_valid = 1'b1; nrm_g = 8'(g); nrm_mask = mask_of(b);
        for (int h = 0; h < G; h++) for (int i = 0; i < 4; i++) nrm_x[h][i] = x[h][g][b*4 + i];
        @(negedge clk);
        nrm_valid = 1'b0;
        checks++;
        if (!p_valid) begin failures++; $display("FAIL p_valid"); end
        for (int h = 0; h < G; h++)
          for (int i = 0; i < 4; i++) begin
            automatic real p = $itor(p_out[h][i]) / 65536.0;
            automatic real e = ref_p[h][g][b*4 + i];
            psum[h][g] += p;
            checks++;
            if (!(b*4 + i < LEN) && p_out[h][i] != 0) begin
              failures++; $display("FAIL masked lane not zero h=%0d g=%0d t=%0d", h, g, b*4 + i);
            end else if (p - e > 0.004 + 0.02 * e || e - p > 0.004 + 0.02 * e) begin
              failures++; $display("FAIL p h=%0d g=%0d t=%0d got %f exp %f", h, g, b*4 + i, p, e);
            end
          end
      end
    for (int h = 0; h < G; h++)
      for (int g = 0; g < N_GQA; g++) begin
        checks++;
        if (psum[h][g] < 0.97 || psum[h][g] > 1.03) begin
          failures++; $display("FAIL row sum h=%0d g=%0d = %f", h, g, psum[h][g]);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
