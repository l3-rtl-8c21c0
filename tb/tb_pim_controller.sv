// tb_pim_controller -- PIM command sequencer, run against small stand-ins
// for the chips, the adder, the softmax unit and the SRAM (fixed latencies).
// Instance 0 uses the MHA mapping the paper picks (N_HC = 8, N_GQA = 1):
// both buses carry four commands per chunk, so the score and context
// pipelines must run without bubbles. The test checks the command stream:
// the number of each PIM command, the MAC addresses (K region during the
// score pass, V region during the context pass, chunk by chunk), that no
// chunk's scores are read before its last MAC, that each bus issues at most
// one command per T_CCD clocks, that exactly len lanes per query pass the
// softmax masks, that row changes stall, and the cycle count.
// Instance 1 keeps N_HC = 8 for a GQA-8 model, against the paper's head
// mapping rule: reading eight queries' scores takes 32 bus slots per chunk
// against 4 MAC slots, so the MAC stream must show bubbles.
module tb_pim_controller;
  import chime_pkg::*;
  localparam int N_BK = 16, T_CCD = 4, ROW = 16, LEN = 75;
  localparam int NC = (LEN + N_BK - 1) / N_BK;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        start [2], busy [2], done [2];
  int_cmd_t    icmd [2];
  ext_cmd_t    ecmd [2];
  logic [63:0] ext_wdata [2][8], q_words [2][8];
  logic [7:0]  q_g [2], add_g [2], acc_g [2], nrm_g [2];
  logic [15:0] q_k [2], add_k [2];
  logic        add_valid [2], chip_rvalid [2], score_valid [2], sm_clear [2], acc_valid [2];
  mac_mode_e   add_mode [2];
  logic [3:0]  acc_mask [2], nrm_mask [2];
  logic        fin_start [2], fin_done [2], nrm_valid [2], p_valid [2];
  logic [15:0] p_out [2][1][4];
  logic        sram_en [2], sram_we [2];
  logic [12:0] sram_addr [2];
  logic [31:0] bubbles [2], row_stalls [2], cycles [2];

  pim_controller #(.N_HC(8), .N_GQA(1), .T_CCD(T_CCD), .ROW_WORDS(ROW)) u0 (
    .clk, .rst_n, .start(start[0]), .len(16'(LEN)), .k_base(ADDR_W'(32)), .v_base(ADDR_W'(512)),
    .busy(busy[0]), .done(done[0]), .icmd(icmd[0]), .ecmd(ecmd[0]), .ext_wdata(ext_wdata[0]),
    .q_g(q_g[0]), .q_k(q_k[0]), .q_words(q_words[0]), .add_valid(add_valid[0]),
    .add_mode(add_mode[0]), .add_g(add_g[0]), .add_k(add_k[0]), .chip_rvalid(chip_rvalid[0]),
    .score_valid(score_valid[0]), .sm_clear(sm_clear[0]), .acc_valid(acc_valid[0]),
    .acc_g(acc_g[0]), .acc_mask(acc_mask[0]), .fin_start(fin_start[0]), .fin_done(fin_done[0]),
    .nrm_valid(nrm_valid[0]), .nrm_g(nrm_g[0]), .nrm_mask(nrm_mask[0]), .p_valid(p_valid[0]),
    .p_out(p_out[0]), .sram_en(sram_en[0]), .sram_we(sram_we[0]), .sram_addr(sram_addr[0]),
    .bubbles(bubbles[0]), .row_stalls(row_stalls[0]), .cycles(cycles[0]));
  pim_controller #(.N_HC(8), .N_GQA(8), .T_CCD(T_CCD), .ROW_WORDS(ROW)) u1 (
    .clk, .rst_n, .start(start[1]), .len(16'(LEN)), .k_base(ADDR_W'(32)), .v_base(ADDR_W'(512)),
    .busy(busy[1]), .done(done[1]), .icmd(icmd[1]), .ecmd(ecmd[1]), .ext_wdata(ext_wdata[1]),
    .q_g(q_g[1]), .q_k(q_k[1]), .q_words(q_words[1]), .add_valid(add_valid[1]),
    .add_mode(add_mode[1]), .add_g(add_g[1]), .add_k(add_k[1]), .chip_rvalid(chip_rvalid[1]),
    .score_valid(score_valid[1]), .sm_clear(sm_clear[1]), .acc_valid(acc_valid[1]),
    .acc_g(acc_g[1]), .acc_mask(acc_mask[1]), .fin_start(fin_start[1]), .fin_done(fin_done[1]),
    .nrm_valid(nrm_valid[1]), .nrm_g(nrm_g[1]), .nrm_mask(nrm_mask[1]), .p_valid(p_valid[1]),
    .p_out(p_out[1]), .sram_en(sram_en[1]), .sram_we(sram_we[1]), .sram_addr(sram_addr[1]),
    .bubbles(bubbles[1]), .row_stalls(row_stalls[1]), .cycles(cycles[1]));

  // Stand-ins with fixed latencies: chip read data and adder output one
  // cycle, softmax finalize N_GQA + 1 cycles, normalization one cycle.
  int fin_cnt [2];
  for (genvar i = 0; i < 2; i++) begin : g_stub
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        chip_rvalid[i] <= 1'b0; score_valid[i] <= 1'b0; p_valid[i] <= 1'b0;
        fin_done[i] <= 1'b0; fin_cnt[i] <= 0;
      end else begin
        chip_rvalid[i] <= (ecmd[i].op == PIM_RD_RB);
        score_valid[i] <= add_valid[i] && add_mode[i] == MODE_TREE;
        p_valid[i]     <= nrm_valid[i];
        fin_done[i]    <= 1'b0;
        if (fin_start[i]) fin_cnt[i] <= (i == 0) ? 2 : 9;
        else if (fin_cnt[i] > 0) begin
          fin_cnt[i] <= fin_cnt[i] - 1;
          if (fin_cnt[i] == 1) fin_done[i] <= 1'b1;
        end
      end
    end
    always_comb begin
      for (int c = 0; c < 8; c++) q_words[i][c] = 64'(c);
      for (int j = 0; j < 4; j++) p_out[i][0][j] = 16'(j);
    end
  end

  // Monitor of instance 0.
  int n_wr_r = 0, n_wr_sb = 0, n_rd_rb = 0, n_mac_k = 0, n_mac_v = 0, n_acc_lanes = 0, n_nrm_lanes = 0;
  int n_rd_score = 0, last_i = -100, last_e = -100, cyc = 0;
  bit ctx_mode = 0;
  always @(posedge clk) begin
    cyc++;
    if (icmd[0].op != PIM_NOP) begin
      if (cyc - last_i < T_CCD) begin failures++; $display("FAIL internal bus faster than T_CCD"); end
      last_i = cyc;
    end
    if (ecmd[0].op != PIM_NOP) begin
      if (cyc - last_e < T_CCD) begin failures++; $display("FAIL external bus faster than T_CCD"); end
      last_e = cyc;
    end
    if (icmd[0].op == PIM_MAC) begin
      checks++;
      if (!ctx_mode) begin
        if (int'(icmd[0].addr) != 32 + n_mac_k || int'(icmd[0].k) != n_mac_k % 4 ||
            icmd[0].last != (n_mac_k % 4 == 3)) begin
          failures++; $display("FAIL score MAC %0d addr %0d k %0d", n_mac_k, icmd[0].addr, icmd[0].k);
        end
        n_mac_k++;
      end else begin
        if (int'(icmd[0].addr) != 512 + n_mac_v || int'(icmd[0].k) != n_mac_v % 4) begin
          failures++; $display("FAIL context MAC %0d addr %0d", n_mac_v, icmd[0].addr);
        end
        n_mac_v++;
      end
    end
    case (ecmd[0].op)
      PIM_WR_R: begin n_wr_r++; ctx_mode = (ecmd[0].mode == MODE_ACC); end
      PIM_WR_SB: n_wr_sb++;
      PIM_RD_RB: begin
        n_rd_rb++;
        if (!ctx_mode) begin
          // Score word n belongs to chunk n / 4; all 4 MACs of that chunk
          // must have issued in an earlier slot.
          checks++;
          if (n_mac_k < (n_rd_score / 4 + 1) * 4) begin
            failures++; $display("FAIL scores of chunk %0d read before its MACs", n_rd_score / 4);
          end
          n_rd_score++;
        end
      end
      default: ;
    endcase
    if (acc_valid[0]) n_acc_lanes += $countones(acc_mask[0]);
    if (nrm_valid[0]) n_nrm_lanes += $countones(nrm_mask[0]);
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int ideal;
    start[0] = 1'b0; start[1] = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    start[0] = 1'b1; start[1] = 1'b1;
    @(negedge clk);
    start[0] = 1'b0; start[1] = 1'b0;
    checks++;
    if (!busy[0] || !busy[1]) begin failures++; $display("FAIL busy after start"); end
    fork
      while (!done[0]) @(negedge clk);
      while (!done[1]) @(negedge clk);
    join
    @(negedge clk);
    checks++; if (n_mac_k != NC*4) begin failures++; $display("FAIL score MACs %0d", n_mac_k); end
    checks++; if (n_mac_v != NC*4) begin failures++; $display("FAIL context MACs %0d", n_mac_v); end
    checks++; if (n_wr_r != 2) begin failures++; $display("FAIL WR_R %0d", n_wr_r); end
    checks++; if (n_wr_sb != 4 + NC*4) begin failures++; $display("FAIL WR_SB %0d", n_wr_sb); end
    checks++; if (n_rd_rb != NC*4 + N_BK*4) begin failures++; $display("FAIL RD_RB %0d", n_rd_rb); end
    checks++; if (n_acc_lanes != LEN) begin failures++; $display("FAIL softmax lanes %0d", n_acc_lanes); end
    checks++; if (n_nrm_lanes != LEN) begin failures++; $display("FAIL normalize lanes %0d", n_nrm_lanes); end
    checks++; if (bubbles[0] != 0) begin failures++; $display("FAIL MHA bubbles %0d", bubbles[0]); end
    checks++; if (row_stalls[0] < 2) begin failures++; $display("FAIL row stalls %0d", row_stalls[0]); end
    checks++; if (bubbles[1] == 0) begin failures++; $display("FAIL mismatched mapping had no bubbles"); end
    checks++; if (busy[0]) begin failures++; $display("FAIL busy after done"); end
    ideal = 1 + 4 + NC*4 + 4 + 1 + 4 + NC*4 + N_BK*4;
    checks++;
    if (int'(cycles[0]) < ideal*T_CCD || int'(cycles[0]) > (ideal + 12 + int'(row_stalls[0]))*T_CCD + 40) begin
      failures++; $display("FAIL cycles %0d ideal slots %0d", cycles[0], ideal);
    end
    $display("MHA: %0d cycles, ideal %0d slots, row stalls %0d, bubbles %0d",
             cycles[0], ideal, row_stalls[0], bubbles[0]);
    $display("GQA-8 with N_HC=8: %0d cycles, bubbles %0d", cycles[1], bubbles[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
