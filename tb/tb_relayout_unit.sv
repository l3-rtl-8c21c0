// tb_relayout_unit -- checks the hybrid re-layout for the MHA mapping (N_HC = 8,
// one head over all chips) and the GQA mapping (N_HC = 1, one head per chip).
// Offload: random host bursts are written and every chip word is compared with
// the element the coarse-grain rule assigns (head c/N_HC, element
// c%N_HC + N_HC*(4k+j)); the fine-grain bus view is checked byte by byte
// (beat b, lane c = byte b of chip c's word). Onload: chip words are written
// back and the host bursts must return the original data.
module tb_relayout_unit;
  import chime_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        h_we [2], c_we [2];
  logic [7:0]  h_widx [2], h_ridx [2], c_widx [2], c_ridx [2];
  hburst_t     h_wdata [2], h_rdata [2];
  logic [63:0] c_wdata [2][8], c_rdata [2][8], beats [2][8];

  relayout_unit #(.N_HC(8)) u_mha (.clk, .h_we(h_we[0]), .h_widx(h_widx[0]), .h_wdata(h_wdata[0]),
    .h_ridx(h_ridx[0]), .h_rdata(h_rdata[0]), .c_we(c_we[0]), .c_widx(c_widx[0]),
    .c_wdata(c_wdata[0]), .c_ridx(c_ridx[0]), .c_rdata(c_rdata[0]), .beats(beats[0]));
  relayout_unit #(.N_HC(1)) u_gqa (.clk, .h_we(h_we[1]), .h_widx(h_widx[1]), .h_wdata(h_wdata[1]),
    .h_ridx(h_ridx[1]), .h_rdata(h_rdata[1]), .c_we(c_we[1]), .c_widx(c_widx[1]),
    .c_wdata(c_wdata[1]), .c_ridx(c_ridx[1]), .c_rdata(c_rdata[1]), .beats(beats[1]));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int u, input int n_hc);
    automatic int g_n = 8 / n_hc, blk = g_n * 128, nb = blk / 32, wpt = 128 / (n_hc * 4);
    automatic logic [15:0] el [1024];
    automatic logic [63:0] saved [8][32];
    for (int i = 0; i < blk; i++) el[i] = 16'($urandom);
    for (int b = 0; b < nb; b++) begin
      @(negedge clk);
      h_we[u] = 1'b1; h_widx[u] = 8'(b);
      for (int i = 0; i < 32; i++) h_wdata[u][16*i +: 16] = el[b*32 + i];
    end
    @(negedge clk);
    h_we[u] = 1'b0;
    for (int k = 0; k < wpt; k++) begin
      c_ridx[u] = 8'(k); #1;
      for (int c = 0; c < 8; c++) begin
        saved[c][k] = c_rdata[u][c];
        for (int j = 0; j < 4; j++) begin
          automatic int e = (c / n_hc) * 128 + (c % n_hc) + n_hc * (4*k + j);
          checks++;
          if (c_rdata[u][c][16*j +: 16] !== el[e]) begin
            failures++; $display("FAIL n_hc=%0d chip %0d k %0d j %0d", n_hc, c, k, j);
          end
          checks++;
          if (beats[u][2*j][8*c +: 8] !== el[e][7:0] || beats[u][2*j+1][8*c +: 8] !== el[e][15:8]) begin
            failures++; $display("FAIL beats n_hc=%0d chip %0d k %0d j %0d", n_hc, c, k, j);
          end
        end
      end
    end
    // Onload: scramble the buffer through the host port, then restore it
    // from the chip words.
    for (int b = 0; b < nb; b++) begin
      @(negedge clk);
      h_we[u] = 1'b1; h_widx[u] = 8'(b); h_wdata[u] = '0;
    end
    for (int k = 0; k < wpt; k++) begin
      @(negedge clk);
      h_we[u] = 1'b0; c_we[u] = 1'b1; c_widx[u] = 8'(k);
      for (int c = 0; c < 8; c++) c_wdata[u][c] = saved[c][k];
    end
    @(negedge clk);
    c_we[u] = 1'b0;
    for (int b = 0; b < nb; b++) begin
      h_ridx[u] = 8'(b); #1;
      for (int i = 0; i < 32; i++) begin
        checks++;
        if (h_rdata[u][16*i +: 16] !== el[b*32 + i]) begin
          failures++; $display("FAIL onload n_hc=%0d burst %0d elem %0d", n_hc, b, i);
        end
      end
    end
  endtask

  initial begin
    for (int u = 0; u < 2; u++) begin
      h_we[u] = 1'b0; c_we[u] = 1'b0; h_widx[u] = '0; h_ridx[u] = '0;
      c_widx[u] = '0; c_ridx[u] = '0; h_wdata[u] = '0;
      for (int c = 0; c < 8; c++) c_wdata[u][c] = '0;
    end
    run(0, 8);
    run(1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
