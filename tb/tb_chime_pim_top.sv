// tb_chime_pim_top -- end-to-end test of the DIMM-PIM memory system at reduced size
// (2 channels, 3 ranksets, 2048-word banks).
//
// Two ranksets run decoding attention jobs with random data that differs per
// channel. The flow makes every mechanism of the design happen and counts it:
//   * rankset grant: a host request to a rankset that does not hold the grant
//     waits (counted as host wait cycles) and grants change hands;
//   * hybrid re-layout: every K, V and query burst goes through the rank PU's
//     re-layout unit on its way to the banks (counted in bursts);
//   * rankset overlap: rankset 1 loads its KV cache while rankset 0 computes,
//     and rankset 0 reads its output while rankset 1 computes (arbiter's
//     overlap counter);
//   * bubble-free pipelining of the score and context streams: bubbles must
//     stay 0 while the MAC stream ran (counted in MAC slots);
//   * row misses: the token stream crosses DRAM rows and stalls (row stalls);
//   * chunk masking: the sequence length is not a multiple of the bank count,
//     so the last chunk has masked lanes (counted).
// Every output element of every rank is compared with a floating-point
// softmax(qK)V. A mechanism that never happened counts as a failure.
module tb_chime_pim_top;
  import chime_pkg::*;
  localparam int N_CH = 2, N_RS = 3;
  localparam int N_CHIPS = 8, N_BK = 16, E_H = 128, N_HC = 8, N_GQA = 1;
  localparam int G = N_CHIPS / N_HC, NB = G * E_H / 32, WPT = E_H / (N_HC * 4);
  localparam int LEN = 45;
  localparam int NC = (LEN + N_BK - 1) / N_BK;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N_RS-1:0] xfer_req = '0, grant;
  logic        req_valid  [N_RS][N_CH];
  host_req_t   req        [N_RS][N_CH];
  logic        req_ready  [N_RS][N_CH];
  logic        resp_valid [N_RS][N_CH];
  hburst_t     resp_data  [N_RS][N_CH];
  logic        busy       [N_RS][N_CH];
  logic        job_done   [N_RS][N_CH];
  logic [31:0] bubbles    [N_RS][N_CH];
  logic [31:0] row_stalls [N_RS][N_CH];
  logic [31:0] cycles     [N_RS][N_CH];
  logic [31:0] overlap, transfers;

  chime_pim_top #(.N_CHANNELS(N_CH), .N_RANKSETS(N_RS), .BANK_WORDS(2048), .MAX_TOK(1024))
    dut (
    .clk, .rst_n, .xfer_req, .grant, .req_valid, .req, .req_ready, .resp_valid, .resp_data,
    .busy, .job_done, .bubbles, .row_stalls, .cycles, .overlap, .transfers);

  int qv [2][N_CH][E_H];
  int kv [2][N_CH][LEN][E_H];
  int vv [2][N_CH][LEN][E_H];
  int n_fin = 0, n_wait = 0, n_grant_change = 0, n_relayout = 0, n_mac_slots = 0, n_masked = 0;
  logic [N_RS-1:0] grant_d = '0;

  always @(posedge clk) begin
    grant_d <= grant;
    if (rst_n && grant != grant_d && grant != '0) n_grant_change++;
    for (int r = 0; r < N_RS; r++)
      for (int ch = 0; ch < N_CH; ch++)
        if (req_valid[r][ch] && !req_ready[r][ch]) n_wait++;
  end

  function automatic int rnd(input int lim);
    return int'($urandom_range(2 * lim, 0)) - lim;
  endfunction

  task automatic send(input int r, input int ch, input host_req_t q);
    @(negedge clk);
    req[r][ch] = q; req_valid[r][ch] = 1'b1;
    while (!req_ready[r][ch]) @(negedge clk);
    @(negedge clk);
    req_valid[r][ch] = 1'b0;
  endtask

  // Loads K, V and the query of rankset r, channel ch and starts its job.
  task automatic load_and_start(input int r, input int ch);
    host_req_t q;
    for (int t = 0; t < LEN; t++)
      for (int s = 0; s < 2; s++)
        for (int b = 0; b < NB; b++) begin
          q = '0; q.op = REQ_WR_KV; q.is_v = s[0]; q.token = 16'(t); q.burst = 8'(b);
          for (int i = 0; i < 32; i++)
            q.data[16*i +: 16] = 16'(s ? vv[r][ch][t][b*32 + i] : kv[r][ch][t][b*32 + i]);
          send(r, ch, q);
          if (ch == 0) n_relayout++;
        end
    for (int b = 0; b < NB; b++) begin
      q = '0; q.op = REQ_WR_Q; q.burst = 8'(b);
      for (int i = 0; i < 32; i++) q.data[16*i +: 16] = 16'(qv[r][ch][b*32 + i]);
      send(r, ch, q);
      if (ch == 0) n_relayout++;
    end
    q = '0; q.op = REQ_START; q.token = 16'(LEN);
    send(r, ch, q);
  endtask

  // Reads the output of rankset r, channel ch and checks it.
  task automatic read_and_check(input int r, input int ch);
    host_req_t q;
    real sc [LEN];
    real mx, sum, ref_o, got;
    mx = -1.0e9;
    for (int t = 0; t < LEN; t++) begin
      sc[t] = 0.0;
      for (int x = 0; x < E_H; x++)
        sc[t] += (real'(qv[r][ch][x]) / 256.0) * (real'(kv[r][ch][t][x]) / 256.0);
      if (sc[t] > mx) mx = sc[t];
    end
    sum = 0.0;
    for (int t = 0; t < LEN; t++) sum += $exp(sc[t] - mx);
    for (int b = 0; b < NB; b++) begin
      q = '0; q.op = REQ_RD_OUT; q.burst = 8'(b);
      send(r, ch, q);
      while (!resp_valid[r][ch]) @(negedge clk);
      for (int i = 0; i < 32; i++) begin
        ref_o = 0.0;
        for (int t = 0; t < LEN; t++) ref_o += $exp(sc[t] - mx) / sum * real'(vv[r][ch][t][b*32 + i]) / 256.0;
        got = real'($signed(resp_data[r][ch][16*i +: 16])) / 256.0;
        checks++;
        if ((got - ref_o) > 0.1 + 0.03 * (ref_o < 0 ? -ref_o : ref_o) ||
            (ref_o - got) > 0.1 + 0.03 * (ref_o < 0 ? -ref_o : ref_o)) begin
          failures++;
          if (failures < 10) $display("FAIL rs %0d ch %0d elem %0d: got %f ref %f", r, ch, b*32 + i, got, ref_o);
        end
      end
    end
  endtask

  task automatic wait_done(input int r);
    automatic logic all;
    do begin
      @(negedge clk);
      all = 1'b1;
      for (int ch = 0; ch < N_CH; ch++) all &= job_done[r][ch];
    end while (!all);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < N_RS; r++)
      for (int ch = 0; ch < N_CH; ch++) begin req_valid[r][ch] = 1'b0; req[r][ch] = '0; end
    for (int r = 0; r < 2; r++)
      for (int ch = 0; ch < N_CH; ch++) begin
        for (int e = 0; e < E_H; e++) qv[r][ch][e] = rnd(128);
        for (int t = 0; t < LEN; t++)
          for (int e = 0; e < E_H; e++) begin kv[r][ch][t][e] = rnd(128); vv[r][ch][t][e] = rnd(1024); end
      end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // Rankset 0 loads; the first request is issued before the grant exists.
    fork
      begin
        for (int ch = 0; ch < N_CH; ch++)
          fork
            automatic int c = ch;
            begin load_and_start(0, c); n_fin++; end
          join_none
        wait (n_fin == N_CH);
      end
      begin
        repeat (4) @(negedge clk);
        xfer_req[0] = 1'b1;
      end
    join
    @(negedge clk);
    xfer_req[0] = 1'b0;
    // Rankset 1 loads while rankset 0 computes.
    xfer_req[1] = 1'b1;
    for (int ch = 0; ch < N_CH; ch++)
      fork
        automatic int c = ch;
        begin load_and_start(1, c); n_fin++; end
      join_none
    wait (n_fin == 2 * N_CH);
    @(negedge clk);
    xfer_req[1] = 1'b0;
    // Rankset 0 reads its output while rankset 1 computes.
    wait_done(0);
    xfer_req[0] = 1'b1;
    for (int ch = 0; ch < N_CH; ch++) read_and_check(0, ch);
    @(negedge clk);
    xfer_req[0] = 1'b0;
    wait_done(1);
    xfer_req[1] = 1'b1;
    for (int ch = 0; ch < N_CH; ch++) read_and_check(1, ch);
    @(negedge clk);
    xfer_req[1] = 1'b0;

    for (int r = 0; r < 2; r++)
      for (int ch = 0; ch < N_CH; ch++) begin
        checks++;
        if (bubbles[r][ch] != 0) begin failures++; $display("FAIL bubbles rs %0d ch %0d = %0d", r, ch, bubbles[r][ch]); end
      end
    // Score and context MAC slots of one job.
    n_mac_slots = 2 * NC * WPT;
    n_masked = NC * N_BK - LEN;
    $display("mechanisms: host wait %0d cycles, grant changes %0d, re-layout bursts %0d,",
             n_wait, n_grant_change, n_relayout);
    $display("            overlap %0d cycles, bubble-free MAC slots %0d (bubbles %0d),",
             overlap, n_mac_slots, bubbles[0][0]);
    $display("            row stalls %0d slots, masked lanes %0d; job cycles %0d",
             row_stalls[0][0], n_masked, cycles[0][0]);
    checks++; if (n_wait == 0)         begin failures++; $display("FAIL no host wait"); end
    checks++; if (n_grant_change < 4)  begin failures++; $display("FAIL grant changes %0d", n_grant_change); end
    checks++; if (n_relayout == 0)     begin failures++; $display("FAIL no re-layout"); end
    checks++; if (overlap == 0)        begin failures++; $display("FAIL no rankset overlap"); end
    checks++; if (row_stalls[0][0] == 0) begin failures++; $display("FAIL no row stall"); end
    checks++; if (n_masked == 0)       begin failures++; $display("FAIL no masked chunk"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
