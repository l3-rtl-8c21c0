// tb_workload_mha -- one decoding-attention job of an MHA model (OPT-66B and
// GPT-175B both have 128-element heads, so they share this test) on one rank
// at its default sizes (no parameter overrides: 8 chips x 16 banks of 16384
// words, N_HC = 8). The sequence length is 413 tokens, the mean request length
// (input + output) of the Dolphin-short trace. Prints cycles per token at the
// 4-cycle burst slot; otherwise the same checks as the rank test below.
//
// Loads random K and V vectors for LEN tokens and one query block through the
// host request port (so every value passes the re-layout unit and lands in the
// banks with normal writes), starts one attention job, reads the context
// output back and compares it with a floating-point reference of
// softmax(q.K) V computed here. Also checks that the score and context
// pipelines ran without bubbles and that the job took the number of command
// slots the pipeline predicts. LEN is not a multiple of the bank count, so
// the last chunk is partly masked.
module tb_workload_mha;
  import chime_pkg::*;
  localparam int N_CHIPS = 8, N_BK = 16, E_H = 128, N_HC = 8, N_GQA = 1;
  localparam int T_CCD = 4;
  localparam int LEN = 413;
  localparam int G = N_CHIPS / N_HC, NB = G * E_H / 32, WPT = E_H / (N_HC * 4);
  localparam int NC = (LEN + N_BK - 1) / N_BK, RB_SC = N_BK * N_GQA / 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req_valid = 1'b0, req_ready, resp_valid, busy, job_done;
  host_req_t req;
  hburst_t resp_data;
  logic [31:0] bubbles, row_stalls, cycles;

  chime_rank dut (
    .clk, .rst_n, .req_valid, .req, .req_ready, .resp_valid, .resp_data, .busy, .job_done,
    .bubbles, .row_stalls, .cycles);

  int qv [N_GQA][G*E_H];
  int kv [LEN][G*E_H];
  int vv [LEN][G*E_H];

  task automatic send(input host_req_t r);
    @(negedge clk);
    req = r; req_valid = 1'b1;
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 1'b0;
  endtask

  function automatic hburst_t pack(input int blk [G*E_H], input int b);
    hburst_t d;
    for (int i = 0; i < 32; i++) d[16*i +: 16] = 16'(blk[b*32 + i]);
    return d;
  endfunction

  function automatic int rnd(input int lim);   // uniform in [-lim, lim]
    return int'($urandom_range(2 * lim, 0)) - lim;
  endfunction

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    host_req_t r;
    real sc [LEN];
    real mx, sum, ref_o, got;
    int blk [G*E_H];
    int ideal;
    for (int g = 0; g < N_GQA; g++) for (int e = 0; e < G*E_H; e++) qv[g][e] = rnd(128);
    for (int t = 0; t < LEN; t++)
      for (int e = 0; e < G*E_H; e++) begin kv[t][e] = rnd(128); vv[t][e] = rnd(1024); end
    req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    for (int t = 0; t < LEN; t++) begin
      for (int s = 0; s < 2; s++) begin
        for (int e = 0; e < G*E_H; e++) blk[e] = s ? vv[t][e] : kv[t][e];
        for (int b = 0; b < NB; b++) begin
          r = '0; r.op = REQ_WR_KV; r.is_v = s[0]; r.token = 16'(t); r.burst = 8'(b);
          r.base = 0; r.data = pack(blk, b);
          send(r);
        end
      end
    end
    for (int g = 0; g < N_GQA; g++) begin
      for (int e = 0; e < G*E_H; e++) blk[e] = qv[g][e];
      for (int b = 0; b < NB; b++) begin
        r = '0; r.op = REQ_WR_Q; r.g = 8'(g); r.burst = 8'(b); r.data = pack(blk, b);
        send(r);
      end
    end
    r = '0; r.op = REQ_START; r.token = 16'(LEN); r.base = 0;
    send(r);
    while (!job_done) @(negedge clk);

    // Pipeline rate: no bubbles, and the slot count the overlap predicts.
    checks++;
    if (bubbles != 0) begin failures++; $display("FAIL bubbles=%0d", bubbles); end
    ideal = 1 + N_GQA*WPT + NC*WPT + RB_SC + 1 + RB_SC + NC*WPT + N_BK*N_GQA*WPT;
    checks++;
    if (int'(cycles) < ideal*T_CCD || int'(cycles) > (ideal + 12 + int'(row_stalls))*T_CCD + 40) begin
      failures++; $display("FAIL cycles=%0d ideal slots=%0d row_stalls=%0d", cycles, ideal, row_stalls);
    end
    $display("%0d tokens: %0.2f cycles per token", LEN, real'(cycles) / LEN);
    $display("job: %0d cycles, ideal %0d slots, %0d row-stall slots, %0d bubbles",
             cycles, ideal, row_stalls, bubbles);

    for (int g = 0; g < N_GQA; g++) begin
      for (int b = 0; b < NB; b++) begin
        r = '0; r.op = REQ_RD_OUT; r.g = 8'(g); r.burst = 8'(b);
        send(r);
        while (!resp_valid) @(negedge clk);
        for (int i = 0; i < 32; i++) begin
          automatic int el = b*32 + i;
          automatic int h = el / E_H;
          automatic int e = el % E_H;
          mx = -1.0e9;
          for (int t = 0; t < LEN; t++) begin
            sc[t] = 0.0;
            for (int x = 0; x < E_H; x++)
              sc[t] += (real'(qv[g][h*E_H + x]) / 256.0) * (real'(kv[t][h*E_H + x]) / 256.0);
            if (sc[t] > mx) mx = sc[t];
          end
          sum = 0.0;
          for (int t = 0; t < LEN; t++) sum += $exp(sc[t] - mx);
          ref_o = 0.0;
          for (int t = 0; t < LEN; t++) ref_o += $exp(sc[t] - mx) / sum * real'(vv[t][h*E_H + e]) / 256.0;
          got = real'($signed(resp_data[16*i +: 16])) / 256.0;
          checks++;
          if ((got - ref_o) > 0.1 + 0.03 * (ref_o < 0 ? -ref_o : ref_o) ||
              (ref_o - got) > 0.1 + 0.03 * (ref_o < 0 ? -ref_o : ref_o)) begin
            failures++;
            if (failures < 10) $display("FAIL g=%0d elem %0d: got %f ref %f", g, el, got, ref_o);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
