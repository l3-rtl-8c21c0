// tb_pim_request_decoder -- host request decoding of the rank PU (MHA layout:
// 4 host bursts and 4 chip words per block, V region at base + V_OFF).
// Sends K/V bursts for several tokens and checks, cycle by cycle, that each
// burst is written into the re-layout unit on acceptance and that after the
// last burst the four DRAM_WR commands go to bank token mod 16 at
// base [+ V_OFF] + (token div 16)*4 + k while the re-layout unit is read at
// chip word k. Checks the query-store writes, the START outputs and
// handshake (no request accepted while the controller is busy, job_done set
// by ctrl_done and cleared by the next START), and the output read: four
// load cycles into the re-layout unit, then resp_valid with the host burst,
// and no reload for a second burst of the same query.
module tb_pim_request_decoder;
  import chime_pkg::*;
  localparam int NB = 4, WPT = 4, V_OFF = 8192;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic req_valid = 1'b0, req_ready, resp_valid, start, ctrl_busy = 1'b0, ctrl_done = 1'b0, job_done;
  host_req_t req;
  hburst_t resp_data, rl_h_wdata, rl_h_rdata;
  logic [15:0] len, q_k, out_k;
  logic [ADDR_W-1:0] k_base, v_base;
  logic rl_h_we, rl_c_we, q_we;
  logic [7:0] rl_h_widx, rl_h_ridx, rl_c_widx, rl_c_ridx, q_g, out_g;
  ext_cmd_t ecmd;

  pim_request_decoder #(.V_OFF(V_OFF)) dut (.clk, .rst_n, .req_valid, .req, .req_ready,
    .resp_valid, .resp_data, .start, .len, .k_base, .v_base, .ctrl_busy, .ctrl_done, .job_done,
    .rl_h_we, .rl_h_widx, .rl_h_wdata, .rl_h_ridx, .rl_h_rdata, .rl_c_we, .rl_c_widx, .rl_c_ridx,
    .ecmd, .q_we, .q_g, .q_k, .out_g, .out_k);

  // Stand-in for the re-layout unit's host read port.
  always_comb for (int i = 0; i < 16; i++) rl_h_rdata[32*i +: 32] = {24'hA5A5A5, rl_h_ridx};

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // Presents a request; returns at the negedge after it was accepted.
  task automatic send(input host_req_t r);
    @(negedge clk);
    req = r; req_valid = 1'b1;
    while (!req_ready) @(negedge clk);
    #1;
    if (r.op == REQ_WR_KV || r.op == REQ_WR_Q)
      chk(rl_h_we && rl_h_widx == r.burst && rl_h_wdata == r.data, "burst into re-layout unit");
    @(negedge clk);
    req_valid = 1'b0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    host_req_t r;
    req = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // K and V bursts.
    for (int n = 0; n < 6; n++) begin
      automatic int t = int'($urandom_range(200, 0));
      automatic bit v = n[0];
      automatic int base = 64 * int'($urandom_range(3, 0));
      for (int b = 0; b < NB; b++) begin
        r = '0; r.op = REQ_WR_KV; r.is_v = v; r.token = 16'(t); r.burst = 8'(b);
        r.base = ADDR_W'(base); r.data = {16{$urandom}};
        send(r);
        if (b < NB - 1) chk(ecmd.op == PIM_NOP && req_ready, "no bank write before the last burst");
      end
      for (int k = 0; k < WPT; k++) begin
        chk(ecmd.op == DRAM_WR && int'(ecmd.bank) == t % 16 &&
            int'(ecmd.addr) == base + (v ? V_OFF : 0) + (t / 16) * WPT + k && int'(rl_c_ridx) == k,
            $sformatf("DRAM_WR token %0d word %0d", t, k));
        chk(!req_ready, "busy while writing the banks");
        @(negedge clk);
      end
      chk(ecmd.op == PIM_NOP && req_ready, "idle after the bank writes");
    end
    // Query block 3.
    for (int b = 0; b < NB; b++) begin
      r = '0; r.op = REQ_WR_Q; r.g = 8'd3; r.burst = 8'(b); r.data = {16{$urandom}};
      send(r);
    end
    for (int k = 0; k < WPT; k++) begin
      chk(q_we && q_g == 8'd3 && int'(q_k) == k && int'(rl_c_ridx) == k, "query store write");
      @(negedge clk);
    end
    chk(!q_we, "query store write ends");
    // Job start and completion.
    r = '0; r.op = REQ_START; r.token = 16'd77; r.base = ADDR_W'(128);
    @(negedge clk);
    req = r; req_valid = 1'b1;
    @(posedge clk); #1;
    chk(start && len == 16'd77 && int'(k_base) == 128 && int'(v_base) == 128 + V_OFF, "start outputs");
    @(negedge clk);
    req_valid = 1'b0;
    @(posedge clk); #1;
    chk(!start, "start is one pulse");
    ctrl_busy = 1'b1;
    r = '0; r.op = REQ_RD_OUT; req = r; req_valid = 1'b1;
    repeat (5) begin
      @(negedge clk);
      chk(!req_ready && !job_done, "no request accepted while the job runs");
    end
    ctrl_busy = 1'b0; ctrl_done = 1'b1;
    @(negedge clk);
    ctrl_done = 1'b0; req_valid = 1'b0;
    chk(job_done, "job_done set by ctrl_done");
    // Output read of query 2, burst 1, then burst 3 without reload.
    r = '0; r.op = REQ_RD_OUT; r.g = 8'd2; r.burst = 8'd1;
    send(r);
    for (int k = 0; k < WPT; k++) begin
      chk(rl_c_we && int'(rl_c_widx) == k && out_g == 8'd2 && int'(out_k) == k, "output load");
      @(negedge clk);
    end
    @(negedge clk);
    chk(resp_valid && resp_data[7:0] == 8'd1 && resp_data[31:8] == 24'hA5A5A5, "response burst 1");
    r.burst = 8'd3;
    send(r);
    chk(!rl_c_we, "no reload for the same query");
    @(negedge clk);
    chk(resp_valid && resp_data[7:0] == 8'd3, "response burst 3");
    chk(job_done, "job_done held");
    r = '0; r.op = REQ_START; r.token = 16'd5;
    send(r);
    chk(!job_done, "job_done cleared by START");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
