// tb_pim_chip -- one PIM chip with 16 banks and two queries per bank PU
// (N_CMR = 2). Writes keys and values into the banks with DRAM_WR, loads
// query 0 through PIM_WR_SB and query 1 from a bank through PIM_LD_SB, runs
// three chunks of adder-tree MACs (one token per bank per chunk) and reads
// every score through PIM_RD_RB; then switches to accumulator mode with
// PIM_WR_R, writes probabilities per chunk and checks every context word.
// Expected values are computed here from the same random data. Also checks
// the one-cycle RD_RB latency and that PIM_WR_R clears the accumulators.
module tb_pim_chip;
  import chime_pkg::*;
  localparam int N_BK = 16, N_CMR = 2, WPT = 4, BW = 256, NCH = 3;
  localparam int S_BASE = N_CMR * WPT, S_WORDS = N_BK * N_CMR / 4, V_OFF = 128;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int_cmd_t icmd;
  ext_cmd_t ecmd;
  logic [63:0] wdata, rdata;
  logic rvalid;
  logic [63:0] kw [NCH][N_BK][WPT], vw [NCH][N_BK][WPT], qw [N_CMR][WPT];
  logic [15:0] pr [NCH][N_CMR][N_BK];

  pim_chip #(.N_BK(N_BK), .N_CMR(N_CMR), .WPT(WPT), .BANK_WORDS(BW)) dut (
    .clk, .rst_n, .icmd, .ecmd, .wdata, .rdata, .rvalid);

  function automatic logic [63:0] rword(int lim);
    logic [63:0] w;
    for (int j = 0; j < 4; j++) w[16*j +: 16] = 16'(int'($urandom_range(2*lim, 0)) - lim);
    return w;
  endfunction

  function automatic elem_t sat_ref(longint v);
    if (v > 32767) return 16'h7fff;
    if (v < -32768) return 16'h8000;
    return 16'(v);
  endfunction

  task automatic ext(input pim_op_e op, input int addr, input int bank, input int idx,
                     input bit slot, input mac_mode_e mode, input logic [63:0] d);
    @(negedge clk);
    ecmd = '0; ecmd.op = op; ecmd.addr = ADDR_W'(addr); ecmd.bank = 5'(bank);
    ecmd.idx = 16'(idx); ecmd.slot = slot; ecmd.mode = mode; wdata = d;
    @(negedge clk);
    ecmd = '0; wdata = '0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    icmd = '0; ecmd = '0; wdata = '0;
    for (int c = 0; c < NCH; c++)
      for (int b = 0; b < N_BK; b++)
        for (int k = 0; k < WPT; k++) begin kw[c][b][k] = rword(300); vw[c][b][k] = rword(1000); end
    for (int g = 0; g < N_CMR; g++) for (int k = 0; k < WPT; k++) qw[g][k] = rword(300);
    for (int c = 0; c < NCH; c++)
      for (int g = 0; g < N_CMR; g++)
        for (int b = 0; b < N_BK; b++) pr[c][g][b] = 16'($urandom);
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < NCH; c++)
      for (int b = 0; b < N_BK; b++)
        for (int k = 0; k < WPT; k++) begin
          ext(DRAM_WR, c*WPT + k, b, 0, 0, MODE_TREE, kw[c][b][k]);
          ext(DRAM_WR, V_OFF + c*WPT + k, b, 0, 0, MODE_TREE, vw[c][b][k]);
        end
    // Query 0 from the rank PU, query 1 from bank 5.
    for (int k = 0; k < WPT; k++) begin
      ext(PIM_WR_SB, 0, 0, k, 0, MODE_TREE, qw[0][k]);
      ext(DRAM_WR, 250 + k, 5, 0, 0, MODE_TREE, qw[1][k]);
    end
    for (int k = 0; k < WPT; k++) begin
      @(negedge clk);
      icmd = '0; icmd.op = PIM_LD_SB; icmd.addr = ADDR_W'(250 + k); icmd.bank = 5'd5;
      icmd.sb_idx = 16'(WPT + k);
    end
    @(negedge clk);
    icmd = '0;
    ext(PIM_WR_R, 0, 0, 0, 0, MODE_TREE, '0);
    // Score pass.
    for (int c = 0; c < NCH; c++) begin
      for (int k = 0; k < WPT; k++) begin
        @(negedge clk);
        icmd = '0; icmd.op = PIM_MAC; icmd.addr = ADDR_W'(c*WPT + k); icmd.k = 16'(k);
        icmd.last = (k == WPT-1); icmd.slot = c[0];
      end
      @(negedge clk);
      icmd = '0;
      @(negedge clk);
      for (int idx = 0; idx < N_CMR * N_BK / 4; idx++) begin
        ecmd = '0; ecmd.op = PIM_RD_RB; ecmd.idx = 16'(idx); ecmd.slot = c[0];
        @(negedge clk);
        ecmd = '0;
        checks++;
        if (!rvalid) begin failures++; $display("FAIL rvalid"); end
        for (int j = 0; j < 4; j++) begin
          automatic int g = idx / (N_BK/4), b = 4*(idx % (N_BK/4)) + j;
          automatic longint s = 0;
          for (int k = 0; k < WPT; k++)
            for (int e = 0; e < 4; e++)
              s += longint'($signed(qw[g][k][16*e +: 16])) * longint'($signed(kw[c][b][k][16*e +: 16]));
          checks++;
          if (rdata[16*j +: 16] !== sat_ref(s >>> 8)) begin
            failures++; $display("FAIL score chunk %0d g %0d bank %0d got %0d exp %0d", c, g, b,
              $signed(rdata[16*j +: 16]), s >>> 8);
          end
        end
      end
    end
    // Context pass.
    ext(PIM_WR_R, 0, 0, 0, 0, MODE_ACC, '0);
    for (int c = 0; c < NCH; c++) begin
      for (int w = 0; w < S_WORDS; w++) begin
        automatic logic [63:0] d;
        for (int j = 0; j < 4; j++) d[16*j +: 16] = pr[c][(4*w + j) / N_BK][(4*w + j) % N_BK];
        ext(PIM_WR_SB, 0, 0, S_BASE + c[0]*S_WORDS + w, 0, MODE_ACC, d);
      end
      for (int k = 0; k < WPT; k++) begin
        @(negedge clk);
        icmd = '0; icmd.op = PIM_MAC; icmd.addr = ADDR_W'(V_OFF + c*WPT + k); icmd.k = 16'(k);
        icmd.last = (k == WPT-1); icmd.slot = c[0];
      end
      @(negedge clk);
      icmd = '0;
    end
    @(negedge clk);
    for (int b = 0; b < N_BK; b++)
      for (int g = 0; g < N_CMR; g++)
        for (int k = 0; k < WPT; k++) begin
          ecmd = '0; ecmd.op = PIM_RD_RB; ecmd.idx = 16'((b*N_CMR + g)*WPT + k);
          @(negedge clk);
          ecmd = '0;
          for (int j = 0; j < 4; j++) begin
            automatic longint s = 0;
            for (int c = 0; c < NCH; c++)
              s += longint'(pr[c][g][b]) * longint'($signed(vw[c][b][k][16*j +: 16]));
            checks++;
            if (rdata[16*j +: 16] !== sat_ref(s >>> 16)) begin
              failures++; $display("FAIL ctx bank %0d g %0d k %0d j %0d got %0d exp %0d", b, g, k, j,
                $signed(rdata[16*j +: 16]), s >>> 16);
            end
          end
        end
    ext(PIM_WR_R, 0, 0, 0, 0, MODE_ACC, '0);
    ecmd = '0; ecmd.op = PIM_RD_RB; ecmd.idx = 16'(5);
    @(negedge clk);
    ecmd = '0;
    checks++;
    if (rdata !== '0) begin failures++; $display("FAIL WR_R did not clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
