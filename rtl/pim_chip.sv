// pim_chip -- one PIM DRAM chip: N_BK banks, a bank PU beside each bank and a
// shared buffer that broadcasts input vectors to all bank PUs.
//
// The chip has two command ports, one per bus, which may both carry a command
// in the same cycle because the internal bank buses and the external bus to
// the buffer chip are decoupled:
//   icmd (internal): PIM_MAC reads word `addr` from every bank and runs one MAC
//     step in every bank PU; PIM_LD_SB reads word `addr` of bank `bank` and
//     stores it at shared-buffer index `sb_idx`.
//   ecmd (external): PIM_WR_R sets the computing paradigm (adder tree or
//     accumulator) and clears the bank PU sums; PIM_WR_SB writes `wdata` to
//     shared-buffer index `idx`; DRAM_WR writes `wdata` into bank `bank` at
//     `addr`; PIM_RD_RB returns one result-buffer word on rdata.
// Timing: bank reads take one cycle, so a MAC or LD_SB completes one cycle
// after its command. RD_RB data appears on rdata/rvalid one cycle after the
// command. Result-buffer word `idx` is, in tree mode, scores of banks
// 4*(idx mod N_BK/4)..+3 for query idx div (N_BK/4) of slot `slot`; in
// accumulator mode, context word k of query g of bank b with
// idx = (b*N_CMR + g)*WPT + k. A DRAM_WR to a bank in the same cycle as a
// MAC would collide; the controller never issues both.
// The command names and roles are the paper's; the encodings and read-out
// order are this design's choice.
// Lint: The 5-bit bank field is wider than needed for 16 banks (room for 32); its top bit is
// unused here, which lint reports.
module pim_chip
  import chime_pkg::*;
#(
  parameter int N_BK       = 16,
  parameter int N_CMR      = 1,
  parameter int WPT        = 4,
  parameter int BANK_WORDS = 16384
) (
  input  logic        clk,
  input  logic        rst_n,
  input  int_cmd_t    icmd,
  input  ext_cmd_t    ecmd,
  input  logic [63:0] wdata,
  output logic [63:0] rdata,
  output logic        rvalid
);
  localparam int BA_W = $clog2(BANK_WORDS);

  mac_mode_e   mode_q;
  logic        clear;
  // Internal command delayed by the bank read latency.
  logic        mac_d, ld_d, last_d, slot_d;
  logic [15:0] k_d, sbidx_d;
  logic [4:0]  bank_d;

  logic [63:0] bank_rdata [N_BK];
  logic [63:0] q_words [N_CMR];
  logic [15:0] s_vals  [N_CMR][N_BK];
  elem_t       rb_score [N_BK];
  logic [63:0] rb_ctx   [N_BK];
  logic [7:0]  rb_g  [N_BK];
  logic [15:0] rb_k  [N_BK];
  logic        sb_we;
  logic [15:0] sb_widx;
  logic [63:0] sb_wdata;

  assign clear = (ecmd.op == PIM_WR_R);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_q <= MODE_TREE;
      mac_d  <= 1'b0;
      ld_d   <= 1'b0;
      last_d <= 1'b0;
      slot_d <= 1'b0;
      k_d    <= '0;
      sbidx_d <= '0;
      bank_d <= '0;
    end else begin
      if (ecmd.op == PIM_WR_R) mode_q <= ecmd.mode;
      mac_d   <= (icmd.op == PIM_MAC);
      ld_d    <= (icmd.op == PIM_LD_SB);
      last_d  <= icmd.last;
      slot_d  <= icmd.slot;
      k_d     <= icmd.k;
      sbidx_d <= icmd.sb_idx;
      bank_d  <= icmd.bank;
    end
  end

  // Shared-buffer write: from the rank PU (WR_SB) or from a bank (LD_SB).
  always_comb begin
    sb_we    = 1'b0;
    sb_widx  = '0;
    sb_wdata = '0;
    if (ecmd.op == PIM_WR_SB) begin
      sb_we = 1'b1; sb_widx = ecmd.idx; sb_wdata = wdata;
    end else if (ld_d) begin
      sb_we = 1'b1; sb_widx = sbidx_d; sb_wdata = bank_rdata[bank_d];
    end
  end

  shared_buffer #(.N_BK(N_BK), .N_CMR(N_CMR), .WPT(WPT)) u_sb (
    .clk, .we(sb_we), .widx(sb_widx), .wdata(sb_wdata),
    .q_k(k_d), .q_words, .s_slot(slot_d), .s_vals);

  // Result-buffer read decode, shared by all bank PUs.
  always_comb begin
    for (int b = 0; b < N_BK; b++) begin
      if (mode_q == MODE_TREE) begin
        rb_g[b] = 8'(int'(ecmd.idx) / (N_BK / 4));
        rb_k[b] = '0;
      end else begin
        rb_g[b] = 8'((int'(ecmd.idx) / WPT) % N_CMR);
        rb_k[b] = 16'(int'(ecmd.idx) % WPT);
      end
    end
  end

  for (genvar b = 0; b < N_BK; b++) begin : g_bank
    logic        ben, bwe;
    logic [BA_W-1:0] baddr;
    logic [15:0] s_b [N_CMR];
    always_comb begin
      bwe   = (ecmd.op == DRAM_WR) && (ecmd.bank == 5'(b));
      ben   = bwe || (icmd.op == PIM_MAC) ||
              (icmd.op == PIM_LD_SB && icmd.bank == 5'(b));
      baddr = bwe ? BA_W'(ecmd.addr) : BA_W'(icmd.addr);
      for (int g = 0; g < N_CMR; g++) s_b[g] = s_vals[g][b];
    end
    dram_bank #(.WORDS(BANK_WORDS)) u_bank (
      .clk, .en(ben), .we(bwe), .addr(baddr), .wdata(wdata), .rdata(bank_rdata[b]));
    bank_pu #(.N_CMR(N_CMR), .WPT(WPT)) u_pu (
      .clk, .rst_n, .clear, .mode(mode_q), .mac_valid(mac_d), .k(k_d),
      .last(last_d), .slot(slot_d), .kv_word(bank_rdata[b]), .q_words, .s_vals(s_b),
      .rb_slot(ecmd.slot), .rb_g(rb_g[b]), .rb_k(rb_k[b]),
      .rb_score(rb_score[b]), .rb_ctx(rb_ctx[b]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rvalid <= 1'b0;
      rdata  <= '0;
    end else begin
      rvalid <= (ecmd.op == PIM_RD_RB);
      if (ecmd.op == PIM_RD_RB) begin
        if (mode_q == MODE_TREE) begin
          automatic int b0 = 4 * (int'(ecmd.idx) % (N_BK / 4));
          for (int j = 0; j < 4; j++) rdata[16*j +: 16] <= rb_score[b0 + j];
        end else begin
          rdata <= rb_ctx[(int'(ecmd.idx) / WPT / N_CMR) % N_BK];
        end
      end
    end
  end
endmodule
