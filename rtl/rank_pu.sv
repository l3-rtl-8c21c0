// rank_pu -- processing unit on the buffer chip of one DIMM-PIM rank.
//
// Wires together the blocks of the rank PU:
//   pim_request_decoder  host requests (normal writes) -> transfers and jobs
//   relayout_unit        host layout <-> chip layout (offload and onload)
//   query store          chip-order query words for PIM_WR_SB
//   pim_controller       PIM command sequencing of one attention job
//   adder_unit           sums partial scores over chips, partial context over banks
//   softmax_unit         chunk softmax and normalization
//   rank_sram            raw scores between the two softmax passes
// Towards the DRAM chips the rank PU drives one internal-bus command (icmd),
// one external-bus command (ecmd) and a 64-bit write lane per chip, and
// receives a 64-bit read lane per chip with chip_rvalid. While a job runs the
// controller owns the external bus; otherwise the decoder uses it for the
// DRAM_WR of re-laid KV data. The block list is the paper's (rank PU with
// re-layout, adder and softmax units, SRAM, request/state and PIM controller);
// the wiring details are this design's choice.
// Lint: q_g/q_k are checked against N_GQA/WPT before indexing the query store; the lint notes on
// index width are expected.
module rank_pu
  import chime_pkg::*;
#(
  parameter int N_CHIPS    = 8,
  parameter int N_BK       = 16,
  parameter int E_H        = 128,
  parameter int N_HC       = 8,
  parameter int N_GQA      = 1,
  parameter int BANK_WORDS = 16384,
  parameter int MAX_TOK    = 32768,
  parameter int T_CCD      = 4,
  localparam int G         = N_CHIPS / N_HC,
  localparam int WPT       = E_H / (N_HC * EPW),
  localparam int SRAM_D    = MAX_TOK * N_GQA / 4,
  localparam int SRAM_AW   = $clog2(SRAM_D)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid,
  input  host_req_t   req,
  output logic        req_ready,
  output logic        resp_valid,
  output hburst_t     resp_data,
  output logic        busy,
  output logic        job_done,
  output int_cmd_t    icmd,
  output ext_cmd_t    ecmd,
  output logic [63:0] wdata [N_CHIPS],
  input  logic [63:0] rdata [N_CHIPS],
  input  logic        chip_rvalid,
  output logic [31:0] bubbles,
  output logic [31:0] row_stalls,
  output logic [31:0] cycles
);
  // decoder <-> others
  logic        start, ctrl_done;
  logic [15:0] len;
  logic [ADDR_W-1:0] k_base, v_base;
  logic        rl_h_we, rl_c_we;
  logic [7:0]  rl_h_widx, rl_h_ridx, rl_c_widx, rl_c_ridx_d;
  hburst_t     rl_h_wdata, rl_h_rdata;
  logic [63:0] rl_c_rdata [N_CHIPS];
  logic [63:0] beats [8];
  ext_cmd_t    dec_ecmd, ctl_ecmd;
  logic        q_we;
  logic [7:0]  q_wg, out_g;
  logic [15:0] q_wk, out_k;
  // controller <-> datapath
  logic [63:0] ctl_wdata [N_CHIPS];
  logic [7:0]  q_g;
  logic [15:0] q_k;
  logic [63:0] q_words [N_CHIPS];
  logic        add_valid, score_valid;
  mac_mode_e   add_mode;
  logic [7:0]  add_g;
  logic [15:0] add_k;
  elem_t       score_out [G][EPW];
  logic [63:0] add_rd_words [N_CHIPS];
  logic        sm_clear, acc_valid, fin_start, fin_done, nrm_valid, p_valid;
  logic [7:0]  acc_g, nrm_g;
  logic [3:0]  acc_mask, nrm_mask;
  elem_t       acc_x [G][EPW];
  elem_t       nrm_x [G][EPW];
  logic [15:0] p_out [G][EPW];
  logic        sram_en, sram_we;
  logic [SRAM_AW-1:0] sram_addr;
  logic [G*64-1:0] sram_wdata, sram_rdata;

  pim_request_decoder #(.N_CHIPS(N_CHIPS), .N_BK(N_BK), .E_H(E_H), .N_HC(N_HC),
                        .V_OFF(BANK_WORDS / 2)) u_dec (
    .clk, .rst_n, .req_valid, .req, .req_ready, .resp_valid, .resp_data,
    .start, .len, .k_base, .v_base, .ctrl_busy(busy), .ctrl_done, .job_done,
    .rl_h_we, .rl_h_widx, .rl_h_wdata, .rl_h_ridx, .rl_h_rdata,
    .rl_c_we, .rl_c_widx, .rl_c_ridx(rl_c_ridx_d),
    .ecmd(dec_ecmd), .q_we, .q_g(q_wg), .q_k(q_wk), .out_g, .out_k);

  relayout_unit #(.N_CHIPS(N_CHIPS), .E_H(E_H), .N_HC(N_HC)) u_rl (
    .clk, .h_we(rl_h_we), .h_widx(rl_h_widx), .h_wdata(rl_h_wdata),
    .h_ridx(rl_h_ridx), .h_rdata(rl_h_rdata),
    .c_we(rl_c_we), .c_widx(rl_c_widx), .c_wdata(add_rd_words),
    .c_ridx(rl_c_ridx_d), .c_rdata(rl_c_rdata), .beats);

  // Query store: N_GQA x WPT chip-order words.
  logic [63:0] qmem [N_GQA][WPT][N_CHIPS];
  always_ff @(posedge clk)
    if (q_we && int'(q_wg) < N_GQA && int'(q_wk) < WPT)
      for (int c = 0; c < N_CHIPS; c++) qmem[q_wg][q_wk][c] <= rl_c_rdata[c];
  always_comb
    for (int c = 0; c < N_CHIPS; c++)
      q_words[c] = (int'(q_g) < N_GQA && int'(q_k) < WPT) ? qmem[q_g][q_k][c] : '0;

  pim_controller #(.N_CHIPS(N_CHIPS), .N_BK(N_BK), .E_H(E_H), .N_HC(N_HC), .N_GQA(N_GQA),
                   .T_CCD(T_CCD), .SRAM_AW(SRAM_AW)) u_ctl (
    .clk, .rst_n, .start, .len, .k_base, .v_base, .busy, .done(ctrl_done),
    .icmd, .ecmd(ctl_ecmd), .ext_wdata(ctl_wdata), .q_g, .q_k, .q_words,
    .add_valid, .add_mode, .add_g, .add_k, .chip_rvalid, .score_valid,
    .sm_clear, .acc_valid, .acc_g, .acc_mask, .fin_start, .fin_done,
    .nrm_valid, .nrm_g, .nrm_mask, .p_valid, .p_out,
    .sram_en, .sram_we, .sram_addr, .bubbles, .row_stalls, .cycles);

  adder_unit #(.N_CHIPS(N_CHIPS), .E_H(E_H), .N_HC(N_HC), .N_GQA(N_GQA)) u_add (
    .clk, .rst_n, .clear(sm_clear), .mode(add_mode), .in_valid(add_valid),
    .in_g(add_g), .in_k(add_k), .in_words(rdata), .score_valid, .score_out,
    .rd_g(out_g), .rd_k(out_k), .rd_words(add_rd_words));

  always_comb begin
    for (int h = 0; h < G; h++)
      for (int j = 0; j < EPW; j++) begin
        acc_x[h][j] = score_out[h][j];
        sram_wdata[64*h + 16*j +: 16] = score_out[h][j];
        nrm_x[h][j] = sram_rdata[64*h + 16*j +: 16];
      end
  end

  softmax_unit #(.N_CHIPS(N_CHIPS), .N_HC(N_HC), .N_GQA(N_GQA), .LANES(EPW)) u_sm (
    .clk, .rst_n, .clear(sm_clear), .acc_valid, .acc_g, .acc_x, .acc_mask,
    .fin_start, .fin_done, .nrm_valid, .nrm_g, .nrm_x, .nrm_mask, .p_valid, .p_out);

  rank_sram #(.DEPTH(SRAM_D), .WIDTH(G * 64)) u_sram (
    .clk, .en(sram_en), .we(sram_we), .addr(sram_addr), .wdata(sram_wdata), .rdata(sram_rdata));

  // External bus: the controller while a job runs, the decoder otherwise.
  always_comb begin
    ecmd = busy ? ctl_ecmd : dec_ecmd;
    for (int c = 0; c < N_CHIPS; c++) begin
      // Chip c receives byte lane c of the eight bus beats.
      automatic logic [63:0] lane;
      for (int b = 0; b < 8; b++) lane[8*b +: 8] = beats[b][8*c +: 8];
      wdata[c] = busy ? ctl_wdata[c] : (N_CHIPS == 8 ? lane : rl_c_rdata[c]);
    end
  end
endmodule
