// chime_rank -- one DIMM-PIM rank: the rank PU on the buffer chip plus N_CHIPS
// PIM DRAM chips.
//
// The rank PU broadcasts one internal-bus and one external-bus command per
// cycle to all chips and exchanges a 64-bit data lane with each chip (one x8
// chip burst of 8 beats). Chip read data returns one cycle after PIM_RD_RB;
// chip 0's rvalid stands for all chips, which run in lockstep. The host side
// is the rank PU's request port. Eight chips of 16 banks per rank follow the
// evaluated DDR4 configuration; the bus model is this design's choice.
module chime_rank
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
  localparam int WPT       = E_H / (N_HC * EPW)
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
  output logic [31:0] bubbles,
  output logic [31:0] row_stalls,
  output logic [31:0] cycles
);
  int_cmd_t    icmd;
  ext_cmd_t    ecmd;
  logic [63:0] wdata [N_CHIPS];
  logic [63:0] rdata [N_CHIPS];
  logic        rvalid [N_CHIPS];

  rank_pu #(.N_CHIPS(N_CHIPS), .N_BK(N_BK), .E_H(E_H), .N_HC(N_HC), .N_GQA(N_GQA),
            .BANK_WORDS(BANK_WORDS), .MAX_TOK(MAX_TOK), .T_CCD(T_CCD)) u_rpu (
    .clk, .rst_n, .req_valid, .req, .req_ready, .resp_valid, .resp_data, .busy, .job_done,
    .icmd, .ecmd, .wdata, .rdata, .chip_rvalid(rvalid[0]), .bubbles, .row_stalls, .cycles);

  for (genvar c = 0; c < N_CHIPS; c++) begin : g_chip
    pim_chip #(.N_BK(N_BK), .N_CMR(N_GQA), .WPT(WPT), .BANK_WORDS(BANK_WORDS)) u_chip (
      .clk, .rst_n, .icmd, .ecmd, .wdata(wdata[c]), .rdata(rdata[c]), .rvalid(rvalid[c]));
  end
endmodule
