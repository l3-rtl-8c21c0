// chime_pim_top -- the DIMM-PIM attention memory system.
//
// N_CHANNELS memory channels, each with N_RANKSETS DIMM-PIM ranks; rank r of
// every channel belongs to rankset r. Every rank is a chime_rank (rank PU on
// the buffer chip plus eight PIM DRAM chips) and computes decoding attention
// for the heads and requests mapped to it. The host CPU's memory controllers
// (not part of this design) drive one request port per rank; a port is live
// only while its rankset holds the channel grant of the rankset arbiter, which
// the host asks for with xfer_req. So one rankset transfers while the other
// ranksets keep computing. The default sizes (16 channels, 4 ranks per
// channel, 8 chips of 16 banks per rank) follow the evaluated DDR4-3200
// system; bank depth is reduced (see dram_bank).
// Ports: per-rank request/response, per-rank busy/done and statistics,
// rankset grant and the arbiter's overlap counters.
// Lint: Lint reports rst_n as used both asynchronously (flop resets) and synchronously (the
// disable clause of the arbiter's assertion); this is intended.
module chime_pim_top
  import chime_pkg::*;
#(
  parameter int N_CHANNELS = 16,
  parameter int N_RANKSETS = 4,
  parameter int N_CHIPS    = 8,
  parameter int N_BK       = 16,
  parameter int E_H        = 128,
  parameter int N_HC       = 8,
  parameter int N_GQA      = 1,
  parameter int BANK_WORDS = 16384,
  parameter int MAX_TOK    = 32768
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [N_RANKSETS-1:0] xfer_req,
  output logic [N_RANKSETS-1:0] grant,
  input  logic        req_valid  [N_RANKSETS][N_CHANNELS],
  input  host_req_t   req        [N_RANKSETS][N_CHANNELS],
  output logic        req_ready  [N_RANKSETS][N_CHANNELS],
  output logic        resp_valid [N_RANKSETS][N_CHANNELS],
  output hburst_t     resp_data  [N_RANKSETS][N_CHANNELS],
  output logic        busy       [N_RANKSETS][N_CHANNELS],
  output logic        job_done   [N_RANKSETS][N_CHANNELS],
  output logic [31:0] bubbles    [N_RANKSETS][N_CHANNELS],
  output logic [31:0] row_stalls [N_RANKSETS][N_CHANNELS],
  output logic [31:0] cycles     [N_RANKSETS][N_CHANNELS],
  output logic [31:0] overlap,
  output logic [31:0] transfers
);
  logic [N_RANKSETS-1:0] rs_busy;
  logic                  xfer_active;
  logic                  rdy [N_RANKSETS][N_CHANNELS];

  always_comb begin
    xfer_active = 1'b0;
    for (int r = 0; r < N_RANKSETS; r++) begin
      rs_busy[r] = 1'b0;
      for (int ch = 0; ch < N_CHANNELS; ch++) begin
        rs_busy[r] |= busy[r][ch];
        req_ready[r][ch] = rdy[r][ch] && grant[r];
        xfer_active |= req_valid[r][ch] && req_ready[r][ch];
      end
    end
  end

  rankset_arbiter #(.N_RANKSETS(N_RANKSETS)) u_arb (
    .clk, .rst_n, .xfer_req, .rs_busy, .xfer_active, .grant, .overlap, .transfers);

  for (genvar r = 0; r < N_RANKSETS; r++) begin : g_rs
    for (genvar ch = 0; ch < N_CHANNELS; ch++) begin : g_ch
      chime_rank #(.N_CHIPS(N_CHIPS), .N_BK(N_BK), .E_H(E_H), .N_HC(N_HC), .N_GQA(N_GQA),
                   .BANK_WORDS(BANK_WORDS), .MAX_TOK(MAX_TOK)) u_rank (
        .clk, .rst_n,
        .req_valid(req_valid[r][ch] && grant[r]), .req(req[r][ch]), .req_ready(rdy[r][ch]),
        .resp_valid(resp_valid[r][ch]), .resp_data(resp_data[r][ch]),
        .busy(busy[r][ch]), .job_done(job_done[r][ch]),
        .bubbles(bubbles[r][ch]), .row_stalls(row_stalls[r][ch]), .cycles(cycles[r][ch]));
    end
  end
endmodule
