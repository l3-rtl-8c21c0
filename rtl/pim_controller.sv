// pim_controller -- PIM command sequencer of the rank PU (bubble-free pipeline).
//
// One attention job covers `len` tokens of G = N_CHIPS/N_HC KV heads (each
// with N_GQA queries). Token t lives in bank t mod N_BK, chunk c = t div N_BK,
// at word k_base + c*WPT + k (K) or v_base + c*WPT + k (V) of every chip,
// WPT = E_H/(N_HC*4). A chunk is one token per bank, computed in parallel.
// The job runs in phases:
//   QLOAD  PIM_WR_R (adder tree), then PIM_WR_SB of the N_GQA*WPT query words.
//   SCORE  internal bus: WPT PIM_MACs per chunk; external bus: N_BK*N_GQA/4
//          PIM_RD_RB per chunk, fetching chunk c while chunk c+1 computes.
//          Scores go through the adder unit to the softmax unit and the SRAM.
//   FIN    softmax reciprocal of the running sums.
//   CTX    PIM_WR_R (accumulator), then per chunk: SRAM read -> softmax
//          normalization -> PIM_WR_SB of the probabilities (external bus),
//          overlapped with the WPT context PIM_MACs of the previous chunk.
//   CTXRD  PIM_RD_RB of N_BK*N_GQA*WPT context words into the adder unit.
// Both buses issue at most one command per slot of T_CCD clocks (a burst).
// Result-buffer and shared-buffer slots alternate with chunk parity, so each
// stream may run at most one chunk ahead of the other. When the MAC stream
// enters a new DRAM row it waits T_RCD (first row) or T_RP + T_RCD.
// bubbles counts slots in which the MAC stream, once started, had work but
// waited for the other bus; with N_HC chosen by the paper's head-mapping rule it stays 0
// in steady state. Needs T_CCD >= 2 so that a result is ready one slot later.
// The phases and the overlap are the paper's; the slot model, the address map
// and the hand-over rules are this design's choice.
module pim_controller
  import chime_pkg::*;
#(
  parameter int N_CHIPS   = 8,
  parameter int N_BK      = 16,
  parameter int E_H       = 128,
  parameter int N_HC      = 8,
  parameter int N_GQA     = 1,
  parameter int T_CCD     = 4,
  parameter int T_RP      = 22,
  parameter int T_RCD     = 22,
  parameter int ROW_WORDS = 128,
  parameter int SRAM_AW   = 13,
  localparam int G        = N_CHIPS / N_HC,
  localparam int WPT      = E_H / (N_HC * EPW),
  localparam int RB_SC    = N_BK * N_GQA / 4,
  localparam int CTX_RD   = N_BK * N_GQA * WPT,
  localparam int S_BASE   = N_GQA * WPT
) (
  input  logic        clk,
  input  logic        rst_n,
  // job
  input  logic        start,
  input  logic [15:0] len,
  input  logic [ADDR_W-1:0] k_base,
  input  logic [ADDR_W-1:0] v_base,
  output logic        busy,
  output logic        done,
  // PIM buses
  output int_cmd_t    icmd,
  output ext_cmd_t    ecmd,
  output logic [63:0] ext_wdata [N_CHIPS],
  // query store
  output logic [7:0]  q_g,
  output logic [15:0] q_k,
  input  logic [63:0] q_words [N_CHIPS],
  // adder unit
  output logic        add_valid,
  output mac_mode_e   add_mode,
  output logic [7:0]  add_g,
  output logic [15:0] add_k,
  input  logic        chip_rvalid,
  input  logic        score_valid,
  // softmax unit
  output logic        sm_clear,
  output logic        acc_valid,
  output logic [7:0]  acc_g,
  output logic [3:0]  acc_mask,
  output logic        fin_start,
  input  logic        fin_done,
  output logic        nrm_valid,
  output logic [7:0]  nrm_g,
  output logic [3:0]  nrm_mask,
  input  logic        p_valid,
  input  logic [15:0] p_out [G][4],
  // score SRAM
  output logic        sram_en,
  output logic        sram_we,
  output logic [SRAM_AW-1:0] sram_addr,
  // statistics
  output logic [31:0] bubbles,
  output logic [31:0] row_stalls,
  output logic [31:0] cycles
);
  typedef enum logic [2:0] {S_IDLE, S_QLOAD, S_SCORE, S_FIN, S_CTX, S_CTXRD, S_DRAIN} phase_e;
  phase_e phase;

  logic [15:0] len_q;
  logic [15:0] nchunks;
  logic [ADDR_W-1:0] kb_q, vb_q;
  logic [$clog2(T_CCD+1)-1:0] tick_cnt;
  logic tick;
  logic cfg_sent;
  logic [3:0] drain;

  // internal (MAC) stream
  logic [15:0] i_chunk, i_k;
  logic [15:0] mac_done;          // chunks whose last MAC has issued
  logic [7:0]  row_wait;
  logic        row_open_v;
  logic [ADDR_W-1:0] row_open;
  // external stream
  logic [15:0] e_chunk, e_j;
  logic [15:0] ext_done;          // chunks fully read (SCORE) / written (CTX)
  // tag pipelines
  // stage 0: command on the bus / SRAM read, 1: chip or SRAM data,
  // 2: adder or softmax output
  logic [2:0]  sc_tag_v;
  logic [7:0]  sc_tag_g  [3];
  logic [15:0] sc_tag_t  [3];     // first token of the 4-lane burst
  logic [SRAM_AW-1:0] sc_tag_a [3];
  logic [2:0]  nr_tag_v;
  logic [15:0] nr_tag_idx [3];
  logic [1:0]  rd_tag_v;
  logic [15:0] rd_tag_idx [2];
  phase_e      drain_next;

  assign tick = (tick_cnt == '0);

  function automatic logic [3:0] lane_mask(input logic [15:0] t0, input logic [15:0] n);
    for (int i = 0; i < 4; i++) lane_mask[i] = (32'(t0) + i) < 32'(n);
  endfunction

  // Next MAC address of the internal stream.
  logic [ADDR_W-1:0] mac_addr;
  logic              mac_ready;   // dependency on the other stream satisfied
  always_comb begin
    mac_addr  = ((phase == S_CTX) ? vb_q : kb_q) + ADDR_W'(i_chunk) * ADDR_W'(WPT) + ADDR_W'(i_k);
    mac_ready = 1'b0;
    if (phase == S_SCORE)
      mac_ready = (i_chunk < nchunks) && (i_chunk < 16'd2 || ext_done >= i_chunk - 16'd1);
    else if (phase == S_CTX)
      mac_ready = cfg_sent && (i_chunk < nchunks) && (ext_done > i_chunk);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= S_IDLE;
      len_q <= '0; nchunks <= '0; kb_q <= '0; vb_q <= '0;
      tick_cnt <= '0; cfg_sent <= 1'b0; drain <= '0;
      i_chunk <= '0; i_k <= '0; mac_done <= '0; row_wait <= '0;
      row_open_v <= 1'b0; row_open <= '0;
      e_chunk <= '0; e_j <= '0; ext_done <= '0;
      sc_tag_v <= '0; nr_tag_v <= '0; rd_tag_v <= '0; drain_next <= S_IDLE;
      for (int i = 0; i < 3; i++) begin
        sc_tag_g[i] <= '0; sc_tag_t[i] <= '0; sc_tag_a[i] <= '0; nr_tag_idx[i] <= '0;
      end
      rd_tag_idx[0] <= '0; rd_tag_idx[1] <= '0;
      bubbles <= '0; row_stalls <= '0; cycles <= '0;
      icmd <= '0; ecmd <= '0;
      for (int c = 0; c < N_CHIPS; c++) ext_wdata[c] <= '0;
      done <= 1'b0;
      fin_start <= 1'b0;
    end else begin
      done      <= 1'b0;
      fin_start <= 1'b0;
      icmd      <= '0;
      ecmd      <= '0;
      tick_cnt  <= (phase == S_IDLE || tick_cnt == $bits(tick_cnt)'(T_CCD - 1)) ? '0 : tick_cnt + 1'b1;
      if (phase != S_IDLE) cycles <= cycles + 32'd1;

      // score tag pipeline (RD_RB -> chip data -> adder -> softmax/SRAM)
      for (int i = 1; i < 3; i++) begin
        sc_tag_v[i]   <= sc_tag_v[i-1];
        sc_tag_g[i]   <= sc_tag_g[i-1];
        sc_tag_t[i]   <= sc_tag_t[i-1];
        sc_tag_a[i]   <= sc_tag_a[i-1];
        // normalization tag pipeline (SRAM read -> softmax -> WR_SB)
        nr_tag_v[i]   <= nr_tag_v[i-1];
        nr_tag_idx[i] <= nr_tag_idx[i-1];
      end
      sc_tag_v[0]   <= 1'b0;
      nr_tag_v[0]   <= 1'b0;
      // context read tag pipeline (RD_RB -> chip data)
      rd_tag_v[1]   <= rd_tag_v[0];
      rd_tag_idx[1] <= rd_tag_idx[0];
      rd_tag_v[0]   <= 1'b0;

      case (phase)
        S_IDLE: if (start) begin
          phase    <= S_QLOAD;
          len_q    <= len;
          nchunks  <= 16'((32'(len) + N_BK - 1) / N_BK);
          kb_q     <= k_base;
          vb_q     <= v_base;
          cfg_sent <= 1'b0;
          e_chunk  <= '0; e_j <= '0; ext_done <= '0;
          i_chunk  <= '0; i_k <= '0; mac_done <= '0;
          row_open_v <= 1'b0; row_wait <= '0;
          bubbles  <= '0; row_stalls <= '0; cycles <= '0;
        end

        S_QLOAD: if (tick) begin
          if (!cfg_sent) begin
            ecmd.op   <= PIM_WR_R;
            ecmd.mode <= MODE_TREE;
            cfg_sent  <= 1'b1;
          end else begin
            ecmd.op  <= PIM_WR_SB;
            ecmd.idx <= IDX_W'(32'(e_j) * WPT + 32'(e_chunk));   // e_j = g, e_chunk = k
            for (int c = 0; c < N_CHIPS; c++) ext_wdata[c] <= q_words[c];
            if (32'(e_chunk) == WPT - 1) begin
              e_chunk <= '0;
              if (32'(e_j) == N_GQA - 1) begin
                e_j   <= '0;
                phase <= S_SCORE;
              end else e_j <= e_j + 16'd1;
            end else e_chunk <= e_chunk + 16'd1;
          end
        end

        S_SCORE, S_CTX: begin
          if (tick) begin
            // ---------------- internal bus: MAC stream ----------------
            if (row_wait != '0) begin
              row_wait <= row_wait - 8'd1;
              row_stalls <= row_stalls + 32'd1;
              if (row_wait == 8'd1) begin
                row_open_v <= 1'b1;
                row_open   <= mac_addr / ADDR_W'(ROW_WORDS);
              end
            end else if (mac_ready) begin
              if (!row_open_v || row_open != mac_addr / ADDR_W'(ROW_WORDS)) begin
                row_wait   <= 8'((row_open_v ? T_RP + T_RCD : T_RCD) + T_CCD - 1) / 8'(T_CCD);
                row_stalls <= row_stalls + 32'd1;
              end else begin
                icmd.op   <= PIM_MAC;
                icmd.addr <= mac_addr;
                icmd.k    <= i_k;
                icmd.last <= (32'(i_k) == WPT - 1);
                icmd.slot <= i_chunk[0];
                if (32'(i_k) == WPT - 1) begin
                  i_k      <= '0;
                  i_chunk  <= i_chunk + 16'd1;
                  mac_done <= mac_done + 16'd1;
                end else i_k <= i_k + 16'd1;
              end
            end else if (i_chunk < nchunks && (i_chunk != '0 || i_k != '0)) begin
              bubbles <= bubbles + 32'd1;
            end

            // ---------------- external bus ----------------
            if (phase == S_SCORE) begin
              if (e_chunk < nchunks && mac_done > e_chunk) begin
                ecmd.op   <= PIM_RD_RB;
                ecmd.idx  <= IDX_W'(e_j);
                ecmd.slot <= e_chunk[0];
                sc_tag_v[0] <= 1'b1;
                sc_tag_g[0] <= 8'(32'(e_j) / (N_BK / 4));
                sc_tag_t[0] <= 16'(32'(e_chunk) * N_BK + 4 * (32'(e_j) % (N_BK / 4)));
                sc_tag_a[0] <= SRAM_AW'(32'(e_chunk) * RB_SC + 32'(e_j));
                if (32'(e_j) == RB_SC - 1) begin
                  e_j      <= '0;
                  e_chunk  <= e_chunk + 16'd1;
                  ext_done <= ext_done + 16'd1;
                end else e_j <= e_j + 16'd1;
              end else if (e_chunk >= nchunks) begin
                phase      <= S_DRAIN;
                drain_next <= S_FIN;
                drain      <= 4'd4;
              end
            end else if (!cfg_sent) begin
              ecmd.op   <= PIM_WR_R;
              ecmd.mode <= MODE_ACC;
              cfg_sent  <= 1'b1;
            end else if (e_chunk < nchunks && (e_chunk < 16'd2 || mac_done >= e_chunk - 16'd1)) begin
              nr_tag_v[0]   <= 1'b1;
              nr_tag_idx[0] <= 16'(32'(e_chunk) * RB_SC + 32'(e_j));
              if (32'(e_j) == RB_SC - 1) begin
                e_j     <= '0;
                e_chunk <= e_chunk + 16'd1;
              end else e_j <= e_j + 16'd1;
            end else if (e_chunk >= nchunks && mac_done == nchunks) begin
              phase      <= S_DRAIN;
              drain_next <= S_CTXRD;
              drain      <= 4'd4;
            end
          end
          // probabilities leave the softmax two cycles after the SRAM read
          if (phase == S_CTX && nr_tag_v[2]) begin
            ecmd.op  <= PIM_WR_SB;
            ecmd.idx <= IDX_W'(S_BASE + 32'(nr_tag_idx[2]) % RB_SC +
                               ((32'(nr_tag_idx[2]) / RB_SC) % 2) * RB_SC);
            for (int c = 0; c < N_CHIPS; c++)
              ext_wdata[c] <= {p_out[c / N_HC][3], p_out[c / N_HC][2], p_out[c / N_HC][1], p_out[c / N_HC][0]};
            if (32'(nr_tag_idx[2]) % RB_SC == RB_SC - 1) ext_done <= ext_done + 16'd1;
          end
        end

        S_DRAIN: begin
          drain <= drain - 4'd1;
          if (drain == 4'd1) begin
            phase <= drain_next;
            if (drain_next == S_FIN)  fin_start <= 1'b1;
            if (drain_next == S_IDLE) done      <= 1'b1;
          end
        end

        S_FIN: if (fin_done) begin
          phase    <= S_CTX;
          cfg_sent <= 1'b0;
          e_chunk  <= '0; e_j <= '0; ext_done <= '0;
          i_chunk  <= '0; i_k <= '0; mac_done <= '0;
        end

        S_CTXRD: if (tick) begin
          ecmd.op    <= PIM_RD_RB;
          ecmd.idx   <= IDX_W'(e_j);
          rd_tag_v[0]   <= 1'b1;
          rd_tag_idx[0] <= e_j;
          if (32'(e_j) == CTX_RD - 1) begin
            e_j        <= '0;
            phase      <= S_DRAIN;
            drain_next <= S_IDLE;
            drain      <= 4'd4;
          end else e_j <= e_j + 16'd1;
        end

        default: phase <= S_IDLE;
      endcase
    end
  end

  // Side outputs derived from the tag pipelines.
  always_comb begin
    automatic int nj  = int'(nr_tag_idx[1]) % RB_SC;
    automatic int nch = int'(nr_tag_idx[1]) / RB_SC;
    busy      = (phase != S_IDLE);
    sm_clear  = start && (phase == S_IDLE);
    q_g       = 8'(e_j);
    q_k       = e_chunk;
    add_valid = chip_rvalid;
    add_mode  = rd_tag_v[1] ? MODE_ACC : MODE_TREE;
    add_k     = 16'(int'(rd_tag_idx[1]) % WPT);
    add_g     = 8'((int'(rd_tag_idx[1]) / WPT) % N_GQA);
    acc_valid = sc_tag_v[2] && score_valid;
    acc_g     = sc_tag_g[2];
    acc_mask  = lane_mask(sc_tag_t[2], len_q);
    nrm_valid = nr_tag_v[1];
    nrm_g     = 8'(nj / (N_BK / 4));
    nrm_mask  = lane_mask(16'(nch * N_BK + 4 * (nj % (N_BK / 4))), len_q);
    sram_en   = sc_tag_v[2] || nr_tag_v[0];
    sram_we   = sc_tag_v[2];
    sram_addr = sc_tag_v[2] ? sc_tag_a[2] : SRAM_AW'(nr_tag_idx[0]);
  end

  // A result is fetched no earlier than one slot after it is produced.
  initial assert (T_CCD >= 2) else $error("pim_controller needs T_CCD >= 2");
  // A probability leaves the softmax unit exactly when its write is due.
  assert property (@(posedge clk) disable iff (!rst_n) nr_tag_v[2] |-> p_valid);
endmodule
