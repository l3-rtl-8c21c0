// pim_request_decoder -- "PIM request / state" block of the rank PU.
//
// The host CPU drives the rank with ordinary memory writes; this block decodes
// them into work for the rank PU. A request is accepted when req_valid and
// req_ready are both high; req_ready is low while a request is being carried
// out and while an attention job runs (a rank either talks to the host or
// computes).
//   REQ_WR_KV  host burst `burst` of the K (is_v=0) or V (is_v=1) vectors of
//              token `token`: stored in the re-layout unit; after the last
//              burst of the block the WPT re-laid chip bursts are written to
//              bank token mod N_BK at base [+ V_OFF] + (token div N_BK)*WPT + k
//              with DRAM_WR, one per cycle.
//   REQ_WR_Q   host burst of query block g: after the last burst the chip
//              words go to the query store (q_we, q_g, q_k, q_words).
//   REQ_START  starts an attention job over `token` tokens at K base `base`
//              and V base base + V_OFF.
//   REQ_RD_OUT host burst `burst` of the context output of query g: the
//              adder unit's chip-order words are loaded into the re-layout
//              unit (once per g), then resp_valid pulses with the host burst.
// job_done is set when the job ends and cleared by the next REQ_START.
// The request/state role is the paper's; the request format is this
// design's choice.
// Lint: Only the fields of the stored request that later states need are read; lint reports
// the unused bits (payload and opcode) of that register.
module pim_request_decoder
  import chime_pkg::*;
#(
  parameter int N_CHIPS = 8,
  parameter int N_BK    = 16,
  parameter int E_H     = 128,
  parameter int N_HC    = 8,
  parameter int V_OFF   = 8192,
  localparam int G      = N_CHIPS / N_HC,
  localparam int NB     = G * E_H / 32,
  localparam int WPT    = E_H / (N_HC * EPW)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid,
  input  host_req_t   req,
  output logic        req_ready,
  output logic        resp_valid,
  output hburst_t     resp_data,
  // attention job
  output logic        start,
  output logic [15:0] len,
  output logic [ADDR_W-1:0] k_base,
  output logic [ADDR_W-1:0] v_base,
  input  logic        ctrl_busy,
  input  logic        ctrl_done,
  output logic        job_done,
  // re-layout unit
  output logic        rl_h_we,
  output logic [7:0]  rl_h_widx,
  output hburst_t     rl_h_wdata,
  output logic [7:0]  rl_h_ridx,
  input  hburst_t     rl_h_rdata,
  output logic        rl_c_we,
  output logic [7:0]  rl_c_widx,
  output logic [7:0]  rl_c_ridx,
  // external bus (normal writes into the banks)
  output ext_cmd_t    ecmd,
  // query store
  output logic        q_we,
  output logic [7:0]  q_g,
  output logic [15:0] q_k,
  // adder unit read port
  output logic [7:0]  out_g,
  output logic [15:0] out_k
);
  typedef enum logic [2:0] {D_IDLE, D_KV, D_Q, D_RUN, D_LOAD, D_RESP} dstate_e;
  dstate_e st;
  host_req_t r_q;
  logic [15:0] cnt;
  logic        out_loaded;
  logic [7:0]  out_loaded_g;

  assign req_ready = (st == D_IDLE) && !ctrl_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= D_IDLE; r_q <= '0; cnt <= '0;
      out_loaded <= 1'b0; out_loaded_g <= '0;
      job_done <= 1'b0; start <= 1'b0; len <= '0; k_base <= '0; v_base <= '0;
      resp_valid <= 1'b0; resp_data <= '0;
    end else begin
      start      <= 1'b0;
      resp_valid <= 1'b0;
      if (ctrl_done) job_done <= 1'b1;
      case (st)
        D_IDLE: if (req_valid && req_ready) begin
          r_q <= req;
          cnt <= '0;
          case (req.op)
            REQ_WR_KV: if (int'(req.burst) == NB - 1) st <= D_KV;
            REQ_WR_Q:  if (int'(req.burst) == NB - 1) st <= D_Q;
            REQ_START: begin
              start      <= 1'b1;
              len        <= req.token;
              k_base     <= req.base;
              v_base     <= req.base + ADDR_W'(V_OFF);
              job_done   <= 1'b0;
              out_loaded <= 1'b0;
              st         <= D_RUN;
            end
            REQ_RD_OUT:
              if (out_loaded && out_loaded_g == req.g) st <= D_RESP;
              else st <= D_LOAD;
            default: ;
          endcase
        end
        D_KV, D_Q, D_LOAD: begin
          cnt <= cnt + 16'd1;
          if (int'(cnt) == WPT - 1) begin
            if (st == D_LOAD) begin
              out_loaded   <= 1'b1;
              out_loaded_g <= r_q.g;
              st           <= D_RESP;
            end else st <= D_IDLE;
          end
        end
        D_RUN: if (ctrl_done) st <= D_IDLE;
        D_RESP: begin
          resp_valid <= 1'b1;
          resp_data  <= rl_h_rdata;
          st         <= D_IDLE;
        end
        default: st <= D_IDLE;
      endcase
    end
  end

  always_comb begin
    rl_h_we    = (st == D_IDLE) && req_valid && req_ready &&
                 (req.op == REQ_WR_KV || req.op == REQ_WR_Q);
    rl_h_widx  = req.burst;
    rl_h_wdata = req.data;
    rl_h_ridx  = r_q.burst;
    rl_c_ridx  = 8'(cnt);
    rl_c_we    = (st == D_LOAD);
    rl_c_widx  = 8'(cnt);
    out_g      = r_q.g;
    out_k      = cnt;
    q_we       = (st == D_Q);
    q_g        = r_q.g;
    q_k        = cnt;
    ecmd       = '0;
    if (st == D_KV) begin
      ecmd.op   = DRAM_WR;
      ecmd.bank = 5'(int'(r_q.token) % N_BK);
      ecmd.addr = r_q.base + (r_q.is_v ? ADDR_W'(V_OFF) : '0) +
                  ADDR_W'((int'(r_q.token) / N_BK) * WPT + int'(cnt));
    end
  end
endmodule
