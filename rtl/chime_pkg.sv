// chime_pkg -- types and constants shared by the DIMM-PIM attention engine.
//
// Element format: the design computes attention in 16-bit fixed point.
// K, V, Q and scores are two's-complement Q8.8; softmax probabilities are
// unsigned Q0.16. The paper's datapath is FP16; fixed point is this design's
// own simplification. A DRAM chip is x8 with burst length 8, so one burst moves
// a 64-bit word per chip = four 16-bit elements (EPW).
//
// PIM command set (names follow the paper): PIM_WR_R writes chip
// configuration registers, PIM_LD_SB copies a bank word into the shared
// buffer, PIM_WR_SB writes a word from the rank PU into the shared buffer,
// PIM_MAC runs one MAC step in every bank PU, PIM_RD_RB reads result buffers
// back to the rank PU. DRAM_WR is a normal column write into one bank.
// Lint: exp_neg() uses only the top five fraction bits of its scaled argument
// (the table has 32 entries); lint reports the unused low bits.
package chime_pkg;

  localparam int ELEM_W = 16;          // element width (Q8.8)
  localparam int EPW    = 4;           // elements per 64-bit chip word
  localparam int WORD_W = 64;          // one x8 chip burst: 8 beats x 8 bits
  localparam int ACC_W  = 40;          // MAC accumulator width
  localparam int ADDR_W = 24;          // bank word address
  localparam int IDX_W  = 16;          // buffer index field
  localparam int HBURST_W = 512;       // host burst: 64-bit bus x 8 beats

  typedef logic signed [ELEM_W-1:0] elem_t;
  typedef logic [WORD_W-1:0]        word_t;
  typedef logic [HBURST_W-1:0]      hburst_t;

  typedef enum logic [2:0] {
    PIM_NOP   = 3'd0,
    PIM_WR_R  = 3'd1,
    PIM_LD_SB = 3'd2,
    PIM_WR_SB = 3'd3,
    PIM_MAC   = 3'd4,
    PIM_RD_RB = 3'd5,
    DRAM_WR   = 3'd6
  } pim_op_e;

  // Computing paradigm selected by PIM_WR_R.
  typedef enum logic {
    MODE_TREE = 1'b0,   // adder tree: partial dot product q.k per token (score)
    MODE_ACC  = 1'b1    // accumulator: o += s * v over tokens (context)
  } mac_mode_e;

  // Command on the internal bus (bank PUs <-> banks), broadcast to all chips.
  typedef struct packed {
    pim_op_e            op;      // PIM_MAC, PIM_LD_SB or PIM_NOP
    logic [ADDR_W-1:0]  addr;    // bank word address
    logic [IDX_W-1:0]   k;       // word index within the token (0..WPT-1)
    logic [4:0]         bank;    // source bank for PIM_LD_SB
    logic [IDX_W-1:0]   sb_idx;  // shared-buffer index for PIM_LD_SB
    logic               last;    // last word of a token (tree mode)
    logic               slot;    // result / shared-buffer slot (chunk parity)
  } int_cmd_t;

  // Command on the external bus (rank PU <-> chips), broadcast to all chips;
  // write data travels on the per-chip data lanes.
  typedef struct packed {
    pim_op_e            op;      // PIM_WR_R, PIM_WR_SB, PIM_RD_RB, DRAM_WR or PIM_NOP
    logic [ADDR_W-1:0]  addr;    // bank word address (DRAM_WR)
    logic [4:0]         bank;    // target bank (DRAM_WR)
    logic [IDX_W-1:0]   idx;     // buffer index (WR_SB / RD_RB)
    logic               slot;    // result-buffer slot (RD_RB, tree mode)
    mac_mode_e          mode;    // configuration written by PIM_WR_R
  } ext_cmd_t;

  // Host request opcodes (written to the rank as normal writes).
  typedef enum logic [2:0] {
    REQ_NOP    = 3'd0,
    REQ_WR_KV  = 3'd1,   // one host burst of the K or V vectors of one token
    REQ_WR_Q   = 3'd2,   // one host burst of the query block for query index g
    REQ_START  = 3'd3,   // start attention over len tokens
    REQ_RD_OUT = 3'd4    // read one host burst of the context output
  } req_op_e;

  typedef struct packed {
    req_op_e            op;
    logic               is_v;    // REQ_WR_KV: 0 = K region, 1 = V region
    logic [15:0]        token;   // token index (REQ_WR_KV) / length (REQ_START)
    logic [7:0]         g;       // query index within a GQA group
    logic [7:0]         burst;   // host burst index within the block
    logic [ADDR_W-1:0]  base;    // bank word address of the job's K region
    hburst_t            data;    // 64-bit bus x 8 beats, beat b in bits [64b+63:64b]
  } host_req_t;

  // Saturate a signed value to a 16-bit element.
  function automatic elem_t sat16(input logic signed [ACC_W-1:0] v);
    if (v > 40'sd32767)       return 16'sh7fff;
    else if (v < -40'sd32768) return 16'sh8000;
    else                      return v[15:0];
  endfunction

  // exp(d) for d <= 0, d in Q8.8 (17-bit signed so that differences fit),
  // result unsigned Q0.16 with 1.0 = 65536. Computed as 2^(d * log2 e):
  // t = -d * 369 (log2 e = 369/256), integer part n = t >> 16 shifts the
  // table entry, the next five fraction bits f index EXP2_LUT[f] =
  // round(65536 * 2^(-f/32)).
  localparam logic [16:0] EXP2_LUT [32] = '{17'd65536, 17'd64132, 17'd62757, 17'd61413, 17'd60097, 17'd58809, 17'd57549, 17'd56316, 17'd55109, 17'd53928, 17'd52773, 17'd51642, 17'd50535, 17'd49452, 17'd48393, 17'd47356, 17'd46341, 17'd45348, 17'd44376, 17'd43425, 17'd42495, 17'd41584, 17'd40693, 17'd39821, 17'd38968, 17'd38133, 17'd37316, 17'd36516, 17'd35734, 17'd34968, 17'd34219, 17'd33486};

  function automatic logic [16:0] exp_neg(input logic signed [16:0] d);
    logic [31:0] t;
    logic [15:0] n;
    if (d >= 0) return 17'd65536;
    t = 32'(-d) * 32'd369;
    n = t[31:16];
    if (n >= 16'd17) return '0;
    return EXP2_LUT[t[15:11]] >> n;
  endfunction

endpackage
