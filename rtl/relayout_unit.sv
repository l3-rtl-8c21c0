// relayout_unit -- hybrid-grained re-layout between the host's DIMM layout and
// the PIM layout of the DRAM chips.
//
// On a plain DIMM a 64-bit bus beat carries four FP16-sized elements and each
// element is split over two x8 chips, so no chip ever holds a whole element.
// This unit buffers one block of G = N_CHIPS/N_HC heads (G*E_H elements) and
// re-arranges it at two grains:
//   * coarse grain (head mapping): each head is spread over N_HC chips; chip c
//     serves head c div N_HC and holds its elements r, r+N_HC, r+2*N_HC, ...
//     with r = c mod N_HC. Chip burst k, element slot j of chip c therefore
//     carries head element r + N_HC*(4k + j).
//   * fine grain (bit placement): within a chip burst of 8 beats x 8 bits, the
//     two bytes of element slot j travel in beats 2j (low byte) and 2j+1 (high
//     byte), so every element lands whole in one chip. `beats` shows the
//     physical 64-bit bus: beat b, byte lane c = byte b of chip c's word.
// Offload: write host bursts (h_we, 32 elements each, element i in bits
// [16i+15:16i]), then read chip bursts 0..WPT-1 by c_ridx. Onload does the
// reverse: write chip bursts (c_we) and read host bursts (h_ridx).
// Writes take effect at the clock edge; all reads are combinational.
// The two grains and the N_HC = 8 / N_HC = 1 mappings follow the paper's
// figure; the byte order within an element is this design's choice.
module relayout_unit
  import chime_pkg::*;
#(
  parameter int N_CHIPS = 8,
  parameter int E_H     = 128,
  parameter int N_HC    = 8,
  localparam int G      = N_CHIPS / N_HC,
  localparam int BLK    = G * E_H,
  localparam int NB     = BLK / 32,
  localparam int WPT    = E_H / (N_HC * EPW)
) (
  input  logic        clk,
  input  logic        h_we,
  input  logic [7:0]  h_widx,
  input  hburst_t     h_wdata,
  input  logic [7:0]  h_ridx,
  output hburst_t     h_rdata,
  input  logic        c_we,
  input  logic [7:0]  c_widx,
  input  logic [63:0] c_wdata [N_CHIPS],
  input  logic [7:0]  c_ridx,
  output logic [63:0] c_rdata [N_CHIPS],
  output logic [63:0] beats   [8]
);
  elem_t buffer [BLK];

  // Host-order position of element slot j of chip c in chip burst k.
  function automatic int pos(input int c, input int k, input int j);
    return (c / N_HC) * E_H + (c % N_HC) + N_HC * (EPW * k + j);
  endfunction

  always_ff @(posedge clk) begin
    if (h_we && int'(h_widx) < NB)
      for (int i = 0; i < 32; i++) buffer[int'(h_widx) * 32 + i] <= h_wdata[16*i +: 16];
    else if (c_we && int'(c_widx) < WPT)
      for (int c = 0; c < N_CHIPS; c++)
        for (int j = 0; j < EPW; j++) buffer[pos(c, int'(c_widx), j)] <= c_wdata[c][16*j +: 16];
  end

  always_comb begin
    h_rdata = '0;
    if (int'(h_ridx) < NB)
      for (int i = 0; i < 32; i++) h_rdata[16*i +: 16] = buffer[int'(h_ridx) * 32 + i];
    for (int c = 0; c < N_CHIPS; c++) begin
      c_rdata[c] = '0;
      if (int'(c_ridx) < WPT)
        for (int j = 0; j < EPW; j++) c_rdata[c][16*j +: 16] = buffer[pos(c, int'(c_ridx), j)];
    end
    for (int b = 0; b < 8; b++) begin
      beats[b] = '0;
      for (int c = 0; c < N_CHIPS && c < 8; c++) beats[b][8*c +: 8] = c_rdata[c][8*b +: 8];
    end
  end
endmodule
