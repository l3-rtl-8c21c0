// rank_sram -- on-chip SRAM of the buffer chip (rank PU).
//
// Holds the raw scores of the running attention job between the score pass and
// the normalization pass: one WIDTH-bit entry per score burst (four Q8.8
// scores of each head group). Single port, synchronous: a write (en, we)
// stores wdata at the clock edge; a read (en, !we) returns the entry on rdata
// one cycle later. The SRAM itself is the paper's; its size and organisation
// are this design's choice (DEPTH covers 32768 tokens per job).
module rank_sram #(
  parameter int DEPTH  = 8192,
  parameter int WIDTH  = 64,
  parameter int ADDR_W = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              en,
  input  logic              we,
  input  logic [ADDR_W-1:0] addr,
  input  logic [WIDTH-1:0]  wdata,
  output logic [WIDTH-1:0]  rdata
);
  logic [WIDTH-1:0] mem [DEPTH];
  always_ff @(posedge clk)
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
endmodule
