// dram_bank -- BEHAVIOURAL MODEL of one DRAM bank inside a PIM DRAM chip.
//
// The real part is a DRAM cell array built in a DRAM process; it has no
// synthesizable equivalent, so this model stands in for it: an array of 64-bit
// words (one x8-chip burst each) with one port. A read (en=1, we=0) returns
// the word one clock later on rdata; a write (en=1, we=1) stores wdata at the
// clock edge. Row activation and precharge are not modelled here: the PIM
// controller spaces its commands by tRP + tRCD whenever a stream enters a new
// row. WORDS is far below a real bank (about 256 MB in the evaluated system)
// so that a full-size array of ranks fits in simulator memory.
module dram_bank #(
  parameter int WORDS  = 16384,
  parameter int ADDR_W = $clog2(WORDS)
) (
  input  logic              clk,
  input  logic              en,
  input  logic              we,
  input  logic [ADDR_W-1:0] addr,
  input  logic [63:0]       wdata,
  output logic [63:0]       rdata
);
  logic [63:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
