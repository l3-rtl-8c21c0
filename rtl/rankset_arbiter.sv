// rankset_arbiter -- rankset-granular sharing of the memory channels.
//
// Ranks on one channel share its bus, so only one of them can exchange data
// with the host at a time. A rankset is one rank of every channel; granting
// the channel buses to one rankset at a time lets that rankset load KV, query
// and output data at full channel width while all other ranksets keep
// computing attention. The arbiter grants one rankset whose host transfer is
// pending (xfer_req) and which is not computing (rs_busy); the grant is held
// until xfer_req drops, then passes round-robin to the next requester.
// grant is one-hot (or zero) and registered. overlap counts cycles in which a
// rankset transfers data (xfer_active) while at least one other rankset
// computes; transfers counts granted cycles. The rankset unit and the overlap
// are the paper's; the round-robin policy is this design's choice.
// Lint: The loop variable r is an int reduced modulo N_RANKSETS; lint reports its unused
// upper bits. The handshake assertion samples rst_n synchronously in its disable
// clause, which lint reports as a signal used both asynchronously and synchronously.
module rankset_arbiter #(
  parameter int N_RANKSETS = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [N_RANKSETS-1:0] xfer_req,
  input  logic [N_RANKSETS-1:0] rs_busy,
  input  logic                  xfer_active,
  output logic [N_RANKSETS-1:0] grant,
  output logic [31:0]           overlap,
  output logic [31:0]           transfers
);
  localparam int RW = (N_RANKSETS > 1) ? $clog2(N_RANKSETS) : 1;
  logic [RW-1:0] last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      grant <= '0;
      last  <= RW'(N_RANKSETS - 1);
      overlap <= '0;
      transfers <= '0;
    end else begin
      if (grant != '0 && (grant & xfer_req) != '0) begin
        transfers <= transfers + 32'd1;
        if (xfer_active && (rs_busy & ~grant) != '0) overlap <= overlap + 32'd1;
      end else begin
        automatic logic found = 1'b0;
        grant <= '0;
        for (int i = 1; i <= N_RANKSETS; i++) begin
          automatic int r = (int'(last) + i) % N_RANKSETS;
          if (!found && xfer_req[r] && !rs_busy[r]) begin
            found    = 1'b1;
            grant[r] <= 1'b1;
            last     <= RW'(r);
          end
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant));
endmodule
