// tb_rankset_arbiter -- drives random transfer requests and busy flags for
// four ranksets and compares the grant, the transfer count and the overlap
// count cycle by cycle with a reference model of the rules: a grant goes only
// to a requesting, idle rankset, is held while its request stays high, and
// passes round-robin. Also checks that every rankset got a grant and that
// overlap (a transfer while another rankset computes) happened.
module tb_rankset_arbiter;
  localparam int N = 4;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n = 1'b0, xfer_active = 1'b0;
  logic [N-1:0] xfer_req = '0, rs_busy = '0, grant;
  logic [31:0] overlap, transfers;
  logic [N-1:0] m_grant;
  int m_last, m_overlap, m_transfers;
  int granted [N];

  rankset_arbiter #(.N_RANKSETS(N)) dut (.clk, .rst_n, .xfer_req, .rs_busy, .xfer_active,
    .grant, .overlap, .transfers);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    m_grant = '0; m_last = N - 1; m_overlap = 0; m_transfers = 0;
    for (int r = 0; r < N; r++) granted[r] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      // A granted rankset keeps its request for a few cycles, then drops it.
      for (int r = 0; r < N; r++) begin
        if (grant[r]) xfer_req[r] = ($urandom_range(7, 0) != 0);
        else if (!xfer_req[r]) xfer_req[r] = ($urandom_range(15, 0) == 0);
        rs_busy[r] = grant[r] ? 1'b0 : ($urandom_range(2, 0) == 0);
      end
      xfer_active = (grant != '0) && ($urandom_range(1, 0) == 1);
      // Reference model, evaluated before the edge.
      if (m_grant != '0 && (m_grant & xfer_req) != '0) begin
        m_transfers++;
        if (xfer_active && (rs_busy & ~m_grant) != '0) m_overlap++;
      end else begin
        automatic logic [N-1:0] ng = '0;
        for (int i = 1; i <= N; i++) begin
          automatic int r = (m_last + i) % N;
          if (ng == '0 && xfer_req[r] && !rs_busy[r]) begin ng[r] = 1'b1; m_last = r; end
        end
        m_grant = ng;
      end
      @(posedge clk); #1;
      checks++;
      if (grant !== m_grant || transfers != 32'(m_transfers) || overlap != 32'(m_overlap)) begin
        failures++;
        $display("FAIL cycle %0d grant %b/%b transfers %0d/%0d overlap %0d/%0d", n, grant, m_grant,
          transfers, m_transfers, overlap, m_overlap);
      end
      for (int r = 0; r < N; r++) if (grant[r]) granted[r]++;
    end
    for (int r = 0; r < N; r++) begin
      checks++;
      if (granted[r] == 0) begin failures++; $display("FAIL rankset %0d never granted", r); end
    end
    checks++;
    if (overlap == 0) begin failures++; $display("FAIL no overlap"); end
    $display("arbiter: transfers %0d overlap %0d", transfers, overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
