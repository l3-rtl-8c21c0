// tb_rank_sram -- random writes and reads of the score SRAM against a model,
// checking the one-cycle read latency.
module tb_rank_sram;
  localparam int DEPTH = 512, WIDTH = 64;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en = 1'b0, we = 1'b0;
  logic [8:0] addr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  logic [WIDTH-1:0] model [DEPTH];

  rank_sram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.clk, .en, .we, .addr, .wdata, .rdata);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      en = 1'b1; we = 1'b1; addr = 9'(i); wdata = {$urandom, $urandom};
      model[i] = wdata;
    end
    for (int n = 0; n < 600; n++) begin
      automatic logic [8:0] a = 9'($urandom);
      @(negedge clk);
      if (n % 3 == 0) begin
        en = 1'b1; we = 1'b1; addr = a; wdata = {$urandom, $urandom}; model[a] = wdata;
      end else begin
        en = 1'b1; we = 1'b0; addr = a;
        @(negedge clk);
        en = 1'b0;
        checks++;
        if (rdata !== model[a]) begin failures++; $display("FAIL addr %0d", a); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
