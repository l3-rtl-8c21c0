// tb_dram_bank -- writes random words to random addresses of the bank model and
// checks that reads return them exactly one clock later and that a read
// without enable leaves rdata unchanged.
module tb_dram_bank;
  localparam int WORDS = 256;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en = 1'b0, we = 1'b0;
  logic [7:0] addr = '0;
  logic [63:0] wdata = '0, rdata;
  logic [63:0] model [WORDS];

  dram_bank #(.WORDS(WORDS)) dut (.clk, .en, .we, .addr, .wdata, .rdata);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      en = 1'b1; we = 1'b1; addr = 8'(i); wdata = {$urandom, $urandom};
      model[i] = wdata;
    end
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      if ($urandom_range(3, 0) == 0) begin
        en = 1'b1; we = 1'b1; addr = 8'($urandom); wdata = {$urandom, $urandom};
        model[addr] = wdata;
      end else begin
        automatic logic [7:0] a = 8'($urandom);
        en = 1'b1; we = 1'b0; addr = a;
        @(negedge clk);
        en = 1'b0;
        checks++;
        if (rdata !== model[a]) begin
          failures++; $display("FAIL addr %0d got %h exp %h", a, rdata, model[a]);
        end
        @(negedge clk);
        checks++;
        if (rdata !== model[a]) begin failures++; $display("FAIL rdata not held"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
