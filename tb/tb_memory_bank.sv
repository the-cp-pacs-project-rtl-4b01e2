// tb_memory_bank: self-checking test of one main-memory bank.
//
// Writes random words to random addresses of a 4096-word bank, keeps a
// reference copy, and reads addresses back, checking that the data appears
// one cycle after the read and holds while the bank is idle.
module tb_memory_bank;
  localparam int WORDS = 4096;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en, we;
  logic [11:0] addr;
  logic [63:0] wdata, rdata;
  memory_bank #(.WORDS(WORDS)) dut (.*);

  int checks = 0, failures = 0;
  logic [63:0] model [WORDS];
  logic [WORDS-1:0] known;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; we = 0; addr = 0; wdata = 0; known = '0;
    @(posedge clk); #1;
    for (int i = 0; i < 2000; i++) begin
      en = 1; we = 1; addr = 12'($urandom); wdata = {$urandom, $urandom};
      model[addr] = wdata; known[addr] = 1'b1;
      @(posedge clk); #1;
    end
    for (int i = 0; i < 3000; i++) begin
      logic [11:0] a;
      a = 12'($urandom);
      if (!known[a]) continue;
      en = 1; we = 0; addr = a;
      @(posedge clk); #1;
      en = 0; addr = ~a;
      checks++;
      if (rdata !== model[a]) begin failures++; $display("FAIL addr %0d: %h vs %h", a, rdata, model[a]); end
      @(posedge clk); #1;
      checks++;
      if (rdata !== model[a]) begin failures++; $display("FAIL hold addr %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
