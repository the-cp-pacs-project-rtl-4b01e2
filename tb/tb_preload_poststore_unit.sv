// tb_preload_poststore_unit: self-checking test of preload/poststore issue.
//
// The testbench stands in for the register file (pending bits, register
// values) and for memory (a 256-word array answering reads in order after a
// fixed 20-cycle latency, with a randomly withheld ready). It issues a
// stream of preloads and poststores without waiting and checks that every
// preload's data lands in the physical register named at issue, that
// poststores write the right words, that many preloads are in flight at
// once (issue does not wait for memory), that issue stops when QDEPTH
// preloads are outstanding, and that a register awaiting a preload blocks
// a second access to it.
module tb_preload_poststore_unit;
  import cppacs_pkg::*;
  localparam int QDEPTH = 16, PW = 7, AW = 8, LAT = 20;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ls_valid, ls_ready, ls_pending, pend_set, pl_we, mem_valid, mem_ready, mem_we, rsp_valid;
  ls_op_t ls_op;
  logic [AW-1:0] ls_addr, mem_addr;
  logic [PW-1:0] ls_preg, pend_preg, pl_preg;
  logic [63:0] ls_data, pl_data, mem_wdata, rsp_data;
  logic [$clog2(QDEPTH+1)-1:0] outstanding;

  preload_poststore_unit #(.QDEPTH(QDEPTH), .PW(PW), .AW(AW)) dut (.*);

  int checks = 0, failures = 0;
  logic [63:0] mem [256];
  logic [63:0] regs [128];
  logic [127:0] pend;
  // memory read pipeline
  logic [LAT-1:0] pv;
  logic [63:0] pd [LAT];
  logic ready_en;
  int max_out = 0, full_stalls = 0, pend_stalls = 0;

  assign mem_ready  = ready_en;
  assign ls_pending = pend[ls_preg];
  assign ls_data    = regs[ls_preg];
  assign rsp_valid  = pv[LAT-1];
  assign rsp_data   = pd[LAT-1];

  always @(posedge clk) begin
    pv <= rst_n ? {pv[LAT-2:0], mem_valid && mem_ready && !mem_we} : '0;
    pd[0] <= mem[mem_addr];
    for (int k = 1; k < LAT; k++) pd[k] <= pd[k-1];
    if (mem_valid && mem_ready && mem_we) mem[mem_addr] <= mem_wdata;
    if (rst_n && pend_set) pend[pend_preg] <= 1'b1;
    if (rst_n && pl_we) begin
      regs[pl_preg] <= pl_data;
      pend[pl_preg] <= 1'b0;
      checks++;
      if (!pend[pl_preg]) begin failures++; $display("FAIL preload to non-pending reg %0d", pl_preg); end
    end
    if (rst_n && int'(outstanding) > max_out) max_out = int'(outstanding);
    if (ls_valid && !ls_ready && int'(outstanding) == QDEPTH && ls_op == OP_PRELOAD) full_stalls++;
    if (ls_valid && !ls_ready && ls_pending) pend_stalls++;
  end

  task automatic issue(ls_op_t op, int preg, int addr);
    ls_valid = 1; ls_op = op; ls_preg = PW'(preg); ls_addr = AW'(addr);
    do @(posedge clk); while (!ls_ready);
    #1 ls_valid = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ls_valid = 0; ls_op = OP_PRELOAD; ls_preg = 0; ls_addr = 0; ready_en = 1;
    pend = '0;
    for (int i = 0; i < 256; i++) mem[i] = 64'hC0DE_0000_0000_0000 | 64'(i * 7);
    for (int i = 0; i < 128; i++) regs[i] = 64'h5EED_0000_0000_0000 | 64'(i);
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    // 40 back-to-back preloads to distinct registers: the queue fills.
    for (int i = 0; i < 40; i++) issue(OP_PRELOAD, 8 + i, i);
    // A preload into a register still pending must wait.
    issue(OP_PRELOAD, 8 + 39, 100);
    repeat (LAT + 5) @(posedge clk); #1;
    for (int i = 0; i < 39; i++) begin
      checks++;
      if (regs[8 + i] !== mem[i]) begin failures++; $display("FAIL reg %0d = %h", 8 + i, regs[8 + i]); end
    end
    checks++;
    if (regs[47] !== mem[100]) begin failures++; $display("FAIL second preload into reg 47"); end

    // Poststores of registers into memory, with memory ready toggling.
    fork
      begin
        for (int i = 0; i < 30; i++) issue(OP_POSTSTORE, 8 + i, 128 + i);
      end
      begin
        repeat (60) begin @(posedge clk); #2 ready_en = ($urandom_range(0, 2) != 0); end
        ready_en = 1;
      end
    join
    @(posedge clk); #1;
    for (int i = 0; i < 30; i++) begin
      checks++;
      if (mem[128 + i] !== regs[8 + i]) begin failures++; $display("FAIL poststore %0d", i); end
    end

    // Issue rate and overlap.
    checks++;
    if (max_out != QDEPTH) begin failures++; $display("FAIL max outstanding %0d", max_out); end
    checks++;
    if (full_stalls == 0) begin failures++; $display("FAIL queue-full stall never seen"); end
    checks++;
    if (pend_stalls == 0) begin failures++; $display("FAIL pending-register stall never seen"); end
    $display("max outstanding %0d, full stalls %0d, pending stalls %0d", max_out, full_stalls, pend_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
