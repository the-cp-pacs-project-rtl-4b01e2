// tb_processing_unit: one node running a pseudo-vector loop and a remote DMA.
//
// The testbench plays the processor core. It first stores a 64-element
// vector x into memory (register writes and poststores), then runs the loop
// y[i] = 3*x[i] + 1 the way slide-windowed code does: in iteration i
// (window i) it preloads x[i+K] into logical register 31 of the window K
// ahead, reads x[i] from logical register 31 of the current window, writes
// y[i] to logical register 20, poststores logical register 20 of the window
// P back (y[i-P]) and slides the window by one. The loop runs with K = 1
// (the core often waits on a busy register) and with K = 12 (memory latency
// hidden), and the test checks that the larger distance needs fewer stall
// cycles. Results are read back through preloads and compared with values
// computed here. The network port is looped back, so a remote DMA put to
// the node itself copies y to a new area, which is checked the same way
// while preloads compete with the NIA for the memory banks.
module tb_processing_unit;
  import cppacs_pkg::*;
  localparam int MW = 4096, NV = 64, P = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  pu_cpu_in_t ci;
  pu_cpu_out_t co;
  logic nov, nor_, niv, nir, conflict;
  flit_t nof, nif;

  processing_unit #(.MEM_WORDS(MW)) dut (
    .clk, .rst_n, .cpu_in(ci), .cpu_out(co),
    .net_out_valid(nov), .net_out_ready(nor_), .net_out_flit(nof),
    .net_in_valid(niv), .net_in_ready(nir), .net_in_flit(nif),
    .mem_conflict(conflict));
  assign niv = nov;
  assign nor_ = nir;
  assign nif = nof;

  int checks = 0, failures = 0, stalls = 0, conflicts = 0, sends = 0, recvs = 0;
  logic [63:0] x [NV];
  always @(posedge clk) begin
    if (conflict) conflicts++;
    if (co.send_done) sends++;
    if (co.recv_done) recvs++;
  end

  function automatic logic [63:0] f(logic [63:0] v);
    return 3 * v + 1;
  endfunction

  task automatic idle();
    ci.slide_valid = 0; ci.wr_valid = 0; ci.ls_valid = 0; ci.rdma_valid = 0;
  endtask

  task automatic wr(int l, logic [63:0] d);
    ci.wr_lreg = 5'(l); ci.wr_data = d; ci.wr_valid = 1; #1;
    while (co.wr_busy) begin @(posedge clk); #1; end
    @(posedge clk); #1 ci.wr_valid = 0;
  endtask

  task automatic ls(ls_op_t op, int l, int delta, int addr);
    ci.ls_op = op; ci.ls_lreg = 5'(l); ci.ls_delta = 8'(delta); ci.ls_addr = 32'(addr);
    ci.ls_valid = 1;
    do @(posedge clk); while (!co.ls_ready);
    #1 ci.ls_valid = 0;
  endtask

  task automatic slide(int n);
    ci.slide_amt = 7'(n); ci.slide_valid = 1;
    @(posedge clk); #1 ci.slide_valid = 0;
  endtask

  task automatic rd(int l, output logic [63:0] d);
    ci.rs1 = 5'(l); #1;
    while (co.rs1_busy) begin stalls++; @(posedge clk); #1; end
    d = co.rs1_data;
  endtask

  // Bring words mem[base..base+n-1] into registers and compare.
  task automatic check_mem(int base, int n, string what);
    for (int i = 0; i < n; i++) begin
      logic [63:0] d;
      ls(OP_PRELOAD, 25, 0, base + i);
      rd(25, d);
      checks++;
      if (d !== f(x[i])) begin failures++; $display("FAIL %s[%0d] = %h exp %h", what, i, d, f(x[i])); end
    end
  endtask

  task automatic vector_loop(int K, int ybase, output int cyc, output int st);
    int st0;
    longint t0;
    st0 = stalls;
    t0 = $time;
    for (int j = 0; j < K; j++) ls(OP_PRELOAD, 31, j, j);
    for (int i = 0; i < NV; i++) begin
      logic [63:0] v;
      if (i + K < NV) ls(OP_PRELOAD, 31, K, i + K);
      rd(31, v);
      wr(20, f(v));
      if (i >= P) ls(OP_POSTSTORE, 20, -P, ybase + i - P);
      slide(1);
    end
    for (int i = NV; i < NV + P; i++) begin
      ls(OP_POSTSTORE, 20, -P, ybase + i - P);
      slide(1);
    end
    cyc = int'(($time - t0) / 10);
    st = stalls - st0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int c1, s1, c2, s2;
    ci = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int i = 0; i < NV; i++) begin
      x[i] = {$urandom, $urandom} >> 2;
      wr(9, x[i]);
      ls(OP_POSTSTORE, 9, 0, i);
    end
    vector_loop(1, 512, c1, s1);
    check_mem(512, NV, "y(K=1)");
    vector_loop(12, 1024, c2, s2);
    check_mem(1024, NV, "y(K=12)");
    $display("K=1: %0d cycles, %0d stall cycles; K=12: %0d cycles, %0d stall cycles", c1, s1, c2, s2);
    checks++;
    if (!(s1 > 0 && s2 < s1)) begin failures++; $display("FAIL preload distance did not hide latency"); end

    // remote DMA put to this node: y -> 2048
    ci.rdma = '{dest: '0, src: 32'd1024, dst: 32'd2048, len: 16'(NV)};
    ci.rdma_valid = 1;
    do @(posedge clk); while (!co.rdma_ready);
    #1 ci.rdma_valid = 0;
    // preloads racing the NIA for memory
    for (int i = 0; i < 40; i++) ls(OP_PRELOAD, 24, 0, 3000 + (i % 8));
    wait (recvs == 1);
    repeat (4) @(posedge clk); #1;
    check_mem(2048, NV, "rdma copy");
    checks++;
    if (sends != 1 || recvs != 1) begin failures++; $display("FAIL sends %0d recvs %0d", sends, recvs); end
    checks++;
    if (conflicts == 0) begin failures++; $display("FAIL no memory conflict seen"); end
    $display("memory conflict cycles %0d", conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
