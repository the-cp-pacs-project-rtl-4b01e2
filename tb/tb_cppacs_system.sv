// tb_cppacs_system: end-to-end test of the node array and Hyper Crossbar.
//
// Runs the whole system at a reduced size (NX x NY x NZ PUs plus the I/O
// plane, small memories; the sizes are parameters of this testbench). The
// testbench plays every PU's core and every I/O unit. It fills each PU's
// memory through register writes and poststores, then makes remote DMA
// puts that cross one crossbar (x), two (x, y), three (x, y, z) and only z,
// two puts that contend for the same destination, a put from a PU to an
// I/O unit and one from an I/O unit to a PU, and, with the y network
// bisected, a put that must be discarded and one to the I/O unit that must
// still pass. Every destination block is read back with preloads and
// compared with values computed here. Counted mechanisms, each of which
// must occur: crossbar traversals in x, y and z, network back-pressure,
// bisection violation, storage-controller bank conflict, register stall
// on a pending preload, window slides and I/O-unit traffic both ways.
// Every wait is bounded: a transfer that does not arrive within TMO
// cycles counts as a failure and the test goes on.
module tb_cppacs_system;
  import cppacs_pkg::*;
  localparam int NX = 4, NY = 4, NZ = 4, MW = 1024, L = 16;
  localparam int NPU = NX * NY * NZ, NIOU = NX * NZ, NYT = NY + 1;
  localparam int TMO = 1500;  // longest wait for one transfer, in cycles
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic split_x, split_y, split_z, partition_violation, mem_conflict;
  pu_cpu_in_t  ci [NPU];
  pu_cpu_out_t co [NPU];
  logic [NIOU-1:0] io_ov, io_or, io_iv, io_ir;
  flit_t io_of [NIOU];
  flit_t io_if [NIOU];

  cppacs_system #(.NX(NX), .NY(NY), .NZ(NZ), .MEM_WORDS(MW)) dut (
    .clk, .rst_n, .split_x, .split_y, .split_z,
    .cpu_in(ci), .cpu_out(co),
    .iou_out_valid(io_ov), .iou_out_ready(io_or), .iou_out_flit(io_of),
    .iou_in_valid(io_iv), .iou_in_ready(io_ir), .iou_in_flit(io_if),
    .partition_violation, .mem_conflict);

  int checks = 0, failures = 0;
  int n_dim [1:3] = '{0, 0, 0};
  int backpressure = 0, violations = 0, conflicts = 0, stalls = 0, slides = 0;
  int iou_rx_pk = 0, iou_tx_pk = 0;
  int recvs [NPU];

  function automatic int pu(int x, int y, int z);
    return (x * NY + y) * NZ + z;
  endfunction
  function automatic int nd(int x, int y, int z);
    return (x * NYT + y) * NZ + z;
  endfunction
  function automatic logic [63:0] h(int p, int i);
    return {16'hB0B0, 16'(p), 32'(i * 2654435761)};
  endfunction

  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < NX * NYT * NZ; n++)
      for (int k = 0; k < 4; k++) begin
        if (k > 0 && dut.e_in_valid[n][k] && dut.e_in_ready[n][k] && dut.e_in_flit[n][k].head)
          n_dim[k]++;
        if (dut.e_in_valid[n][k] && !dut.e_in_ready[n][k]) backpressure++;
      end
    if (partition_violation) violations++;
    if (mem_conflict) conflicts++;
    for (int p = 0; p < NPU; p++) if (co[p].recv_done) recvs[p]++;
  end

  // ---------------- core-side tasks -------------------------------------
  task automatic wr(int p, int l, logic [63:0] d);
    ci[p].wr_lreg = 5'(l); ci[p].wr_data = d; ci[p].wr_valid = 1; #1;
    while (co[p].wr_busy) begin @(posedge clk); #1; end
    @(posedge clk); #1 ci[p].wr_valid = 0;
  endtask
  task automatic ls(int p, ls_op_t op, int l, int delta, int addr);
    ci[p].ls_op = op; ci[p].ls_lreg = 5'(l); ci[p].ls_delta = 8'(delta);
    ci[p].ls_addr = 32'(addr); ci[p].ls_valid = 1;
    do @(posedge clk); while (!co[p].ls_ready);
    #1 ci[p].ls_valid = 0;
  endtask
  task automatic slide(int p);
    ci[p].slide_amt = 7'd1; ci[p].slide_valid = 1;
    @(posedge clk); #1 ci[p].slide_valid = 0;
    slides++;
  endtask
  task automatic rd(int p, int l, output logic [63:0] d);
    ci[p].rs1 = 5'(l); #1;
    while (co[p].rs1_busy) begin stalls++; @(posedge clk); #1; end
    d = co[p].rs1_data;
  endtask
  task automatic fill(int p);
    // store h(p, i) at address i, one window slide per word
    for (int i = 0; i < L; i++) begin
      wr(p, 20, h(p, i));
      ls(p, OP_POSTSTORE, 20, 0, i);
      slide(p);
    end
  endtask
  task automatic check_block(int p, int base, int srcp, string what);
    for (int i = 0; i < L; i++) begin
      logic [63:0] d;
      ls(p, OP_PRELOAD, 31, 0, base + i);
      rd(p, 31, d);
      checks++;
      if (d !== h(srcp, i)) begin failures++; $display("FAIL %s word %0d = %h exp %h", what, i, d, h(srcp, i)); end
    end
  endtask
  task automatic put(int p, int dx, int dy, int dz, int dst);
    ci[p].rdma = '{dest: '{x: XW'(dx), y: YW'(dy), z: ZW'(dz)}, src: 32'd0, dst: 32'(dst), len: 16'(L)};
    ci[p].rdma_valid = 1;
    for (int t = 0; t < TMO; t++) begin
      @(posedge clk);
      if (co[p].rdma_ready) break;
    end
    #1 ci[p].rdma_valid = 0;
  endtask
  // wait at most TMO cycles for PU q to have received n transfers
  task automatic wait_recv(int q, int n, string what);
    for (int t = 0; t < TMO && recvs[q] < n; t++) @(posedge clk);
    checks++;
    if (recvs[q] < n) begin failures++; $display("FAIL %s never arrived", what); end
    @(posedge clk); #1;
  endtask
  task automatic put_wait(int p, int dx, int dy, int dz, int dst, int q);
    int r0;
    r0 = recvs[q];
    put(p, dx, dy, dz, dst);
    wait_recv(q, r0 + 1, $sformatf("put to PU %0d", q));
  endtask

  // ---------------- I/O unit models ---------------------------------------
  // receive: collect a packet and compare its words with h(srcp, i)
  task automatic iou_receive(int i, int srcp);
    flit_t fl [$];
    io_ir[i] = 1;
    for (int t = 0; t < TMO; t++) begin
      @(posedge clk);
      if (io_iv[i]) fl.push_back(io_if[i]);
      if (io_iv[i] && io_if[i].tail) break;
    end
    #1;
    iou_rx_pk++;
    checks++;
    if (fl.size() != 4 + 4 * L || !fl[0].head || fl[3].data != 16'(L)) begin
      failures++; $display("FAIL IOU %0d packet of %0d flits", i, fl.size());
    end else
      for (int w = 0; w < L; w++) begin
        checks++;
        if ({fl[4+4*w].data, fl[5+4*w].data, fl[6+4*w].data, fl[7+4*w].data} !== h(srcp, w)) begin
          failures++; $display("FAIL IOU %0d word %0d", i, w);
        end
      end
  endtask
  // send: a put of h(NPU + i, w) to PU (dx, dy, dz) address dst
  task automatic iou_send(int i, int dx, int dy, int dz, int dst);
    flit_t fl [$];
    coord_t d;
    d = '{x: XW'(dx), y: YW'(dy), z: ZW'(dz)};
    fl.push_back('{head: 1'b1, tail: 1'b0, data: FLIT_W'(d)});
    fl.push_back('{head: 1'b0, tail: 1'b0, data: 16'(dst >> 16)});
    fl.push_back('{head: 1'b0, tail: 1'b0, data: 16'(dst)});
    fl.push_back('{head: 1'b0, tail: 1'b0, data: 16'(L)});
    for (int w = 0; w < L; w++)
      for (int k = 0; k < 4; k++)
        fl.push_back('{head: 1'b0, tail: (w == L-1 && k == 3), data: h(NPU + i, w)[63-16*k -: 16]});
    foreach (fl[k]) begin
      io_ov[i] = 1; io_of[i] = fl[k];
      for (int t = 0; t < TMO; t++) begin
        @(posedge clk);
        if (io_or[i]) break;
      end
      #1;
    end
    io_ov[i] = 0;
    iou_tx_pk++;
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    split_x = 0; split_y = 0; split_z = 0;
    io_ov = '0; io_ir = '0;
    for (int i = 0; i < NIOU; i++) io_of[i] = '0;
    for (int p = 0; p < NPU; p++) begin ci[p] = '0; recvs[p] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    // fill every PU's memory in parallel
    for (int p = 0; p < NPU; p++) begin
      automatic int pp = p;
      fork fill(pp); join_none
    end
    wait fork;

    // one, two and three crossbars; z only
    put_wait(pu(0,0,0), 1, 0, 0, 100, pu(1,0,0));
    check_block(pu(1,0,0), 100, pu(0,0,0), "x put");
    put_wait(pu(0,0,0), 1, 1, 0, 200, pu(1,1,0));
    check_block(pu(1,1,0), 200, pu(0,0,0), "xy put");
    put_wait(pu(0,0,0), 1, 1, 1, 300, pu(1,1,1));
    check_block(pu(1,1,1), 300, pu(0,0,0), "xyz put");
    put_wait(pu(0,1,1), 0, 1, 0, 400, pu(0,1,0));
    check_block(pu(0,1,0), 400, pu(0,1,1), "z put");

    // contention: two sources, one destination, while that PU preloads
    fork
      put(pu(1,0,0), 1, 1, 0, 500);
      put(pu(0,1,0), 1, 1, 0, 600);
      for (int i = 0; i < 30; i++) ls(pu(1,1,0), OP_PRELOAD, 24, 0, 700 + (i % 4) * 8);
    join
    wait_recv(pu(1,1,0), 3, "contended puts");
    @(posedge clk); #1;
    check_block(pu(1,1,0), 500, pu(1,0,0), "contended put A");
    check_block(pu(1,1,0), 600, pu(0,1,0), "contended put B");

    // PU -> I/O unit and I/O unit -> PU
    fork
      put(pu(1,1,1), 1, NY, 1, 0);
      iou_receive(1 * NZ + 1, pu(1,1,1));
    join
    begin
      int r0;
      r0 = recvs[pu(0,0,1)];
      iou_send(0, 0, 0, 1, 800);
      wait_recv(pu(0,0,1), r0 + 1, "IOU put");
      check_block(pu(0,0,1), 800, NPU + 0, "IOU put");
    end

    // bisection of y: PU y=0 -> y=NY/2 is discarded, y=0 -> I/O still passes
    split_y = 1;
    begin
      int r0;
      r0 = recvs[pu(0,NY/2,0)];
      put(pu(0,0,0), 0, NY/2, 0, 900);
      repeat (4 * L + 40) @(posedge clk); #1;
      checks++;
      if (recvs[pu(0,NY/2,0)] != r0) begin failures++; $display("FAIL packet crossed the split"); end
    end
    fork
      put(pu(0,0,0), 0, NY, 0, 0);
      iou_receive(0, pu(0,0,0));
    join
    split_y = 0;

    $display("crossbar heads x %0d y %0d z %0d, backpressure %0d, violations %0d, conflicts %0d, stalls %0d, slides %0d, iou rx %0d tx %0d",
             n_dim[1], n_dim[2], n_dim[3], backpressure, violations, conflicts, stalls, slides, iou_rx_pk, iou_tx_pk);
    checks++; if (n_dim[1] == 0) begin failures++; $display("FAIL no x traversal"); end
    checks++; if (n_dim[2] == 0) begin failures++; $display("FAIL no y traversal"); end
    checks++; if (n_dim[3] == 0) begin failures++; $display("FAIL no z traversal"); end
    checks++; if (backpressure == 0) begin failures++; $display("FAIL no back-pressure"); end
    checks++; if (violations == 0) begin failures++; $display("FAIL no bisection violation"); end
    checks++; if (conflicts == 0) begin failures++; $display("FAIL no bank conflict"); end
    checks++; if (stalls == 0) begin failures++; $display("FAIL no register stall"); end
    checks++; if (slides == 0) begin failures++; $display("FAIL no window slide"); end
    checks++; if (iou_rx_pk == 0 || iou_tx_pk == 0) begin failures++; $display("FAIL no I/O traffic"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
