// tb_nia: self-checking test of the Remote DMA network interface.
//
// The NIA's network output is looped back to its own input through the
// testbench, so a remote DMA put copies a block within one memory (a
// testbench array answering reads after 8 cycles). The testbench checks
// every flit against the packet format it builds itself (head with the
// destination, address, length, data most significant half first, tail on
// the last flit), that the copied block matches the source, that the data
// part streams at one flit per cycle (the 300 MB/s link rate) when nothing
// holds it back, and that the copy is still correct under random
// back-pressure on the network.
module tb_nia;
  import cppacs_pkg::*;
  localparam int AW = 12, LAT = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, send_done, recv_done;
  rdma_cmd_t cmd;
  logic out_valid, out_ready, in_valid, in_ready;
  flit_t out_flit, in_flit;
  logic mem_valid, mem_ready, mem_we, rsp_valid;
  logic [AW-1:0] mem_addr;
  logic [63:0] mem_wdata, rsp_data;

  nia #(.AW(AW)) dut (.*);

  int checks = 0, failures = 0;
  logic [63:0] mem [1 << AW];
  logic [LAT-1:0] pv;
  logic [63:0] pd [LAT];
  logic bp_en;      // random back-pressure on the loop
  logic gate;

  // loopback with optional back-pressure
  always @(posedge clk) gate <= bp_en ? ($urandom_range(0, 2) == 0) : 1'b1;
  assign in_valid  = out_valid && gate;
  assign out_ready = in_ready && gate;
  assign in_flit   = out_flit;

  assign mem_ready = 1'b1;
  assign rsp_valid = pv[LAT-1];
  assign rsp_data  = pd[LAT-1];
  always @(posedge clk) begin
    pv <= rst_n ? {pv[LAT-2:0], mem_valid && !mem_we} : '0;
    pd[0] <= mem[mem_addr];
    for (int k = 1; k < LAT; k++) pd[k] <= pd[k-1];
    if (mem_valid && mem_we) mem[mem_addr] <= mem_wdata;
  end

  // expected flit stream
  flit_t exp_q [$];
  longint cyc = 0, first_data = -1, tail_cyc = -1;
  int nflit = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid && out_ready) begin
      flit_t e;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected flit"); end
      else begin
        e = exp_q.pop_front();
        if (out_flit !== e) begin failures++; $display("FAIL flit %0d: %h exp %h", nflit, out_flit, e); end
      end
      if (nflit == 4) first_data = cyc;
      if (out_flit.tail) tail_cyc = cyc;
      nflit++;
    end
  end

  task automatic put(coord_t d, int src, int dst, int len);
    exp_q.push_back('{head: 1'b1, tail: 1'b0, data: FLIT_W'(d)});
    exp_q.push_back('{head: 1'b0, tail: 1'b0, data: 16'(dst >> 16)});
    exp_q.push_back('{head: 1'b0, tail: 1'b0, data: 16'(dst)});
    exp_q.push_back('{head: 1'b0, tail: (len == 0), data: 16'(len)});
    for (int w = 0; w < len; w++)
      for (int h = 0; h < 4; h++)
        exp_q.push_back('{head: 1'b0, tail: (w == len-1 && h == 3),
                          data: mem[src + w][63 - 16*h -: 16]});
    nflit = 0;
    cmd = '{dest: d, src: 32'(src), dst: 32'(dst), len: 16'(len)};
    cmd_valid = 1;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 0;
    fork
      begin @(posedge send_done); end
      begin @(posedge recv_done); end
    join
    repeat (3) @(posedge clk); #1;
    for (int w = 0; w < len; w++) begin
      checks++;
      if (mem[dst + w] !== mem[src + w]) begin failures++; $display("FAIL word %0d copied %h exp %h", w, mem[dst+w], mem[src+w]); end
    end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d flits never sent", exp_q.size()); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd_valid = 0; cmd = '0; bp_en = 0;
    for (int i = 0; i < (1 << AW); i++) mem[i] = {$urandom, $urandom};
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    put('{x: 3'd1, y: 5'd2, z: 4'd3}, 16, 1024, 64);
    // data part streams at one flit per cycle
    checks++;
    if (tail_cyc - first_data != 4 * 64 - 1) begin
      failures++; $display("FAIL data took %0d cycles for %0d flits", tail_cyc - first_data + 1, 4 * 64);
    end
    $display("64-word put: %0d data flits in %0d cycles", 4 * 64, tail_cyc - first_data + 1);
    bp_en = 1;
    put('{x: 3'd7, y: 5'd16, z: 4'd15}, 200, 2048, 37);
    put('{x: 3'd0, y: 5'd0, z: 4'd0}, 300, 3000, 1);
    bp_en = 0;
    put('{x: 3'd2, y: 5'd5, z: 4'd9}, 400, 3500, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
