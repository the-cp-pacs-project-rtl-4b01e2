// tb_storage_controller: self-checking test of the storage controller.
//
// Two requesters (CPU port 0, NIA port 1) issue random reads and writes to
// a 4096-word memory of 8 interleaved banks. A reference memory, updated in
// the order requests are accepted, predicts every read. The test checks
// that each read returns exactly RD_LAT cycles after acceptance and in
// order per port, that a unit-stride stream from one port is accepted every
// cycle (interleaving hides the bank busy time), that a stream hitting one
// bank is accepted only every BANK_BUSY cycles, and that both ports are
// served in the same cycle when they use different banks.
module tb_storage_controller;
  import cppacs_pkg::*;
  localparam int NB = 8, MW = 4096, BB = 4, RL = 8, AW = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [1:0] req_valid, req_ready, req_we, rsp_valid;
  logic [AW-1:0] req_addr [2];
  logic [63:0] req_wdata [2];
  logic [63:0] rsp_data [2];
  logic conflict;

  storage_controller #(.NBANKS(NB), .MEM_WORDS(MW), .BANK_BUSY(BB), .RD_LAT(RL)) dut (.*);

  int checks = 0, failures = 0;
  logic [63:0] model [MW];
  // expected responses per port: data and due cycle
  logic [63:0] exp_d [2][$];
  longint      exp_t [2][$];
  longint cyc = 0;
  int accepted [2] = '{0, 0};
  int both_same_cycle = 0, conflicts = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      // responses
      for (int r = 0; r < 2; r++) if (rsp_valid[r]) begin
        checks++;
        if (exp_d[r].size() == 0) begin failures++; $display("FAIL port %0d unexpected response", r); end
        else begin
          logic [63:0] d; longint t;
          d = exp_d[r].pop_front(); t = exp_t[r].pop_front();
          if (rsp_data[r] !== d || cyc != t) begin
            failures++;
            $display("FAIL port %0d data %h exp %h at %0d exp %0d", r, rsp_data[r], d, cyc, t);
          end
        end
      end
      // accepted requests, in port order (port order within a cycle only
      // matters for the same bank, which cannot both be granted)
      for (int r = 0; r < 2; r++) if (req_valid[r] && req_ready[r]) begin
        accepted[r]++;
        if (req_we[r]) model[req_addr[r]] = req_wdata[r];
        else begin
          exp_d[r].push_back(model[req_addr[r]]);
          exp_t[r].push_back(cyc + RL);
        end
      end
      if (&(req_valid & req_ready)) both_same_cycle++;
      if (conflict) conflicts++;
    end
  end

  task automatic stream(int r, int n, int stride, output int cycles);
    int start;
    start = int'(cyc);
    for (int i = 0; i < n; i++) begin
      req_valid[r] = 1; req_we[r] = 0; req_addr[r] = AW'(i * stride);
      do @(posedge clk); while (!req_ready[r]);
      #1;
    end
    req_valid[r] = 0;
    cycles = int'(cyc) - start;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic random_traffic(int rr);
    for (int i = 0; i < 1500; i++) begin
      req_valid[rr] = ($urandom_range(0, 3) != 0);
      req_we[rr]    = ($urandom_range(0, 2) == 0);
      req_addr[rr]  = AW'($urandom);
      req_wdata[rr] = {$urandom, $urandom};
      if (req_valid[rr]) do @(posedge clk); while (!req_ready[rr]);
      else @(posedge clk);
      #1;
    end
    req_valid[rr] = 0;
  endtask

  initial begin
    int c1, c2;
    req_valid = 0; req_we = 0; req_addr = '{0, 0}; req_wdata = '{0, 0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // initialise memory through port 0, unit stride
    for (int i = 0; i < MW; i++) begin
      req_valid[0] = 1; req_we[0] = 1; req_addr[0] = AW'(i); req_wdata[0] = {32'hFACE0000, 32'(i)};
      do @(posedge clk); while (!req_ready[0]);
      #1;
    end
    req_valid = 0;
    // unit stride: one per cycle
    stream(0, 64, 1, c1);
    checks++;
    if (c1 != 64) begin failures++; $display("FAIL unit-stride stream took %0d cycles", c1); end
    // stride NB: same bank every time, one per BANK_BUSY cycles
    repeat (BB) @(posedge clk); #1;
    stream(1, 32, NB, c2);
    checks++;
    if (c2 != 1 + 31 * BB) begin failures++; $display("FAIL same-bank stream took %0d cycles", c2); end
    repeat (RL + 2) @(posedge clk); #1;
    // random traffic on both ports
    fork
      random_traffic(0);
      random_traffic(1);
    join
    req_valid = 0;
    repeat (RL + 4) @(posedge clk);
    checks++;
    if (exp_d[0].size() != 0 || exp_d[1].size() != 0) begin failures++; $display("FAIL responses missing"); end
    checks++;
    if (both_same_cycle == 0) begin failures++; $display("FAIL ports never served together"); end
    checks++;
    if (conflicts == 0) begin failures++; $display("FAIL no bank conflict seen"); end
    $display("unit stride %0d cycles, same bank %0d cycles, dual %0d, conflicts %0d", c1, c2, both_same_cycle, conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
