// tb_crossbar_switch: self-checking test of a crossbar switch.
//
// DUT 1 is an 8-port x crossbar. Every input sends packets of random length
// to random outputs while every output applies random back-pressure. Each
// body flit carries its source port and a sequence number, so the monitor
// at each output checks, independently of the DUT, that packets arrive
// whole and uninterleaved (wormhole), at the output their head names, and
// in order per source. Directed parts check the one-cycle hop and the one
// flit per cycle rate through an idle crossbar, that contention makes one
// input wait, and that with the bisection split set a packet across the
// halves is discarded (violation) while one within a half passes.
// DUT 2 is a 17-port y crossbar with the split on 16 ports: the I/O port 16
// stays reachable from both halves.
module tb_crossbar_switch;
  import cppacs_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic split;
  logic [N-1:0] in_valid, in_ready, out_valid, out_ready;
  flit_t in_flit [N];
  flit_t out_flit [N];
  logic violation;

  crossbar_switch #(.N(N), .DIM(0)) dut (.*);

  // second DUT: y crossbar with an I/O port
  logic [16:0] y_iv, y_ir, y_ov;
  flit_t y_if [17];
  flit_t y_of [17];
  logic y_viol;
  crossbar_switch #(.N(17), .DIM(1), .NSPLIT(16)) dut_y (
    .clk, .rst_n, .split(1'b1),
    .in_valid(y_iv), .in_ready(y_ir), .in_flit(y_if),
    .out_valid(y_ov), .out_ready('1), .out_flit(y_of), .violation(y_viol));

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic flit_t head_to(int d);
    coord_t c;
    c = '{x: XW'(d), y: YW'(d), z: ZW'(d)};
    return '{head: 1'b1, tail: 1'b0, data: FLIT_W'(c)};
  endfunction

  // ---------------- monitors ----------------
  int cur_src [N];
  int exp_seq [N][N];     // next sequence number expected at output o from source s
  int sent    [N][N];
  int rcvd_pk [N];
  logic in_pkt [N];
  int waits = 0, viols = 0;
  longint head_t [N], tail_t [N];

  always @(posedge clk) if (rst_n) begin
    if (violation) viols++;
    for (int i = 0; i < N; i++) if (in_valid[i] && !in_ready[i]) waits++;
    for (int o = 0; o < N; o++) if (out_valid[o] && out_ready[o]) begin
      flit_t f;
      f = out_flit[o];
      if (f.head) begin
        checks++;
        if (in_pkt[o]) begin failures++; $display("FAIL out %0d: head inside a packet", o); end
        if (int'(head_dest(f).x) != o) begin failures++; $display("FAIL out %0d got head for %0d", o, head_dest(f).x); end
        in_pkt[o] = !f.tail;
        cur_src[o] = -1;
        head_t[o] = cyc;
      end else begin
        int s, q;
        s = int'(f.data[15:12]); q = int'(f.data[11:0]);
        if (!in_pkt[o]) begin failures++; $display("FAIL out %0d: body flit outside a packet", o); end
        if (cur_src[o] == -1) begin
          cur_src[o] = s;
          checks++;
          if (q != exp_seq[o][s]) begin failures++; $display("FAIL out %0d src %0d seq %0d exp %0d", o, s, q, exp_seq[o][s]); end
          exp_seq[o][s] = q + 1;
        end else begin
          checks++;
          if (s != cur_src[o]) begin failures++; $display("FAIL out %0d interleaved src %0d in packet of %0d", o, s, cur_src[o]); end
        end
        if (f.tail) begin in_pkt[o] = 1'b0; rcvd_pk[o]++; tail_t[o] = cyc; end
      end
    end
  end

  task automatic send(int i, int d, int len, int seq);
    for (int k = 0; k <= len; k++) begin
      in_valid[i] = 1;
      if (k == 0) in_flit[i] = head_to(d);
      else in_flit[i] = '{head: 1'b0, tail: (k == len), data: {4'(i), 12'(seq)}};
      do @(posedge clk); while (!in_ready[i]);
      #1;
    end
    in_valid[i] = 0;
  endtask

  task automatic source(int i, int npk);
    for (int p = 0; p < npk; p++) begin
      int d;
      d = int'($urandom_range(0, N-1));
      send(i, d, int'($urandom_range(1, 12)), sent[i][d]);
      sent[i][d]++;
      repeat ($urandom_range(0, 3)) @(posedge clk);
      #1;
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int tot_sent, tot_rcvd;
    split = 0; in_valid = '0; out_ready = '1; y_iv = '0;
    for (int i = 0; i < N; i++) begin
      in_flit[i] = '0; in_pkt[i] = 0; rcvd_pk[i] = 0;
      for (int j = 0; j < N; j++) begin exp_seq[i][j] = 0; sent[i][j] = 0; end
    end
    for (int i = 0; i < 17; i++) y_if[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    // idle crossbar: 20-flit packet 2 -> 5, one cycle hop, one flit per cycle
    begin
      longint t0;
      t0 = cyc;
      send(2, 5, 19, 0); sent[2][5]++;
      repeat (3) @(posedge clk); #1;
      checks++;
      if (head_t[5] != t0 + 1) begin failures++; $display("FAIL hop latency %0d", head_t[5] - t0); end
      checks++;
      if (tail_t[5] - head_t[5] != 19) begin failures++; $display("FAIL 20 flits took %0d cycles", tail_t[5] - head_t[5] + 1); end
    end

    // contention: 0 and 1 both to 6
    fork
      begin send(0, 6, 8, 0); sent[0][6]++; end
      begin send(1, 6, 8, 0); sent[1][6]++; end
    join
    checks++;
    if (waits == 0) begin failures++; $display("FAIL no input waited under contention"); end

    // random traffic with random back-pressure
    fork
      for (int i = 0; i < N; i++) begin
        automatic int ii = i;
        fork source(ii, 40); join_none
      end
      repeat (3000) begin @(posedge clk); #2 out_ready = N'($urandom) | N'($urandom); end
    join
    wait fork;
    out_ready = '1;
    repeat (30) @(posedge clk); #1;
    tot_sent = 0; tot_rcvd = 0;
    for (int o = 0; o < N; o++) begin
      tot_rcvd += rcvd_pk[o];
      for (int s = 0; s < N; s++) begin
        tot_sent += sent[s][o];
        checks++;
        if (exp_seq[o][s] != sent[s][o]) begin failures++; $display("FAIL out %0d from %0d: %0d of %0d", o, s, exp_seq[o][s], sent[s][o]); end
      end
    end
    checks++;
    if (tot_sent != tot_rcvd) begin failures++; $display("FAIL sent %0d received %0d", tot_sent, tot_rcvd); end

    // bisection: 1 -> 6 crosses the halves and is dropped, 1 -> 3 passes
    split = 1;
    send(1, 6, 4, 999);
    send(1, 3, 4, sent[1][3]); sent[1][3]++;
    repeat (5) @(posedge clk); #1;
    checks++;
    if (viols != 1) begin failures++; $display("FAIL violations %0d", viols); end
    checks++;
    if (exp_seq[3][1] != sent[1][3] || exp_seq[6][1] != sent[1][6]) begin failures++; $display("FAIL split delivery"); end
    split = 0;

    // y crossbar with split: port 3 -> 16 (I/O) passes, 3 -> 12 is dropped
    begin
      int got16, got12, yv;
      got16 = 0; got12 = 0; yv = 0;
      for (int d = 0; d < 2; d++) begin
        int dst;
        dst = d == 0 ? 16 : 12;
        for (int k = 0; k < 3; k++) begin
          y_iv[3] = 1;
          y_if[3] = k == 0 ? head_to(dst) : '{head: 1'b0, tail: (k == 2), data: 16'hABCD};
          do begin
            @(posedge clk);
            if (y_viol) yv++;
          end while (!y_ir[3]);
          #1;
        end
        y_iv[3] = 0;
        repeat (4) begin
          @(posedge clk);
          if (y_ov[16] && y_of[16].tail) got16++;
          if (y_ov[12]) got12++;
        end
        #1;
      end
      checks++;
      if (got16 != 1 || got12 != 0 || yv != 1) begin failures++; $display("FAIL y split: io %0d cross %0d viol %0d", got16, got12, yv); end
    end

    $display("packets %0d, waits %0d", tot_sent, waits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
