// tb_exchanger: self-checking test of the exchanger's x -> y -> z routing.
//
// The exchanger sits at (2, 3, 4). Each of its four inputs sends packets to
// destinations that are legal for that input (a packet arriving from the x
// crossbar already has the right x, and so on). The testbench works out the
// expected output of every packet on its own and checks, at each output,
// that packets arrive there whole, uninterleaved and in order per input,
// under random back-pressure. It also counts that every legal turn
// (local->x, local->y, local->z, local->local, x->y, x->z, x->local,
// y->z, y->local, z->local) was taken.
module tb_exchanger;
  import cppacs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  coord_t me;
  logic [3:0] in_valid, in_ready, out_valid, out_ready;
  flit_t in_flit [4];
  flit_t out_flit [4];
  exchanger dut (.*);

  int checks = 0, failures = 0;
  int exp_seq [4][4], sent [4][4], cur_src [4];
  logic in_pkt [4];

  function automatic int expect_out(int p, coord_t d);
    if (p == 0 && d.x != me.x) return 1;
    if (p <= 1 && d.y != me.y) return 2;
    if (p <= 2 && d.z != me.z) return 3;
    return 0;
  endfunction

  function automatic coord_t pick_dest(int p);
    coord_t d;
    d.x = (p >= 1 || $urandom_range(0, 1)) ? me.x : XW'($urandom);
    d.y = (p >= 2 || $urandom_range(0, 1)) ? me.y : YW'($urandom_range(0, 16));
    d.z = (p >= 3 || $urandom_range(0, 1)) ? me.z : ZW'($urandom);
    return d;
  endfunction

  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < 4; o++) if (out_valid[o] && out_ready[o]) begin
      flit_t f;
      f = out_flit[o];
      if (f.head) begin
        checks++;
        if (in_pkt[o]) begin failures++; $display("FAIL out %0d head inside packet", o); end
        in_pkt[o] = !f.tail;
        cur_src[o] = -1;
      end else begin
        int s, q, eo;
        s = int'(f.data[15:12]); eo = int'(f.data[11:10]); q = int'(f.data[9:0]);
        checks++;
        if (eo != o) begin failures++; $display("FAIL packet for out %0d left on %0d", eo, o); end
        if (cur_src[o] == -1) begin
          cur_src[o] = s;
          checks++;
          if (q != exp_seq[o][s]) begin failures++; $display("FAIL out %0d src %0d seq %0d exp %0d", o, s, q, exp_seq[o][s]); end
          exp_seq[o][s] = q + 1;
        end else if (s != cur_src[o]) begin
          failures++; $display("FAIL out %0d interleaved", o);
        end
        if (f.tail) in_pkt[o] = 1'b0;
      end
    end
  end

  task automatic source(int p, int npk);
    for (int n = 0; n < npk; n++) begin
      coord_t d;
      int eo, len, q;
      d = pick_dest(p);
      eo = expect_out(p, d);
      len = int'($urandom_range(1, 6));
      q = sent[p][eo];
      sent[p][eo]++;
      for (int k = 0; k <= len; k++) begin
        in_valid[p] = 1;
        if (k == 0) in_flit[p] = '{head: 1'b1, tail: 1'b0, data: FLIT_W'(d)};
        else in_flit[p] = '{head: 1'b0, tail: (k == len), data: {4'(p), 2'(eo), 10'(q)}};
        do @(posedge clk); while (!in_ready[p]);
        #1;
      end
      in_valid[p] = 0;
      repeat ($urandom_range(0, 2)) @(posedge clk);
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
    me = '{x: 3'd2, y: 5'd3, z: 4'd4};
    in_valid = '0; out_ready = '1;
    for (int i = 0; i < 4; i++) begin
      in_flit[i] = '0; in_pkt[i] = 0;
      for (int j = 0; j < 4; j++) begin exp_seq[i][j] = 0; sent[i][j] = 0; end
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    fork
      for (int p = 0; p < 4; p++) begin
        automatic int pp = p;
        fork source(pp, 150); join_none
      end
      repeat (4000) begin @(posedge clk); #2 out_ready = 4'($urandom) | 4'($urandom); end
    join
    wait fork;
    out_ready = '1;
    repeat (20) @(posedge clk); #1;
    for (int p = 0; p < 4; p++)
      for (int o = 0; o < 4; o++) begin
        checks++;
        if (exp_seq[o][p] != sent[p][o]) begin failures++; $display("FAIL %0d->%0d: %0d of %0d", p, o, exp_seq[o][p], sent[p][o]); end
        // every legal turn taken at least once
        if ((p == 0) || (o == 0) || (o > p)) begin
          checks++;
          if (sent[p][o] == 0) begin failures++; $display("FAIL turn %0d->%0d never exercised", p, o); end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
