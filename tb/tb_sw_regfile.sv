// tb_sw_regfile: self-checking test of the slide-windowed register file.
//
// A reference model keeps its own copy of the 128 physical registers and of
// the window pointer, and maps logical to physical registers with the
// modulo formula written independently here. The test writes and reads
// through the window, slides it (also far enough to wrap around), checks
// that global registers stay put, that a register written as local r+n is
// read as local r after sliding by n, and that a preload into a following
// window is marked busy until its data arrives and then appears in the new
// window.
module tb_sw_regfile;
  import cppacs_pkg::*;
  localparam int NPHYS = 128, NLOG = 32, NG = 8, NLP = NPHYS - NG;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic slide_valid; logic [6:0] slide_amt; logic [6:0] fwp;
  logic [4:0] rs1, rs2, wr_lreg, ls_lreg;
  logic [63:0] rs1_data, rs2_data, wr_data, ls_data, pl_data;
  logic rs1_busy, rs2_busy, wr_valid, wr_busy, ls_pending, pend_set, pl_we;
  logic signed [7:0] ls_delta;
  logic [6:0] ls_preg, pend_preg, pl_preg;

  sw_regfile dut (.*);

  int checks = 0, failures = 0;
  logic [63:0] model [NPHYS];
  int mfwp = 0;

  function automatic int map(int l, int delta);
    if (l < NG) return l;
    return NG + (((l - NG + mfwp + delta) % NLP) + NLP) % NLP;
  endfunction

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic wr(int l, logic [63:0] d);
    wr_valid = 1; wr_lreg = 5'(l); wr_data = d;
    @(posedge clk); #1;
    wr_valid = 0;
    model[map(l, 0)] = d;
  endtask

  task automatic slide(int n);
    slide_valid = 1; slide_amt = 7'(n);
    @(posedge clk); #1;
    slide_valid = 0;
    mfwp = (mfwp + n) % NLP;
  endtask

  task automatic rd_check(int l, string what);
    rs1 = 5'(l); rs2 = 5'((l + 1) % NLOG); #1;
    check(what, rs1_data, model[map(l, 0)]);
    check({what, " port2"}, rs2_data, model[map((l + 1) % NLOG, 0)]);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    slide_valid = 0; slide_amt = 0; rs1 = 0; rs2 = 0; wr_valid = 0; wr_lreg = 0;
    wr_data = 0; ls_lreg = 0; ls_delta = 0; pend_set = 0; pend_preg = 0;
    pl_we = 0; pl_preg = 0; pl_data = 0;
    for (int i = 0; i < NPHYS; i++) model[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;

    // Fill the window and read it back.
    for (int l = 0; l < NLOG; l++) wr(l, 64'hA000_0000_0000_0000 | 64'(l));
    for (int l = 0; l < NLOG; l++) rd_check(l, "window 0 readback");

    // Overlap: local r+n before a slide by n is local r after it.
    slide(5);
    checks++; if (int'(fwp) != 5) begin failures++; $display("FAIL fwp %0d", fwp); end
    for (int l = NG; l < NLOG - 5; l++) begin
      rs1 = 5'(l); #1;
      check("overlap after slide", rs1_data, 64'hA000_0000_0000_0000 | 64'(l + 5));
    end
    for (int l = 0; l < NG; l++) begin
      rs1 = 5'(l); #1;
      check("global after slide", rs1_data, 64'hA000_0000_0000_0000 | 64'(l));
    end

    // Random writes, reads and slides, including wrap-around of the pointer.
    for (int it = 0; it < 600; it++) begin
      int op;
      op = int'($urandom_range(0, 9));
      if (op < 5) wr(int'($urandom_range(0, NLOG-1)), {$urandom, $urandom});
      else if (op < 7) slide(int'($urandom_range(1, 40)));
      else rd_check(int'($urandom_range(0, NLOG-1)), "random read");
    end
    checks++; if (int'(fwp) != mfwp) begin failures++; $display("FAIL fwp %0d vs %0d", fwp, mfwp); end

    // Preload into logical 31 of the window 6 slides ahead.
    ls_lreg = 5'd31; ls_delta = 8'sd6; #1;
    checks++; if (int'(ls_preg) != map(31, 6)) begin failures++; $display("FAIL ls_preg %0d vs %0d", ls_preg, map(31, 6)); end
    pend_set = 1; pend_preg = ls_preg;
    @(posedge clk); #1; pend_set = 0;
    slide(6);
    rs1 = 5'd31; wr_lreg = 5'd31; #1;
    checks++; if (!rs1_busy || !wr_busy) begin failures++; $display("FAIL pending register not busy"); end
    pl_we = 1; pl_preg = 7'(map(31, 0)); pl_data = 64'hFEED_FACE_0000_0031;
    @(posedge clk); #1; pl_we = 0;
    model[map(31, 0)] = 64'hFEED_FACE_0000_0031;
    checks++; if (rs1_busy) begin failures++; $display("FAIL still busy after preload"); end
    rd_check(31, "preloaded register");

    // Poststore source: logical 10 of the window 3 slides back.
    ls_lreg = 5'd10; ls_delta = -8'sd3; #1;
    check("poststore translate", 64'(ls_preg), 64'(map(10, -3)));
    check("poststore data", ls_data, model[map(10, -3)]);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
