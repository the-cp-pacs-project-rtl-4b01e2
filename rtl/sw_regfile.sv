// sw_regfile: slide-windowed floating point register file (PVP-SW).
//
// NPHYS physical 64-bit registers are seen by instructions through a window
// of NLOG logical registers. Logical registers 0..NGLOBAL-1 are global and
// map to the same physical registers in every window. Logical registers
// NGLOBAL..NLOG-1 are local: logical r maps to physical
//     NGLOBAL + ((r - NGLOBAL + fwp) mod (NPHYS - NGLOBAL))
// where fwp is the window pointer. Sliding the window (slide_valid,
// slide_amt) adds to fwp modulo NPHYS - NGLOBAL, so the local part moves
// continuously along the physical registers and wraps around. 128 physical
// and 32 logical registers, global registers at the bottom of the window and
// the sliding local part follow the paper's description and its figure; the
// number of global registers (8), the modulo wrap-around and the slide
// interface are this design's choices.
//
// Ports:
//   rs1/rs2 -> rs*_data, rs*_busy   logical reads in the current window;
//                                   busy while a preload to that physical
//                                   register is outstanding (the core must
//                                   wait: this is the register interlock)
//   wr_*                            logical write in the current window;
//                                   wr_busy as above (write-after-preload)
//   ls_lreg, ls_delta -> ls_preg,   translation for preload/poststore: the
//     ls_data, ls_pending           logical register in the window ls_delta
//                                   slides away (positive: a following
//                                   window, negative: a previous one)
//   pend_set, pend_preg             mark a physical register as awaiting a
//                                   preload
//   pl_we, pl_preg, pl_data         preload data returning from memory;
//                                   writes the physical register and clears
//                                   its pending bit
// Reads are combinational; writes take effect at the clock edge. All
// registers and pending bits reset to zero, fwp resets to 0.
module sw_regfile
  import cppacs_pkg::*;
#(
  parameter int NPHYS   = 128,
  parameter int NLOG    = 32,
  parameter int NGLOBAL = 8,
  parameter int W       = 64,
  localparam int PW = $clog2(NPHYS),
  localparam int LW = $clog2(NLOG)
) (
  input  logic              clk,
  input  logic              rst_n,
  // window
  input  logic              slide_valid,
  input  logic [6:0]        slide_amt,
  output logic [PW-1:0]     fwp,
  // core read ports
  input  logic [LW-1:0]     rs1,
  output logic [W-1:0]      rs1_data,
  output logic              rs1_busy,
  input  logic [LW-1:0]     rs2,
  output logic [W-1:0]      rs2_data,
  output logic              rs2_busy,
  // core write port
  input  logic              wr_valid,
  input  logic [LW-1:0]     wr_lreg,
  input  logic [W-1:0]      wr_data,
  output logic              wr_busy,
  // preload/poststore translation
  input  logic [LW-1:0]     ls_lreg,
  input  logic signed [7:0] ls_delta,
  output logic [PW-1:0]     ls_preg,
  output logic [W-1:0]      ls_data,
  output logic              ls_pending,
  input  logic              pend_set,
  input  logic [PW-1:0]     pend_preg,
  // preload return
  input  logic              pl_we,
  input  logic [PW-1:0]     pl_preg,
  input  logic [W-1:0]      pl_data
);
  localparam int NLP = NPHYS - NGLOBAL;   // physical registers used by local parts

  logic [W-1:0]     regs [NPHYS];
  logic [NPHYS-1:0] pending;
  logic [PW-1:0]    p_rs1, p_rs2, p_wr;

  function automatic logic [PW-1:0] xlate(logic [LW-1:0] lreg, int delta, logic [PW-1:0] ptr);
    int s;
    if (int'(lreg) < NGLOBAL) return PW'(lreg);
    s = int'(lreg) - NGLOBAL + int'(ptr) + delta;
    if (s >= 2*NLP)  s = s - 2*NLP;
    else if (s >= NLP) s = s - NLP;
    else if (s < -NLP) s = s + 2*NLP;
    else if (s < 0)  s = s + NLP;
    return PW'(NGLOBAL + s);
  endfunction

  assign p_rs1   = xlate(rs1, 0, fwp);
  assign p_rs2   = xlate(rs2, 0, fwp);
  assign p_wr    = xlate(wr_lreg, 0, fwp);
  assign ls_preg = xlate(ls_lreg, int'(ls_delta), fwp);

  assign rs1_data   = regs[p_rs1];
  assign rs1_busy   = pending[p_rs1];
  assign rs2_data   = regs[p_rs2];
  assign rs2_busy   = pending[p_rs2];
  assign wr_busy    = pending[p_wr];
  assign ls_data    = regs[ls_preg];
  assign ls_pending = pending[ls_preg];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fwp <= '0;
    end else if (slide_valid) begin
      int s;
      s = int'(fwp) + int'(slide_amt);
      if (s >= 2*NLP)    s = s - 2*NLP;
      else if (s >= NLP) s = s - NLP;
      fwp <= PW'(s);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending <= '0;
      for (int i = 0; i < NPHYS; i++) regs[i] <= '0;
    end else begin
      if (wr_valid && !wr_busy) regs[p_wr] <= wr_data;
      if (pl_we) begin
        regs[pl_preg]    <= pl_data;
        pending[pl_preg] <= 1'b0;
      end
      if (pend_set) pending[pend_preg] <= 1'b1;
    end
  end

  a_no_double_preload: assert property (@(posedge clk) disable iff (!rst_n)
    pend_set |-> !pending[pend_preg]);
  a_preload_was_pending: assert property (@(posedge clk) disable iff (!rst_n)
    pl_we |-> pending[pl_preg]);
endmodule
