// preload_poststore_unit: issues Preload and Poststore without waiting.
//
// The core presents one preload or poststore at a time (ls_valid, ls_op,
// ls_addr) together with the physical register the register file translated
// for it (ls_preg, ls_data, ls_pending). The request goes to the storage
// controller in the same cycle it is accepted; the unit does not wait for
// memory. For a preload the physical register number is pushed on an
// in-order queue and marked pending in the register file; when read data
// returns (memory answers in order) the head of the queue says which
// physical register to write. Because the target is translated at issue,
// a preload into a following window lands in the right register even if
// the window slides while it is in flight. A poststore sends the register's
// value at issue as a memory write.
//
// Up to QDEPTH preloads may be outstanding, so as many memory accesses as
// that overlap in the interleaved banks. Issue stalls (ls_ready low) when
// the queue is full, when the memory port is not ready, or when the
// register concerned is still awaiting an earlier preload. The queue depth
// and these stall rules are this design's choices; the paper only says
// that the two instructions are issued without waiting for completion.
module preload_poststore_unit
  import cppacs_pkg::*;
#(
  parameter int QDEPTH = 16,
  parameter int PW     = 7,
  parameter int AW     = 23
) (
  input  logic          clk,
  input  logic          rst_n,
  // from the core and the register file
  input  logic          ls_valid,
  output logic          ls_ready,
  input  ls_op_t        ls_op,
  input  logic [AW-1:0] ls_addr,
  input  logic [PW-1:0] ls_preg,
  input  logic [WORD_W-1:0] ls_data,
  input  logic          ls_pending,
  output logic          pend_set,
  output logic [PW-1:0] pend_preg,
  output logic          pl_we,
  output logic [PW-1:0] pl_preg,
  output logic [WORD_W-1:0] pl_data,
  // to the storage controller
  output logic          mem_valid,
  input  logic          mem_ready,
  output logic          mem_we,
  output logic [AW-1:0] mem_addr,
  output logic [WORD_W-1:0] mem_wdata,
  input  logic          rsp_valid,
  input  logic [WORD_W-1:0] rsp_data,
  output logic [$clog2(QDEPTH+1)-1:0] outstanding
);
  localparam int QW = $clog2(QDEPTH);
  logic [PW-1:0] q [QDEPTH];
  logic [QW-1:0] q_rd, q_wr;
  logic          can, push, pop;

  assign can       = !ls_pending && (ls_op == OP_POSTSTORE || int'(outstanding) < QDEPTH);
  assign mem_valid = ls_valid && can;
  assign ls_ready  = mem_ready && can;
  assign mem_we    = (ls_op == OP_POSTSTORE);
  assign mem_addr  = ls_addr;
  assign mem_wdata = ls_data;

  assign push      = ls_valid && ls_ready && ls_op == OP_PRELOAD;
  assign pop       = rsp_valid;
  assign pend_set  = push;
  assign pend_preg = ls_preg;
  assign pl_we     = pop;
  assign pl_preg   = q[q_rd];
  assign pl_data   = rsp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_rd <= '0;
      q_wr <= '0;
      outstanding <= '0;
    end else begin
      if (push) q_wr <= q_wr + 1'b1;
      if (pop)  q_rd <= q_rd + 1'b1;
      outstanding <= outstanding + ($bits(outstanding))'(push) - ($bits(outstanding))'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) q[q_wr] <= ls_preg;
  end

  a_no_stray_response: assert property (@(posedge clk) disable iff (!rst_n)
    rsp_valid |-> outstanding != 0);
endmodule
