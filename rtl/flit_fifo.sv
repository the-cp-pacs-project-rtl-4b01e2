// flit_fifo: small synchronous FIFO of flits with valid/ready on both sides.
//
// DEPTH entries; in_ready is high while not full, out_valid while not empty.
// A depth of 2 gives a registered stage that still passes one flit per cycle.
// Used at every crossbar output, so each crossbar hop costs one cycle.
module flit_fifo
  import cppacs_pkg::*;
#(
  parameter int DEPTH = 2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  flit_t in_flit,
  output logic  out_valid,
  input  logic  out_ready,
  output flit_t out_flit
);
  localparam int PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  flit_t        mem [DEPTH];
  logic [PW-1:0] rd, wr;
  logic [PW:0]   cnt;
  logic          push, pop;

  assign in_ready  = (int'(cnt) < DEPTH);
  assign out_valid = (cnt != 0);
  assign out_flit  = mem[rd];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd  <= '0;
      wr  <= '0;
      cnt <= '0;
    end else begin
      if (push) wr <= (int'(wr) == DEPTH-1) ? '0 : wr + 1'b1;
      if (pop)  rd <= (int'(rd) == DEPTH-1) ? '0 : rd + 1'b1;
      cnt <= cnt + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr] <= in_flit;
  end
endmodule
