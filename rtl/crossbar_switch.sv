// crossbar_switch: the crossbar of one dimension of the Hyper Crossbar.
//
// N ports; port p connects to the exchanger whose coordinate along this
// dimension (DIM: 0 = x, 1 = y, 2 = z) is p. A packet entering on any port
// leaves on the port given by its destination coordinate along DIM, so a
// packet crosses one crossbar in one hop. Switching is wormhole through a
// wormhole_switch core with round-robin arbitration per output, and each
// output has a two-flit FIFO, so a hop takes one cycle and every port moves
// one 16-bit flit per cycle (300 MB/s at 150 MHz, the paper's crossbar
// bandwidth).
//
// Hardware bisection (paper: the network can be bisected in x, y and z, up
// to 8 independent subsystems): while `split` is high, ports below NSPLIT/2
// and ports from NSPLIT/2 to NSPLIT-1 cannot reach each other. Ports at
// NSPLIT and above (the I/O unit port of a y crossbar) stay reachable from
// both halves; that, and discarding a packet that would cross the split or
// names a port that does not exist (one `violation` pulse per packet), are
// this design's choices.
module crossbar_switch
  import cppacs_pkg::*;
#(
  parameter int N      = 8,
  parameter int DIM    = 0,
  parameter int NSPLIT = N,
  localparam int OW = (N > 1) ? $clog2(N) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         split,
  input  logic [N-1:0] in_valid,
  output logic [N-1:0] in_ready,
  input  flit_t        in_flit  [N],
  output logic [N-1:0] out_valid,
  input  logic [N-1:0] out_ready,
  output flit_t        out_flit [N],
  output logic         violation
);
  logic [N-1:0]  sw_valid, sw_ready, illegal, dropping;
  logic [OW-1:0] route   [N];
  logic [N-1:0]  q_valid, q_ready;
  flit_t         q_flit  [N];

  function automatic int unsigned dim_coord(flit_t f);
    coord_t c;
    c = head_dest(f);
    case (DIM)
      0:       return int'(c.x);
      1:       return int'(c.y);
      default: return int'(c.z);
    endcase
  endfunction

  function automatic logic crosses(int unsigned a, int unsigned b);
    if (a >= NSPLIT || b >= NSPLIT) return 1'b0;
    return (a < NSPLIT/2) != (b < NSPLIT/2);
  endfunction

  always_comb begin
    violation = 1'b0;
    for (int i = 0; i < N; i++) begin
      int unsigned d;
      d = dim_coord(in_flit[i]);
      route[i]   = OW'(d);
      illegal[i] = in_valid[i] && in_flit[i].head && !dropping[i]
                   && ((d >= N) || (split && crosses(i, d)));
      sw_valid[i] = in_valid[i] && !illegal[i] && !dropping[i];
      if (illegal[i]) violation = 1'b1;
    end
  end

  // Discarded flits are always accepted; the rest wait for the switch.
  assign in_ready = illegal | dropping | sw_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dropping <= '0;
    else
      for (int i = 0; i < N; i++) begin
        if (illegal[i] && !in_flit[i].tail)     dropping[i] <= 1'b1;
        else if (dropping[i] && in_valid[i] && in_flit[i].tail) dropping[i] <= 1'b0;
      end
  end

  wormhole_switch #(.NI(N), .NO(N)) u_sw (
    .clk, .rst_n,
    .in_valid  (sw_valid),
    .in_ready  (sw_ready),
    .in_flit   (in_flit),
    .in_route  (route),
    .out_valid (q_valid),
    .out_ready (q_ready),
    .out_flit  (q_flit)
  );

  for (genvar o = 0; o < N; o++) begin : g_q
    flit_fifo #(.DEPTH(2)) u_q (
      .clk, .rst_n,
      .in_valid  (q_valid[o]),
      .in_ready  (q_ready[o]),
      .in_flit   (q_flit[o]),
      .out_valid (out_valid[o]),
      .out_ready (out_ready[o]),
      .out_flit  (out_flit[o])
    );
  end
endmodule
