// exchanger: the switch at one crossing point of the Hyper Crossbar.
//
// Four ports, numbered 0 = local (the PU or IOU), 1 = x crossbar,
// 2 = y crossbar, 3 = z crossbar; each has an input and an output with
// valid/ready. The node's own coordinate comes in on `me` (a port, not a
// parameter, so all exchangers share one module). Routing is fixed to the
// order x -> y -> z, as in the paper, which avoids deadlock: the head flit of
// a packet that arrived from dimension k leaves on the first later dimension
// whose coordinate differs from the destination, or on the local port when
// none does. A packet therefore uses at most three crossbars. Switching is
// wormhole through a wormhole_switch core; the exchanger adds no buffering,
// so a flit crosses it in the same cycle.
module exchanger
  import cppacs_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  coord_t     me,
  input  logic [3:0] in_valid,
  output logic [3:0] in_ready,
  input  flit_t      in_flit  [4],
  output logic [3:0] out_valid,
  input  logic [3:0] out_ready,
  output flit_t      out_flit [4]
);
  logic [1:0] route [4];

  always_comb begin
    for (int p = 0; p < 4; p++) begin
      coord_t d;
      d = head_dest(in_flit[p]);
      route[p] = 2'd0;
      // Dimensions still to be resolved are those after the arrival port.
      if      (p <= 0 && d.x != me.x) route[p] = 2'd1;
      else if (p <= 1 && d.y != me.y) route[p] = 2'd2;
      else if (p <= 2 && d.z != me.z) route[p] = 2'd3;
    end
  end

  wormhole_switch #(.NI(4), .NO(4)) u_sw (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_flit,
    .in_route (route),
    .out_valid, .out_ready, .out_flit
  );
endmodule
