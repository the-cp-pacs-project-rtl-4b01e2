// wormhole_switch: NI-input, NO-output wormhole switch core without buffers.
//
// Each input presents a flit and, for a head flit, the output it wants
// (in_route, computed outside by the routing rule of the exchanger or the
// crossbar). An unlocked output arbitrates round-robin among inputs whose
// head flit asks for it. When the winner's head flit moves, the output locks
// to that input until the tail flit has moved (wormhole routing: a packet
// holds its path for its whole length; other packets wait behind it). Flits
// move combinationally in the cycle their output is ready, one flit per
// output per cycle. A packet of one flit (head and tail) never locks.
module wormhole_switch
  import cppacs_pkg::*;
#(
  parameter int NI = 4,
  parameter int NO = 4,
  localparam int IW = (NI > 1) ? $clog2(NI) : 1,
  localparam int OW = (NO > 1) ? $clog2(NO) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [NI-1:0] in_valid,
  output logic [NI-1:0] in_ready,
  input  flit_t         in_flit  [NI],
  input  logic [OW-1:0] in_route [NI],
  output logic [NO-1:0] out_valid,
  input  logic [NO-1:0] out_ready,
  output flit_t         out_flit [NO]
);
  logic [NO-1:0] locked;
  logic [IW-1:0] owner   [NO];
  logic [NI-1:0] req     [NO];
  logic [NO-1:0] arb_any;
  logic [IW-1:0] arb_idx [NO];
  logic [IW-1:0] sel     [NO];
  logic [NO-1:0] sel_ok;
  logic [NO-1:0] fire;

  for (genvar o = 0; o < NO; o++) begin : g_out
    always_comb begin
      for (int i = 0; i < NI; i++)
        req[o][i] = in_valid[i] && in_flit[i].head && (int'(in_route[i]) == o);
    end

    rr_arbiter #(.N(NI)) u_arb (
      .clk, .rst_n,
      .req     (req[o]),
      .advance (fire[o] && !locked[o]),
      .any     (arb_any[o]),
      .idx     (arb_idx[o])
    );

    assign sel[o]       = locked[o] ? owner[o] : arb_idx[o];
    assign sel_ok[o]    = locked[o] || arb_any[o];
    assign out_valid[o] = sel_ok[o] && in_valid[sel[o]];
    assign out_flit[o]  = in_flit[sel[o]];
    assign fire[o]      = out_valid[o] && out_ready[o];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        locked[o] <= 1'b0;
        owner[o]  <= '0;
      end else if (fire[o]) begin
        if (!locked[o] && !out_flit[o].tail) begin
          locked[o] <= 1'b1;
          owner[o]  <= arb_idx[o];
        end else if (locked[o] && out_flit[o].tail) begin
          locked[o] <= 1'b0;
        end
      end
    end
  end

  always_comb begin
    in_ready = '0;
    for (int o = 0; o < NO; o++)
      if (sel_ok[o] && out_ready[o]) in_ready[sel[o]] = 1'b1;
  end

  // A locked output only ever forwards body flits of its packet.
  for (genvar o = 0; o < NO; o++) begin : g_chk
    a_no_head_when_locked: assert property (@(posedge clk) disable iff (!rst_n)
      (locked[o] && out_valid[o]) |-> !out_flit[o].head);
  end
endmodule
