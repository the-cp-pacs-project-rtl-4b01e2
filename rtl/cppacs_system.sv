// cppacs_system: the CP-PACS node array and its Hyper Crossbar network.
//
// NX x (NY+1) x NZ exchangers sit at the crossing points of the network.
// Planes y = 0..NY-1 hold processing units (8 x 16 x 16 = 2048 PUs at the
// paper's sizes); plane y = NY is the I/O plane, whose 8 x 16 I/O units are
// not modelled: their exchanger local ports are the ports iou_*. Every line
// of exchangers along one dimension is joined by one crossbar switch of that
// dimension: NY+1 x NZ x-crossbars of NX ports, NX x NZ y-crossbars of NY+1
// ports (the last one to the I/O unit), NX x (NY+1) z-crossbars of NZ ports.
// A packet goes x -> y -> z, through at most three crossbars.
//
// The arrays cpu_in / cpu_out carry, per PU, what its (not modelled)
// PA-RISC core drives and sees; PU (x, y, z) has index (x*NY + y)*NZ + z.
// I/O unit (x, z) has index x*NZ + z. split_x/y/z bisect all crossbars of
// that dimension (hardware partitioning); partition_violation is high in a
// cycle in which some crossbar discards a packet that would have crossed a
// split or named a port that does not exist. mem_conflict is high when some
// PU's storage controller made a request wait for a busy bank.
//
// Placing x and z crossbars on the I/O plane as on the PU planes is this
// design's reading of the 8 x 17 x 16 array of the paper.
module cppacs_system
  import cppacs_pkg::*;
#(
  parameter int NX        = 8,
  parameter int NY        = 16,
  parameter int NZ        = 16,
  parameter int NPHYS     = 128,
  parameter int NLOG      = 32,
  parameter int NGLOBAL   = 8,
  parameter int QDEPTH    = 16,
  parameter int NBANKS    = 8,
  parameter int MEM_WORDS = 8388608,
  parameter int BANK_BUSY = 4,
  parameter int RD_LAT    = 8,
  localparam int NPU  = NX * NY * NZ,
  localparam int NIOU = NX * NZ,
  localparam int NYT  = NY + 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            split_x,
  input  logic            split_y,
  input  logic            split_z,
  input  pu_cpu_in_t      cpu_in  [NPU],
  output pu_cpu_out_t     cpu_out [NPU],
  // I/O unit network ports
  input  logic [NIOU-1:0] iou_out_valid,   // I/O unit -> network
  output logic [NIOU-1:0] iou_out_ready,
  input  flit_t           iou_out_flit [NIOU],
  output logic [NIOU-1:0] iou_in_valid,    // network -> I/O unit
  input  logic [NIOU-1:0] iou_in_ready,
  output flit_t           iou_in_flit  [NIOU],
  output logic            partition_violation,
  output logic            mem_conflict
);
  // Exchanger port signals, indexed [node][port], port 0 local, 1 x, 2 y, 3 z.
  localparam int NN = NX * NYT * NZ;
  logic [3:0] e_in_valid  [NN];
  logic [3:0] e_in_ready  [NN];
  flit_t      e_in_flit   [NN][4];
  logic [3:0] e_out_valid [NN];
  logic [3:0] e_out_ready [NN];
  flit_t      e_out_flit  [NN][4];

  logic [NPU-1:0] pu_conflict;
  logic [NYT*NZ-1:0] vx;
  logic [NX*NZ-1:0]  vy;
  logic [NX*NYT-1:0] vz;

  function automatic int node(int x, int y, int z);
    return (x * NYT + y) * NZ + z;
  endfunction

  // ---------------- exchangers and their local ends -----------------------
  for (genvar x = 0; x < NX; x++) begin : g_x
    for (genvar y = 0; y < NYT; y++) begin : g_y
      for (genvar z = 0; z < NZ; z++) begin : g_z
        localparam int N = (x * NYT + y) * NZ + z;
        coord_t me;
        assign me = '{x: XW'(x), y: YW'(y), z: ZW'(z)};

        exchanger u_ex (
          .clk, .rst_n,
          .me        (me),
          .in_valid  (e_in_valid[N]),
          .in_ready  (e_in_ready[N]),
          .in_flit   (e_in_flit[N]),
          .out_valid (e_out_valid[N]),
          .out_ready (e_out_ready[N]),
          .out_flit  (e_out_flit[N])
        );

        if (y < NY) begin : g_pu
          localparam int P = (x * NY + y) * NZ + z;
          processing_unit #(
            .NPHYS(NPHYS), .NLOG(NLOG), .NGLOBAL(NGLOBAL), .QDEPTH(QDEPTH),
            .NBANKS(NBANKS), .MEM_WORDS(MEM_WORDS), .BANK_BUSY(BANK_BUSY),
            .RD_LAT(RD_LAT)
          ) u_pu (
            .clk, .rst_n,
            .cpu_in        (cpu_in[P]),
            .cpu_out       (cpu_out[P]),
            .net_out_valid (e_in_valid[N][0]),
            .net_out_ready (e_in_ready[N][0]),
            .net_out_flit  (e_in_flit[N][0]),
            .net_in_valid  (e_out_valid[N][0]),
            .net_in_ready  (e_out_ready[N][0]),
            .net_in_flit   (e_out_flit[N][0]),
            .mem_conflict  (pu_conflict[P])
          );
        end else begin : g_iou
          localparam int I = x * NZ + z;
          assign e_in_valid[N][0]  = iou_out_valid[I];
          assign iou_out_ready[I]  = e_in_ready[N][0];
          assign e_in_flit[N][0]   = iou_out_flit[I];
          assign iou_in_valid[I]   = e_out_valid[N][0];
          assign e_out_ready[N][0] = iou_in_ready[I];
          assign iou_in_flit[I]    = e_out_flit[N][0];
        end
      end
    end
  end

  // ---------------- x crossbars: one per (y, z) ---------------------------
  for (genvar y = 0; y < NYT; y++) begin : g_xb_y
    for (genvar z = 0; z < NZ; z++) begin : g_xb_z
      logic [NX-1:0] iv, ir, ov, orr;
      flit_t         ifl [NX];
      flit_t         ofl [NX];
      for (genvar x = 0; x < NX; x++) begin : g_p
        assign iv[x]                     = e_out_valid[node(x, y, z)][1];
        assign e_out_ready[node(x,y,z)][1] = ir[x];
        assign ifl[x]                    = e_out_flit[node(x, y, z)][1];
        assign e_in_valid[node(x,y,z)][1]  = ov[x];
        assign orr[x]                    = e_in_ready[node(x, y, z)][1];
        assign e_in_flit[node(x,y,z)][1]   = ofl[x];
      end
      crossbar_switch #(.N(NX), .DIM(0), .NSPLIT(NX)) u_xb (
        .clk, .rst_n, .split(split_x),
        .in_valid(iv), .in_ready(ir), .in_flit(ifl),
        .out_valid(ov), .out_ready(orr), .out_flit(ofl),
        .violation(vx[y*NZ+z])
      );
    end
  end

  // ---------------- y crossbars: one per (x, z), last port to the IOU -----
  for (genvar x = 0; x < NX; x++) begin : g_yb_x
    for (genvar z = 0; z < NZ; z++) begin : g_yb_z
      logic [NYT-1:0] iv, ir, ov, orr;
      flit_t          ifl [NYT];
      flit_t          ofl [NYT];
      for (genvar y = 0; y < NYT; y++) begin : g_p
        assign iv[y]                     = e_out_valid[node(x, y, z)][2];
        assign e_out_ready[node(x,y,z)][2] = ir[y];
        assign ifl[y]                    = e_out_flit[node(x, y, z)][2];
        assign e_in_valid[node(x,y,z)][2]  = ov[y];
        assign orr[y]                    = e_in_ready[node(x, y, z)][2];
        assign e_in_flit[node(x,y,z)][2]   = ofl[y];
      end
      crossbar_switch #(.N(NYT), .DIM(1), .NSPLIT(NY)) u_yb (
        .clk, .rst_n, .split(split_y),
        .in_valid(iv), .in_ready(ir), .in_flit(ifl),
        .out_valid(ov), .out_ready(orr), .out_flit(ofl),
        .violation(vy[x*NZ+z])
      );
    end
  end

  // ---------------- z crossbars: one per (x, y) ---------------------------
  for (genvar x = 0; x < NX; x++) begin : g_zb_x
    for (genvar y = 0; y < NYT; y++) begin : g_zb_y
      logic [NZ-1:0] iv, ir, ov, orr;
      flit_t         ifl [NZ];
      flit_t         ofl [NZ];
      for (genvar z = 0; z < NZ; z++) begin : g_p
        assign iv[z]                     = e_out_valid[node(x, y, z)][3];
        assign e_out_ready[node(x,y,z)][3] = ir[z];
        assign ifl[z]                    = e_out_flit[node(x, y, z)][3];
        assign e_in_valid[node(x,y,z)][3]  = ov[z];
        assign orr[z]                    = e_in_ready[node(x, y, z)][3];
        assign e_in_flit[node(x,y,z)][3]   = ofl[z];
      end
      crossbar_switch #(.N(NZ), .DIM(2), .NSPLIT(NZ)) u_zb (
        .clk, .rst_n, .split(split_z),
        .in_valid(iv), .in_ready(ir), .in_flit(ifl),
        .out_valid(ov), .out_ready(orr), .out_flit(ofl),
        .violation(vz[x*NYT+y])
      );
    end
  end

  assign partition_violation = |vx || |vy || |vz;
  assign mem_conflict        = |pu_conflict;
endmodule
