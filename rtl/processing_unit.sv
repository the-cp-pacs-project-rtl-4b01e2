// processing_unit: one PU node, as far as the paper lets it be built.
//
// Holds the slide-windowed register file, the preload/poststore unit, the
// storage controller with the node's main memory, and the network interface
// adapter. The superscalar PA-RISC core, its floating point units and its
// caches are not modelled: everything the core would drive or see appears
// on cpu_in / cpu_out (see cppacs_pkg). Wiring:
//   core preload/poststore -> register file translation -> preload/poststore
//   unit -> storage controller port 0; read data returns into the register
//   file's preload write port.
//   remote DMA command -> NIA -> storage controller port 1; NIA <-> exchanger.
// The node's main memory defaults to the paper's 64 MByte (8M words).
module processing_unit
  import cppacs_pkg::*;
#(
  parameter int NPHYS     = 128,
  parameter int NLOG      = 32,
  parameter int NGLOBAL   = 8,
  parameter int QDEPTH    = 16,
  parameter int NBANKS    = 8,
  parameter int MEM_WORDS = 8388608,
  parameter int BANK_BUSY = 4,
  parameter int RD_LAT    = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  pu_cpu_in_t  cpu_in,
  output pu_cpu_out_t cpu_out,
  output logic        net_out_valid,
  input  logic        net_out_ready,
  output flit_t       net_out_flit,
  input  logic        net_in_valid,
  output logic        net_in_ready,
  input  flit_t       net_in_flit,
  output logic        mem_conflict
);
  localparam int AW = $clog2(MEM_WORDS);
  localparam int PW = $clog2(NPHYS);

  logic [PW-1:0]     fwp, ls_preg, pend_preg, pl_preg;
  logic [WORD_W-1:0] ls_data, pl_data;
  logic              ls_pending, pend_set, pl_we;

  logic [1:0]        m_valid, m_ready, m_we, r_valid;
  logic [AW-1:0]     m_addr  [2];
  logic [WORD_W-1:0] m_wdata [2];
  logic [WORD_W-1:0] r_data  [2];
  logic [$clog2(QDEPTH+1)-1:0] outstanding;

  sw_regfile #(.NPHYS(NPHYS), .NLOG(NLOG), .NGLOBAL(NGLOBAL), .W(WORD_W)) u_rf (
    .clk, .rst_n,
    .slide_valid (cpu_in.slide_valid),
    .slide_amt   (cpu_in.slide_amt),
    .fwp         (fwp),
    .rs1         (cpu_in.rs1),
    .rs1_data    (cpu_out.rs1_data),
    .rs1_busy    (cpu_out.rs1_busy),
    .rs2         (cpu_in.rs2),
    .rs2_data    (cpu_out.rs2_data),
    .rs2_busy    (cpu_out.rs2_busy),
    .wr_valid    (cpu_in.wr_valid),
    .wr_lreg     (cpu_in.wr_lreg),
    .wr_data     (cpu_in.wr_data),
    .wr_busy     (cpu_out.wr_busy),
    .ls_lreg     (cpu_in.ls_lreg),
    .ls_delta    (cpu_in.ls_delta),
    .ls_preg     (ls_preg),
    .ls_data     (ls_data),
    .ls_pending  (ls_pending),
    .pend_set    (pend_set),
    .pend_preg   (pend_preg),
    .pl_we       (pl_we),
    .pl_preg     (pl_preg),
    .pl_data     (pl_data)
  );

  preload_poststore_unit #(.QDEPTH(QDEPTH), .PW(PW), .AW(AW)) u_pps (
    .clk, .rst_n,
    .ls_valid    (cpu_in.ls_valid),
    .ls_ready    (cpu_out.ls_ready),
    .ls_op       (cpu_in.ls_op),
    .ls_addr     (AW'(cpu_in.ls_addr)),
    .ls_preg     (ls_preg),
    .ls_data     (ls_data),
    .ls_pending  (ls_pending),
    .pend_set    (pend_set),
    .pend_preg   (pend_preg),
    .pl_we       (pl_we),
    .pl_preg     (pl_preg),
    .pl_data     (pl_data),
    .mem_valid   (m_valid[0]),
    .mem_ready   (m_ready[0]),
    .mem_we      (m_we[0]),
    .mem_addr    (m_addr[0]),
    .mem_wdata   (m_wdata[0]),
    .rsp_valid   (r_valid[0]),
    .rsp_data    (r_data[0]),
    .outstanding (outstanding)
  );

  storage_controller #(.NBANKS(NBANKS), .MEM_WORDS(MEM_WORDS),
                       .BANK_BUSY(BANK_BUSY), .RD_LAT(RD_LAT)) u_sc (
    .clk, .rst_n,
    .req_valid (m_valid),
    .req_ready (m_ready),
    .req_we    (m_we),
    .req_addr  (m_addr),
    .req_wdata (m_wdata),
    .rsp_valid (r_valid),
    .rsp_data  (r_data),
    .conflict  (mem_conflict)
  );

  nia #(.AW(AW)) u_nia (
    .clk, .rst_n,
    .cmd_valid (cpu_in.rdma_valid),
    .cmd_ready (cpu_out.rdma_ready),
    .cmd       (cpu_in.rdma),
    .send_done (cpu_out.send_done),
    .recv_done (cpu_out.recv_done),
    .out_valid (net_out_valid),
    .out_ready (net_out_ready),
    .out_flit  (net_out_flit),
    .in_valid  (net_in_valid),
    .in_ready  (net_in_ready),
    .in_flit   (net_in_flit),
    .mem_valid (m_valid[1]),
    .mem_ready (m_ready[1]),
    .mem_we    (m_we[1]),
    .mem_addr  (m_addr[1]),
    .mem_wdata (m_wdata[1]),
    .rsp_valid (r_valid[1]),
    .rsp_data  (r_data[1])
  );
endmodule
