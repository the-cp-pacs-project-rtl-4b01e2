// cppacs_pkg: types and constants shared by the node and network modules.
//
// The network moves 16-bit flits. One flit per 150 MHz cycle is 300 MB/s,
// the per-crossbar bandwidth of the machine; the flit width is this design's
// choice made to meet that figure. Every flit carries two sideband bits, head
// and tail, that frame a wormhole packet. The head flit holds the destination
// node coordinate (x: 3 bits, y: 5 bits, z: 4 bits, enough for the 8x17x16
// node array). Packet layout (this design's own):
//   flit 0  head: {4'b0, dest.x, dest.y, dest.z}
//   flit 1  remote word address [31:16]
//   flit 2  remote word address [15:0]
//   flit 3  length in 64-bit words (>= 1)
//   then 4 flits per 64-bit word, most significant half-word first; the
//   last flit has tail set.
package cppacs_pkg;

  localparam int FLIT_W = 16;   // flit payload bits
  localparam int XW     = 3;    // x coordinate bits (8 nodes)
  localparam int YW     = 5;    // y coordinate bits (16 PU + 1 IOU planes)
  localparam int ZW     = 4;    // z coordinate bits (16 nodes)
  localparam int WORD_W = 64;   // floating point / memory word
  localparam int ADDR_W = 32;   // word address as carried in commands and packets
  localparam int FLITS_PER_WORD = WORD_W / FLIT_W;

  typedef struct packed {
    logic              head;
    logic              tail;
    logic [FLIT_W-1:0] data;
  } flit_t;

  typedef struct packed {
    logic [XW-1:0] x;
    logic [YW-1:0] y;
    logic [ZW-1:0] z;
  } coord_t;

  // Remote DMA put: copy len words from local src to dst on node dest.
  typedef struct packed {
    coord_t            dest;
    logic [ADDR_W-1:0] src;
    logic [ADDR_W-1:0] dst;
    logic [15:0]       len;
  } rdma_cmd_t;

  typedef enum logic {
    OP_PRELOAD   = 1'b0,
    OP_POSTSTORE = 1'b1
  } ls_op_t;

  // Signals the (not modelled) PA-RISC core drives into one processing unit.
  typedef struct packed {
    logic              slide_valid;  // slide the register window forward
    logic [6:0]        slide_amt;
    logic [4:0]        rs1;          // logical register read ports
    logic [4:0]        rs2;
    logic              wr_valid;     // logical register write port
    logic [4:0]        wr_lreg;
    logic [WORD_W-1:0] wr_data;
    logic              ls_valid;     // preload / poststore issue
    ls_op_t            ls_op;
    logic [4:0]        ls_lreg;
    logic signed [7:0] ls_delta;     // window offset of the target window
    logic [ADDR_W-1:0] ls_addr;
    logic              rdma_valid;   // remote DMA command
    rdma_cmd_t         rdma;
  } pu_cpu_in_t;

  typedef struct packed {
    logic [WORD_W-1:0] rs1_data;
    logic              rs1_busy;     // preload to this register still pending
    logic [WORD_W-1:0] rs2_data;
    logic              rs2_busy;
    logic              wr_busy;
    logic              ls_ready;
    logic              rdma_ready;
    logic              send_done;    // pulse: a remote DMA send finished
    logic              recv_done;    // pulse: a packet was written to memory
  } pu_cpu_out_t;

  function automatic coord_t head_dest(flit_t f);
    return coord_t'(f.data[XW+YW+ZW-1:0]);
  endfunction

endpackage
