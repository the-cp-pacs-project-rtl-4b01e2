// memory_bank: one bank of a node's main memory.
//
// A single-port synchronous RAM of WORDS 64-bit words: when en is high the
// word at addr is written (we high) or read; read data appears on rdata one
// cycle later and holds until the next read. The node's memory is several
// such banks interleaved by the storage controller. The paper gives 64 MByte
// of DRAM per node in multiple interleaved banks; the bank count (8, hence
// 1M words per bank) is this design's choice, and DRAM timing is modelled
// in the storage controller, not here.
module memory_bank #(
  parameter int WORDS = 1048576,
  parameter int W     = 64,
  localparam int AW = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [W-1:0]  wdata,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
