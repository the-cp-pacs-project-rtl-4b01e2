// storage_controller: the node's storage controller (SC) and main memory.
//
// Two requesters share the memory: port 0 is the CPU's preload/poststore
// path, port 1 the network interface adapter (NIA). Memory is NBANKS banks
// interleaved on the low-order word-address bits (bank = addr mod NBANKS),
// so consecutive words fall in different banks and a stream of accesses is
// pipelined across them. A bank that has been accessed is busy for
// BANK_BUSY cycles (the DRAM cycle time); a request to a busy bank waits
// (req_ready low): this is the bank-conflict stall. Both ports may be
// served in the same cycle when they address different free banks; when
// they want the same bank, priority alternates between them.
//
// Reads return rsp_valid/rsp_data exactly RD_LAT cycles after the cycle in
// which the request was accepted, in order per port. Writes give no
// response. The paper states that main memory is built of multiple
// interleaved banks and holds 64 MByte per node (MEM_WORDS = 8M words);
// NBANKS = 8, BANK_BUSY = 4, RD_LAT = 8 and the two-port arbitration are
// this design's choices.
module storage_controller
  import cppacs_pkg::*;
#(
  parameter int NBANKS    = 8,
  parameter int MEM_WORDS = 8388608,
  parameter int BANK_BUSY = 4,
  parameter int RD_LAT    = 8,
  localparam int AW = $clog2(MEM_WORDS),
  localparam int BW = $clog2(NBANKS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [1:0]        req_valid,
  output logic [1:0]        req_ready,
  input  logic [1:0]        req_we,
  input  logic [AW-1:0]     req_addr  [2],
  input  logic [WORD_W-1:0] req_wdata [2],
  output logic [1:0]        rsp_valid,
  output logic [WORD_W-1:0] rsp_data  [2],
  output logic              conflict       // a valid request waited this cycle
);
  localparam int BANK_WORDS = MEM_WORDS / NBANKS;
  localparam int RW = AW - BW;

  logic [$clog2(BANK_BUSY+1)-1:0] busy [NBANKS];
  logic [BW-1:0]     bank [2];
  logic [1:0]        free, gnt;
  logic              prio;
  int unsigned       first, second;

  // Bank enables and the data each bank returns.
  logic [NBANKS-1:0] b_en, b_we;
  logic [RW-1:0]     b_addr  [NBANKS];
  logic [WORD_W-1:0] b_wdata [NBANKS];
  logic [WORD_W-1:0] b_rdata [NBANKS];

  always_comb begin
    for (int r = 0; r < 2; r++) begin
      bank[r] = req_addr[r][BW-1:0];
      free[r] = (busy[bank[r]] == 0);
    end
    first  = prio ? 1 : 0;
    second = prio ? 0 : 1;
    gnt = '0;
    gnt[first]  = req_valid[first] && free[first];
    gnt[second] = req_valid[second] && free[second]
                  && !(gnt[first] && bank[first] == bank[second]);
    req_ready = gnt;
    conflict  = |(req_valid & ~gnt);
  end

  always_comb begin
    for (int b = 0; b < NBANKS; b++) begin
      b_en[b]    = 1'b0;
      b_we[b]    = 1'b0;
      b_addr[b]  = '0;
      b_wdata[b] = '0;
      for (int r = 0; r < 2; r++)
        if (gnt[r] && int'(bank[r]) == b) begin
          b_en[b]    = 1'b1;
          b_we[b]    = req_we[r];
          b_addr[b]  = req_addr[r][AW-1:BW];
          b_wdata[b] = req_wdata[r];
        end
    end
  end

  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    memory_bank #(.WORDS(BANK_WORDS), .W(WORD_W)) u_bank (
      .clk,
      .en    (b_en[b]),
      .we    (b_we[b]),
      .addr  (b_addr[b]),
      .wdata (b_wdata[b]),
      .rdata (b_rdata[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prio <= 1'b0;
      for (int b = 0; b < NBANKS; b++) busy[b] <= '0;
    end else begin
      for (int b = 0; b < NBANKS; b++)
        if (b_en[b])          busy[b] <= ($bits(busy[b]))'(BANK_BUSY - 1);
        else if (busy[b] != 0) busy[b] <= busy[b] - 1'b1;
      if (req_valid[first] && req_valid[second] && bank[0] == bank[1]) prio <= ~prio;
    end
  end

  // Read return: stage 1 knows which bank answers; the bank data is then
  // delayed to make the total latency RD_LAT.
  for (genvar r = 0; r < 2; r++) begin : g_ret
    logic          s1_valid;
    logic [BW-1:0] s1_bank;
    logic [RD_LAT-2:0]  d_valid;
    logic [WORD_W-1:0]  d_data [RD_LAT-1];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        s1_valid <= 1'b0;
        s1_bank  <= '0;
        d_valid  <= '0;
      end else begin
        s1_valid <= gnt[r] && !req_we[r];
        s1_bank  <= bank[r];
        d_valid  <= {d_valid[RD_LAT-3:0], s1_valid};
      end
    end

    always_ff @(posedge clk) begin
      d_data[0] <= b_rdata[s1_bank];
      for (int k = 1; k < RD_LAT-1; k++) d_data[k] <= d_data[k-1];
    end

    assign rsp_valid[r] = d_valid[RD_LAT-2];
    assign rsp_data[r]  = d_data[RD_LAT-2];
  end

  initial assert (RD_LAT >= 3) else $error("RD_LAT must be at least 3");
endmodule
