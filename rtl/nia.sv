// nia: network interface adapter, the node's Remote DMA engine.
//
// Send side. A command (cmd_valid/cmd_ready, rdma_cmd_t) asks to copy `len`
// 64-bit words starting at local word address `src` to word address `dst`
// in the memory of node `dest`. The NIA sends one wormhole packet: a head
// flit with the destination, two flits of remote address, one of length,
// then four 16-bit flits per word (most significant first); the last flit
// is marked tail. Words are read from local memory through the storage
// controller ahead of need (up to WBUF words in flight or buffered), so
// that with enough banks the packet streams at one flit per cycle, the
// crossbar bandwidth. send_done pulses when the tail flit has left.
//
// Receive side. An arriving packet's address and length are taken from its
// first flits; every four data flits form a word that is written to local
// memory, at consecutive addresses, without involving the processor (the
// paper's Remote DMA between user memories). While a write waits for the
// memory, the network input is held (in_ready low), so back-pressure flows
// into the network. recv_done pulses when the tail's word is written.
//
// Memory port: one request per cycle; receive writes have priority over
// send reads. Read responses come back in order. Only the put direction of
// Remote DMA is built; the packet format, buffer size and priority are this
// design's choices.
module nia
  import cppacs_pkg::*;
#(
  parameter int AW   = 23,
  parameter int WBUF = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // command from the processor
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  rdma_cmd_t         cmd,
  output logic              send_done,
  output logic              recv_done,
  // network, towards the exchanger
  output logic              out_valid,
  input  logic              out_ready,
  output flit_t             out_flit,
  input  logic              in_valid,
  output logic              in_ready,
  input  flit_t             in_flit,
  // storage controller port
  output logic              mem_valid,
  input  logic              mem_ready,
  output logic              mem_we,
  output logic [AW-1:0]     mem_addr,
  output logic [WORD_W-1:0] mem_wdata,
  input  logic              rsp_valid,
  input  logic [WORD_W-1:0] rsp_data
);
  localparam int BW = $clog2(WBUF);

  typedef enum logic [2:0] {S_IDLE, S_HEAD, S_AHI, S_ALO, S_LEN, S_DATA} sstate_t;
  typedef enum logic [2:0] {R_HEAD, R_AHI, R_ALO, R_LEN, R_DATA} rstate_t;

  // ---------------- send ----------------
  sstate_t          s_state;
  rdma_cmd_t        c;
  logic [AW-1:0]    rd_next;
  logic [15:0]      rd_left, tx_left;
  logic [1:0]       sub;
  logic [WORD_W-1:0] wf [WBUF];
  logic [BW-1:0]    wf_rd, wf_wr;
  logic [BW:0]      wf_cnt, inflight;
  logic             rd_want, rd_fire, out_fire, wf_pop;

  // ---------------- receive -------------
  rstate_t          r_state;
  logic [AW-1:0]    r_addr;
  logic [1:0]       r_sub;
  logic [3*FLIT_W-1:0] r_word;
  logic             wr_want, in_fire;

  // memory port: receive writes first
  assign wr_want   = (r_state == R_DATA) && (r_sub == 2'd3) && in_valid;
  assign rd_want   = (s_state != S_IDLE) && (rd_left != 0)
                     && (int'(wf_cnt) + int'(inflight) < WBUF);
  assign mem_valid = wr_want || rd_want;
  assign mem_we    = wr_want;
  assign mem_addr  = wr_want ? r_addr : rd_next;
  assign mem_wdata = {r_word, in_flit.data};
  assign rd_fire   = rd_want && !wr_want && mem_ready;

  // send flit generation
  assign cmd_ready = (s_state == S_IDLE);
  always_comb begin
    out_valid     = 1'b0;
    out_flit      = '0;
    case (s_state)
      S_HEAD: begin
        out_valid     = 1'b1;
        out_flit.head = 1'b1;
        out_flit.data = FLIT_W'(c.dest);
      end
      S_AHI:  begin out_valid = 1'b1; out_flit.data = c.dst[31:16]; end
      S_ALO:  begin out_valid = 1'b1; out_flit.data = c.dst[15:0]; end
      S_LEN:  begin
        out_valid     = 1'b1;
        out_flit.data = c.len;
        out_flit.tail = (c.len == 0);
      end
      S_DATA: begin
        out_valid     = (wf_cnt != 0);
        out_flit.data = wf[wf_rd][WORD_W-1-FLIT_W*int'(sub) -: FLIT_W];
        out_flit.tail = (tx_left == 16'd1) && (sub == 2'd3);
      end
      default: ;
    endcase
  end
  assign out_fire = out_valid && out_ready;
  assign wf_pop   = out_fire && (s_state == S_DATA) && (sub == 2'd3);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_state   <= S_IDLE;
      c         <= '0;
      rd_next   <= '0;
      rd_left   <= '0;
      tx_left   <= '0;
      sub       <= '0;
      wf_rd     <= '0;
      wf_wr     <= '0;
      wf_cnt    <= '0;
      inflight  <= '0;
      send_done <= 1'b0;
    end else begin
      send_done <= 1'b0;
      if (rd_fire) begin
        rd_next <= rd_next + 1'b1;
        rd_left <= rd_left - 1'b1;
      end
      if (rsp_valid) wf_wr <= wf_wr + 1'b1;
      if (wf_pop)    wf_rd <= wf_rd + 1'b1;
      wf_cnt   <= wf_cnt + (BW+1)'(rsp_valid) - (BW+1)'(wf_pop);
      inflight <= inflight + (BW+1)'(rd_fire) - (BW+1)'(rsp_valid);
      case (s_state)
        S_IDLE: if (cmd_valid) begin
          c       <= cmd;
          rd_next <= AW'(cmd.src);
          rd_left <= cmd.len;
          tx_left <= cmd.len;
          sub     <= '0;
          s_state <= S_HEAD;
        end
        S_HEAD: if (out_fire) s_state <= S_AHI;
        S_AHI:  if (out_fire) s_state <= S_ALO;
        S_ALO:  if (out_fire) s_state <= S_LEN;
        S_LEN:  if (out_fire) begin
          if (c.len == 0) begin
            s_state   <= S_IDLE;
            send_done <= 1'b1;
          end else s_state <= S_DATA;
        end
        S_DATA: if (out_fire) begin
          sub <= sub + 1'b1;
          if (sub == 2'd3) begin
            tx_left <= tx_left - 1'b1;
            if (tx_left == 16'd1) begin
              s_state   <= S_IDLE;
              send_done <= 1'b1;
            end
          end
        end
        default: s_state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rsp_valid) wf[wf_wr] <= rsp_data;
  end

  // receive
  assign in_ready = (r_state == R_DATA && r_sub == 2'd3) ? mem_ready : 1'b1;
  assign in_fire  = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_state   <= R_HEAD;
      r_addr    <= '0;
      r_sub     <= '0;
      r_word    <= '0;
      recv_done <= 1'b0;
    end else begin
      recv_done <= 1'b0;
      if (in_fire) begin
        case (r_state)
          R_HEAD: if (in_flit.head && !in_flit.tail) r_state <= R_AHI;
          R_AHI:  begin r_addr <= AW'({in_flit.data, 16'h0}); r_state <= R_ALO; end
          R_ALO:  begin r_addr <= r_addr | AW'(in_flit.data); r_state <= R_LEN; end
          R_LEN:  begin
            r_sub <= '0;
            if (in_flit.tail) begin
              r_state   <= R_HEAD;
              recv_done <= 1'b1;
            end else r_state <= R_DATA;
          end
          R_DATA: begin
            r_sub  <= r_sub + 1'b1;
            r_word <= {r_word[2*FLIT_W-1:0], in_flit.data};
            if (r_sub == 2'd3) begin
              r_addr <= r_addr + 1'b1;
              if (in_flit.tail) begin
                r_state   <= R_HEAD;
                recv_done <= 1'b1;
              end
            end
          end
          default: r_state <= R_HEAD;
        endcase
      end
    end
  end

  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    rsp_valid |-> inflight != 0);
endmodule
