// scalp_dma: the DMA channel between a SCALP node's local memory and the
// local port of its router.
//
// The processor prepares data in its memory and starts a transfer through a
// small register file; the DMA then sends one packet: a header word that it
// builds from the destination register and the node's own address, followed
// by MM2S_LEN payload words read from memory starting at MM2S_ADDR.  In the
// other direction it writes every word that arrives from the router (header
// included) to consecutive memory words starting at S2MM_ADDR, and counts
// words and packets so that software can find them.  Splitting a large
// object into packets and reassembling it stay in software, as in the paper.
//
// Registers (32-bit, word addressed, cfg_addr):
//   0 CTRL      write 1 to bit 0: start sending a packet (ignored while busy)
//   1 MM2S_ADDR first memory word of the payload to send
//   2 MM2S_LEN  payload words, 1..64 (larger values are cut to 64)
//   3 MM2S_DST  destination node {z,y,x}, 4 bits each, in bits 11:0
//   4 S2MM_ADDR memory word where received words are written; writing it
//               also clears S2MM_WORDS and S2MM_PKTS
//   5 STATUS    bit 0: a packet is being sent (read only)
//   6 S2MM_WORDS words written to memory since S2MM_ADDR was set (read only)
//   7 S2MM_PKTS  packets received since S2MM_ADDR was set (read only)
//   8 MM2S_PKTS  packets sent since reset (read only)
//
// Memory ports: a read port (rd_req/rd_addr accepted when rd_ready, data
// returned later with rd_valid, one read outstanding) and a write port
// (wr_req/wr_addr/wr_data accepted when wr_ready).  Timing: sending takes,
// per payload word, the memory latency plus two cycles; receiving writes one
// word per cycle when memory is ready.  A DMA channel between memory and
// router follows the paper; the register map, the single-packet transfers
// and the memory handshakes are this design's own choices.
module scalp_dma
  import scalp_pkg::*;
#(
  parameter int unsigned ADDR_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  coord_t            here,
  // processor register port
  input  logic              cfg_we,
  input  logic [3:0]        cfg_addr,
  input  logic [31:0]       cfg_wdata,
  output logic [31:0]       cfg_rdata,
  // memory read port
  output logic              rd_req,
  output logic [ADDR_W-1:0] rd_addr,
  input  logic              rd_ready,
  input  logic              rd_valid,
  input  logic [DATA_W-1:0] rd_data,
  // memory write port
  output logic              wr_req,
  output logic [ADDR_W-1:0] wr_addr,
  output logic [DATA_W-1:0] wr_data,
  input  logic              wr_ready,
  // stream to the router's local input
  output logic [DATA_W-1:0] tx_data,
  output logic              tx_last,
  output logic              tx_valid,
  input  logic              tx_ready,
  // stream from the router's local output (through the receive FIFO)
  input  logic [DATA_W-1:0] rx_data,
  input  logic              rx_last,
  input  logic              rx_valid,
  output logic              rx_ready
);
  typedef enum logic [2:0] {S_IDLE, S_HDR, S_READ, S_WAIT, S_SEND} mm2s_state_e;

  mm2s_state_e       state;
  logic [ADDR_W-1:0] mm2s_addr, s2mm_addr;
  logic [LEN_W-1:0]  mm2s_len;
  coord_t            mm2s_dst;
  logic [ADDR_W-1:0] cur_addr;
  logic [LEN_W-1:0]  remaining;
  logic [DATA_W-1:0] word;
  logic [31:0]       s2mm_words, s2mm_pkts, mm2s_pkts;
  header_t           hdr;

  always_comb begin
    hdr      = '0;
    hdr.dst  = mm2s_dst;
    hdr.src  = here;
    hdr.len  = mm2s_len;
  end

  // ---------------- registers ----------------
  always_comb begin
    unique case (cfg_addr)
      4'd1:    cfg_rdata = 32'(mm2s_addr);
      4'd2:    cfg_rdata = 32'(mm2s_len);
      4'd3:    cfg_rdata = 32'(mm2s_dst);
      4'd4:    cfg_rdata = 32'(s2mm_addr);
      4'd5:    cfg_rdata = {31'b0, state != S_IDLE};
      4'd6:    cfg_rdata = s2mm_words;
      4'd7:    cfg_rdata = s2mm_pkts;
      4'd8:    cfg_rdata = mm2s_pkts;
      default: cfg_rdata = '0;
    endcase
  end

  // ---------------- memory to stream ----------------
  assign rd_req   = (state == S_READ);
  assign rd_addr  = cur_addr;
  assign tx_valid = (state == S_HDR) || (state == S_SEND);
  assign tx_data  = (state == S_HDR) ? DATA_W'(hdr) : word;
  assign tx_last  = (state == S_SEND) && (remaining == LEN_W'(1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      mm2s_addr <= '0;
      mm2s_len  <= '0;
      mm2s_dst  <= '0;
      s2mm_addr <= '0;
      cur_addr  <= '0;
      remaining <= '0;
      word      <= '0;
      mm2s_pkts <= '0;
    end else begin
      if (cfg_we) begin
        unique case (cfg_addr)
          4'd1: mm2s_addr <= ADDR_W'(cfg_wdata);
          4'd2: mm2s_len  <= (cfg_wdata > PKT_WORDS) ? LEN_W'(PKT_WORDS) : LEN_W'(cfg_wdata);
          4'd3: mm2s_dst  <= coord_t'(cfg_wdata[3*COORD_W-1:0]);
          4'd4: s2mm_addr <= ADDR_W'(cfg_wdata);
          default: ;
        endcase
      end
      unique case (state)
        S_IDLE: if (cfg_we && cfg_addr == 4'd0 && cfg_wdata[0] && mm2s_len != '0) begin
          state     <= S_HDR;
          cur_addr  <= mm2s_addr;
          remaining <= mm2s_len;
        end
        S_HDR:  if (tx_ready) state <= S_READ;
        S_READ: if (rd_ready) state <= S_WAIT;
        S_WAIT: if (rd_valid) begin
          word  <= rd_data;
          state <= S_SEND;
        end
        S_SEND: if (tx_ready) begin
          cur_addr  <= cur_addr + 1'b1;
          remaining <= remaining - 1'b1;
          if (remaining == LEN_W'(1)) begin
            state     <= S_IDLE;
            mm2s_pkts <= mm2s_pkts + 1'b1;
          end else begin
            state <= S_READ;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------- stream to memory ----------------
  assign wr_req   = rx_valid;
  assign wr_addr  = s2mm_addr + ADDR_W'(s2mm_words);
  assign wr_data  = rx_data;
  assign rx_ready = wr_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s2mm_words <= '0;
      s2mm_pkts  <= '0;
    end else if (cfg_we && cfg_addr == 4'd4) begin
      s2mm_words <= '0;
      s2mm_pkts  <= '0;
    end else if (rx_valid && wr_ready) begin
      s2mm_words <= s2mm_words + 1'b1;
      if (rx_last) s2mm_pkts <= s2mm_pkts + 1'b1;
    end
  end

  // A payload is 1..64 words long.
  assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_HDR) |-> (remaining != '0 && remaining <= LEN_W'(PKT_WORDS)));

endmodule
