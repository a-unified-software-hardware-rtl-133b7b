// hssl_link_rx: receive half of the link layer of one high-speed serial
// link (HSSL) port.
//
// Words arriving from the lane are written into a circular buffer while a
// running CRC-32 is computed over them.  When the check word (lane_last)
// arrives, it is compared with the complemented CRC: if they match, the
// packet is committed (its last word gets the last flag) and becomes
// visible to the router; if not, the write pointer falls back to the start
// of the packet, the packet is discarded and crc_errors counts it.  The
// router therefore never sees a corrupted or partial packet
// (store-and-forward).
//
// Interface: lane side and router side are word streams with valid/ready.
// lane_ready is low only when the buffer is full.  Timing: a packet of L
// words becomes readable the cycle after its check word was accepted and is
// then read at one word per cycle.  DEPTH must be a power of two and hold
// at least two largest packets (header + 64 words), so that one packet can
// be read while the next is received.  Checking integrity follows the
// paper; the CRC-32 code, the discard policy (no retransmission) and the
// buffer size are this design's own choices.
module hssl_link_rx
  import scalp_pkg::*;
#(
  parameter int unsigned DEPTH = 256
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [DATA_W-1:0] lane_data,
  input  logic              lane_last,
  input  logic              lane_valid,
  output logic              lane_ready,
  output logic [DATA_W-1:0] out_data,
  output logic              out_last,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [15:0]       crc_errors,
  output logic [15:0]       packets_ok
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [DATA_W-1:0] mem_data [DEPTH];
  logic              mem_last [DEPTH];
  logic [AW:0]       wr_ptr, commit_ptr, rd_ptr;   // one extra wrap bit
  logic [31:0]       crc;
  logic              take, give, crc_good;
  logic [AW:0]       used;

  assign used       = wr_ptr - rd_ptr;
  assign lane_ready = (used < (AW+1)'(DEPTH));
  assign take       = lane_valid && lane_ready;
  assign out_valid  = (rd_ptr != commit_ptr);
  assign give       = out_valid && out_ready;
  assign out_data   = mem_data[rd_ptr[AW-1:0]];
  assign out_last   = mem_last[rd_ptr[AW-1:0]];
  // A check word closing an empty frame is treated as an error.
  assign crc_good   = (lane_data[31:0] == ~crc) && (wr_ptr != commit_ptr);

  always_ff @(posedge clk) begin
    if (take && !lane_last) begin
      mem_data[wr_ptr[AW-1:0]] <= lane_data;
      mem_last[wr_ptr[AW-1:0]] <= 1'b0;
    end else if (take && lane_last && crc_good) begin
      mem_last[AW'(wr_ptr - 1'b1)] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr     <= '0;
      commit_ptr <= '0;
      rd_ptr     <= '0;
      crc        <= '1;
      crc_errors <= '0;
      packets_ok <= '0;
    end else begin
      if (give) rd_ptr <= rd_ptr + 1'b1;
      if (take) begin
        if (!lane_last) begin
          wr_ptr <= wr_ptr + 1'b1;
          crc    <= crc32_word(crc, lane_data);
        end else begin
          crc <= '1;
          if (crc_good) begin
            commit_ptr <= wr_ptr;
            packets_ok <= packets_ok + 1'b1;
          end else begin
            wr_ptr     <= commit_ptr;
            crc_errors <= crc_errors + 1'b1;
          end
        end
      end
    end
  end

  initial assert (DEPTH >= 2 * (PKT_WORDS + 1) && (DEPTH & (DEPTH - 1)) == 0);

endmodule
