// hssl_link_tx: transmit half of the link layer of one high-speed serial
// link (HSSL) port.
//
// Passes the words of each packet from the router to the serial lane and,
// after the packet's last word, appends one check word holding the
// complement of the CRC-32 of all the packet's words.  The check word is the
// only word sent on the lane with lane_last set; the packet's own last flag
// is carried by the check word instead.
//
// Interface: router side and lane side are word streams with valid/ready.
// Timing: one word per cycle while the lane is ready; one extra cycle per
// packet for the check word.  The CRC framing is this design's choice: the
// paper states only that the routing layer guarantees link integrity.
module hssl_link_tx
  import scalp_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [DATA_W-1:0] in_data,
  input  logic              in_last,
  input  logic              in_valid,
  output logic              in_ready,
  output logic [DATA_W-1:0] lane_data,
  output logic              lane_last,
  output logic              lane_valid,
  input  logic              lane_ready
);
  logic        send_crc;   // the next lane word is the check word
  logic [31:0] crc;

  always_comb begin
    if (send_crc) begin
      lane_data  = {32'h0, ~crc};
      lane_last  = 1'b1;
      lane_valid = 1'b1;
      in_ready   = 1'b0;
    end else begin
      lane_data  = in_data;
      lane_last  = 1'b0;
      lane_valid = in_valid;
      in_ready   = lane_ready;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      send_crc <= 1'b0;
      crc      <= '1;
    end else if (send_crc) begin
      if (lane_ready) begin
        send_crc <= 1'b0;
        crc      <= '1;
      end
    end else if (in_valid && lane_ready) begin
      crc <= crc32_word(crc, in_data);
      if (in_last) send_crc <= 1'b1;
    end
  end
endmodule
