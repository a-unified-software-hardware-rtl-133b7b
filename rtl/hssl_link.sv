// hssl_link: link layer of one high-speed serial link (HSSL) port of a
// SCALP node, between a router port and the serial transceiver.
//
// The transmit half (hssl_link_tx) appends a CRC-32 check word to every
// packet the router sends; the receive half (hssl_link_rx) buffers each
// incoming packet, checks its CRC and passes it to the router only if it is
// intact, discarding and counting it otherwise.  Together they give the
// link-integrity guarantee the paper assigns to the routing layer.
//
// Interface: router side: a word stream out of the router (rt_tx_*) and one
// into it (rt_rx_*).  Lane side: the parallel words exchanged with the
// serial transceiver (lane_tx_* and lane_rx_*), where lane_*_last marks the
// check word.  The transceiver itself (6.25 Gb/s serialiser, clock
// recovery) lies outside; it is expected to carry the valid/ready flow
// control across the link.  Timing: see the two halves.
module hssl_link
  import scalp_pkg::*;
#(
  parameter int unsigned RX_DEPTH = 256
) (
  input  logic              clk,
  input  logic              rst_n,
  // router -> link
  input  logic [DATA_W-1:0] rt_tx_data,
  input  logic              rt_tx_last,
  input  logic              rt_tx_valid,
  output logic              rt_tx_ready,
  // link -> router
  output logic [DATA_W-1:0] rt_rx_data,
  output logic              rt_rx_last,
  output logic              rt_rx_valid,
  input  logic              rt_rx_ready,
  // link -> transceiver
  output logic [DATA_W-1:0] lane_tx_data,
  output logic              lane_tx_last,
  output logic              lane_tx_valid,
  input  logic              lane_tx_ready,
  // transceiver -> link
  input  logic [DATA_W-1:0] lane_rx_data,
  input  logic              lane_rx_last,
  input  logic              lane_rx_valid,
  output logic              lane_rx_ready,
  output logic [15:0]       crc_errors,
  output logic [15:0]       packets_ok
);
  hssl_link_tx u_tx (
    .clk, .rst_n,
    .in_data(rt_tx_data), .in_last(rt_tx_last), .in_valid(rt_tx_valid), .in_ready(rt_tx_ready),
    .lane_data(lane_tx_data), .lane_last(lane_tx_last),
    .lane_valid(lane_tx_valid), .lane_ready(lane_tx_ready)
  );

  hssl_link_rx #(.DEPTH(RX_DEPTH)) u_rx (
    .clk, .rst_n,
    .lane_data(lane_rx_data), .lane_last(lane_rx_last),
    .lane_valid(lane_rx_valid), .lane_ready(lane_rx_ready),
    .out_data(rt_rx_data), .out_last(rt_rx_last),
    .out_valid(rt_rx_valid), .out_ready(rt_rx_ready),
    .crc_errors, .packets_ok
  );
endmodule
