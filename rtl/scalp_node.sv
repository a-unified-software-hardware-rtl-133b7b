// scalp_node: the programmable-logic part of one SCALP node, the building
// block of the multi-board platform on which the ReSOM multimodal
// self-organizing-map model is distributed (one map per board).
//
// The node is split into a routing layer and a computation layer.  The
// routing layer is a 7-port crossbar router (scalp_router) with one link
// layer (hssl_link) on each of the six neighbour ports (north, south, east,
// west, top, bottom); packets that are not for this node are forwarded to
// the next node without involving its processor.  Packets addressed to this
// node leave the router's local port into a receive FIFO holding one
// 64-word packet (axis_fifo).  The computation layer's DMA channel
// (scalp_dma) moves packets between local memory and the router's local
// port.  The processor, the DDR memory and the serial transceivers are
// outside this module: their signals are ports.
//
// Interface:
//   here            this node's (x, y, z) address
//   cfg_*           processor access to the DMA registers (see scalp_dma)
//   rd_* / wr_*     local memory read and write ports (see scalp_dma)
//   lane_tx_* [d]   words to the transceiver of neighbour direction d
//   lane_rx_* [d]   words from the transceiver of neighbour direction d,
//                   d = port number - 1: 0 north, 1 south, 2 east, 3 west,
//                   4 top, 5 bottom.  The *_last flag marks each packet's
//                   CRC check word.  A node's north lane connects to the
//                   south lane of the node above it, east to west, top to
//                   bottom.
//   crc_errors [d]  packets discarded by the link of direction d
//   packets_ok [d]  packets accepted by the link of direction d
//
// Timing: a word stream through the node moves one 64-bit word per clock;
// forwarding a packet through an intermediate node costs its link buffering
// (the whole packet is received and checked first) plus two router cycles.
module scalp_node
  import scalp_pkg::*;
#(
  parameter int unsigned ADDR_W      = 32,
  parameter int unsigned RX_FIFO_DEPTH = PKT_WORDS,
  parameter int unsigned LINK_DEPTH  = 256,
  parameter int unsigned ROUTER_DEPTH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  coord_t            here,
  input  logic              cfg_we,
  input  logic [3:0]        cfg_addr,
  input  logic [31:0]       cfg_wdata,
  output logic [31:0]       cfg_rdata,
  output logic              rd_req,
  output logic [ADDR_W-1:0] rd_addr,
  input  logic              rd_ready,
  input  logic              rd_valid,
  input  logic [DATA_W-1:0] rd_data,
  output logic              wr_req,
  output logic [ADDR_W-1:0] wr_addr,
  output logic [DATA_W-1:0] wr_data,
  input  logic              wr_ready,
  output logic [DATA_W-1:0] lane_tx_data  [NPORTS-1],
  output logic              lane_tx_last  [NPORTS-1],
  output logic              lane_tx_valid [NPORTS-1],
  input  logic              lane_tx_ready [NPORTS-1],
  input  logic [DATA_W-1:0] lane_rx_data  [NPORTS-1],
  input  logic              lane_rx_last  [NPORTS-1],
  input  logic              lane_rx_valid [NPORTS-1],
  output logic              lane_rx_ready [NPORTS-1],
  output logic [15:0]       crc_errors    [NPORTS-1],
  output logic [15:0]       packets_ok    [NPORTS-1]
);
  // Router port bundles.
  logic [DATA_W-1:0] r_in_data  [NPORTS];
  logic              r_in_last  [NPORTS];
  logic              r_in_valid [NPORTS];
  logic              r_in_ready [NPORTS];
  logic [DATA_W-1:0] r_out_data  [NPORTS];
  logic              r_out_last  [NPORTS];
  logic              r_out_valid [NPORTS];
  logic              r_out_ready [NPORTS];

  // Receive FIFO to DMA.
  logic [DATA_W-1:0] q_data;
  logic              q_last, q_valid, q_ready;

  scalp_router #(.IN_DEPTH(ROUTER_DEPTH)) u_router (
    .clk, .rst_n, .here,
    .in_data(r_in_data), .in_last(r_in_last), .in_valid(r_in_valid), .in_ready(r_in_ready),
    .out_data(r_out_data), .out_last(r_out_last), .out_valid(r_out_valid), .out_ready(r_out_ready)
  );

  for (genvar d = 0; d < NPORTS - 1; d++) begin : g_link
    hssl_link #(.RX_DEPTH(LINK_DEPTH)) u_link (
      .clk, .rst_n,
      .rt_tx_data(r_out_data[d+1]), .rt_tx_last(r_out_last[d+1]),
      .rt_tx_valid(r_out_valid[d+1]), .rt_tx_ready(r_out_ready[d+1]),
      .rt_rx_data(r_in_data[d+1]), .rt_rx_last(r_in_last[d+1]),
      .rt_rx_valid(r_in_valid[d+1]), .rt_rx_ready(r_in_ready[d+1]),
      .lane_tx_data(lane_tx_data[d]), .lane_tx_last(lane_tx_last[d]),
      .lane_tx_valid(lane_tx_valid[d]), .lane_tx_ready(lane_tx_ready[d]),
      .lane_rx_data(lane_rx_data[d]), .lane_rx_last(lane_rx_last[d]),
      .lane_rx_valid(lane_rx_valid[d]), .lane_rx_ready(lane_rx_ready[d]),
      .crc_errors(crc_errors[d]), .packets_ok(packets_ok[d])
    );
  end

  axis_fifo #(.W(DATA_W), .DEPTH(RX_FIFO_DEPTH)) u_rx_fifo (
    .clk, .rst_n,
    .in_data(r_out_data[P_LOCAL]), .in_last(r_out_last[P_LOCAL]),
    .in_valid(r_out_valid[P_LOCAL]), .in_ready(r_out_ready[P_LOCAL]),
    .out_data(q_data), .out_last(q_last), .out_valid(q_valid), .out_ready(q_ready),
    .count()
  );

  scalp_dma #(.ADDR_W(ADDR_W)) u_dma (
    .clk, .rst_n, .here,
    .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata,
    .rd_req, .rd_addr, .rd_ready, .rd_valid, .rd_data,
    .wr_req, .wr_addr, .wr_data, .wr_ready,
    .tx_data(r_in_data[P_LOCAL]), .tx_last(r_in_last[P_LOCAL]),
    .tx_valid(r_in_valid[P_LOCAL]), .tx_ready(r_in_ready[P_LOCAL]),
    .rx_data(q_data), .rx_last(q_last), .rx_valid(q_valid), .rx_ready(q_ready)
  );
endmodule
