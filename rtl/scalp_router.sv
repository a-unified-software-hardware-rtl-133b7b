// scalp_router: the crossbar packet switch of a SCALP node's routing layer.
//
// The router has one port per neighbour direction (north, south, east, west,
// top, bottom) and a local port toward the DMA channel.  Every packet that
// arrives on any port, whether from the local DMA or from a neighbour, is
// forwarded to the port toward its destination node, so a packet crosses
// intermediate nodes without touching their processor.
//
// How it works: each input port has a small FIFO.  While an input is idle,
// the word at the head of its FIFO is a packet header; route_compute turns
// its destination into an output port request.  Each output port has a
// round-robin arbiter; when the output is free it grants one requesting
// input and stays connected to it until the word flagged 'last' has passed
// (wormhole switching, one packet at a time per output).  The crossbar is a
// multiplexer per output selecting the data of the granted input.  Packets
// to different outputs flow in parallel; packets that want the same output
// wait in their input FIFO (back-pressure through in_ready).
//
// Interface: per port a 64-bit word stream with 'last' and valid/ready.
// Port numbers follow scalp_pkg::port_e.  'here' holds this node's address.
// Timing: a header accepted at an input in cycle n reaches the head of the
// input FIFO in cycle n+1, is granted in that cycle if its output is free,
// and is offered at the output in cycle n+2.  After that one word passes per
// cycle, so a free path carries one 64-bit word per clock and a packet of
// L words leaves the router L+2 cycles after its header entered.
//
// Follows the paper: a crossbar switch with local and neighbour ports, 3D
// addressing, AXI-stream-style ports.  This design's own choices: the FIFO
// depth, the round-robin arbitration and the wormhole, packet-at-a-time
// allocation.  A packet routed toward a port with no neighbour is not
// dropped: it waits there, so software must address existing nodes.
module scalp_router
  import scalp_pkg::*;
#(
  parameter int unsigned IN_DEPTH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  coord_t            here,
  input  logic [DATA_W-1:0] in_data  [NPORTS],
  input  logic              in_last  [NPORTS],
  input  logic              in_valid [NPORTS],
  output logic              in_ready [NPORTS],
  output logic [DATA_W-1:0] out_data  [NPORTS],
  output logic              out_last  [NPORTS],
  output logic              out_valid [NPORTS],
  input  logic              out_ready [NPORTS]
);
  localparam int unsigned PW = $clog2(NPORTS);

  // Input buffers.
  logic [DATA_W-1:0] f_data  [NPORTS];
  logic              f_last  [NPORTS];
  logic              f_valid [NPORTS];
  logic              f_ready [NPORTS];
  port_e             route   [NPORTS];

  // Connection state.
  logic              in_active [NPORTS];   // input is connected to an output
  logic              out_busy  [NPORTS];   // output is connected to an input
  logic [PW-1:0]     out_owner [NPORTS];   // input connected to each output

  logic [NPORTS-1:0] req   [NPORTS];       // req[o][i]: input i wants output o
  logic [NPORTS-1:0] grant [NPORTS];
  logic [PW-1:0]     gidx  [NPORTS];
  logic              start [NPORTS];       // output o accepts a new packet

  for (genvar i = 0; i < NPORTS; i++) begin : g_in
    axis_fifo #(.W(DATA_W), .DEPTH(IN_DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_data(in_data[i]), .in_last(in_last[i]),
      .in_valid(in_valid[i]), .in_ready(in_ready[i]),
      .out_data(f_data[i]), .out_last(f_last[i]),
      .out_valid(f_valid[i]), .out_ready(f_ready[i]),
      .count()
    );
    header_t hdr;
    assign hdr = header_t'(f_data[i]);
    route_compute u_route (.here(here), .dst(hdr.dst), .out_port(route[i]));
  end

  for (genvar o = 0; o < NPORTS; o++) begin : g_out
    always_comb begin
      for (int i = 0; i < NPORTS; i++)
        req[o][i] = f_valid[i] && !in_active[i] && (route[i] == port_e'(o));
    end
    assign start[o] = !out_busy[o] && (req[o] != '0);
    rr_arbiter #(.N(NPORTS)) u_arb (
      .clk, .rst_n, .req(req[o]), .advance(start[o]),
      .grant(grant[o]), .grant_idx(gidx[o])
    );
    // Crossbar: each output carries the words of the input it is connected to.
    assign out_valid[o] = out_busy[o] && f_valid[out_owner[o]];
    assign out_data[o]  = f_data[out_owner[o]];
    assign out_last[o]  = f_last[out_owner[o]];
  end

  // Each input FIFO is read by the output it is connected to.
  always_comb begin
    for (int i = 0; i < NPORTS; i++) f_ready[i] = 1'b0;
    for (int o = 0; o < NPORTS; o++)
      if (out_busy[o]) f_ready[out_owner[o]] = out_ready[o];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int p = 0; p < NPORTS; p++) begin
        in_active[p] <= 1'b0;
        out_busy[p]  <= 1'b0;
        out_owner[p] <= '0;
      end
    end else begin
      for (int o = 0; o < NPORTS; o++) begin
        if (start[o]) begin
          out_busy[o]        <= 1'b1;
          out_owner[o]       <= gidx[o];
          in_active[gidx[o]] <= 1'b1;
        end else if (out_busy[o] && out_valid[o] && out_ready[o] && out_last[o]) begin
          out_busy[o]             <= 1'b0;
          in_active[out_owner[o]] <= 1'b0;
        end
      end
    end
  end

  // Two outputs never read the same input.
  for (genvar a = 0; a < NPORTS; a++) begin : g_chk_a
    for (genvar b = a + 1; b < NPORTS; b++) begin : g_chk_b
      assert property (@(posedge clk) disable iff (!rst_n)
        !(out_busy[a] && out_busy[b] && out_owner[a] == out_owner[b]));
    end
  end

endmodule
