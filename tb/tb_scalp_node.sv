// tb_scalp_node: end-to-end test of the SCALP node at its default
// parameters, in the four-board arrangement used to run a four-modality
// ReSOM: one central board (the one that computes the ReSOM prediction)
// with the three other boards as its west, east and north neighbours.
//
//   node 3 "SOM3" (1,1,0)
//          |
//   node 0 "SOM2" (0,0,0) -- node 1 "SOM1" (1,0,0) -- node 2 "SOM4" (2,0,0)
//
// All nodes share one clock; each lane is wired straight to the facing lane
// of its neighbour (east <-> west, north <-> south).  Each node has a
// behavioural memory preloaded with a pattern that stands for its data.
//
// Workload: every outer board sends its 16x16 map of activations (256
// 32-bit values = 128 words of 8 bytes = two 64-word packets) to the
// central board, all three at once, as in the data-preparation step of the
// four-board ReSOM.  The central board's DMA writes all packets to its
// memory; the test reassembles each map from the headers and compares it
// with the sender's memory.  Also exercised and counted:
//   forwarding   SOM2 sends a packet to SOM4, which crosses SOM1's router
//                without reaching SOM1's DMA
//   contention   several packets want SOM1's local port in the same cycle
//   crc_discard  a bit flipped on the SOM2 -> SOM1 lane; the packet must be
//                discarded and counted, and the next one must pass
//   backpressure packets wait at the central router's inputs, and its
//                memory stalls writes
// Each must happen at least once.  The cycles taken to move the three maps
// are printed.
module tb_scalp_node;
  import scalp_pkg::*;
  localparam int N = 4;
  localparam int D = NPORTS - 1;        // lanes per node
  localparam int MAP_WORDS = 128;       // 16x16 x 32-bit values

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  coord_t here [N];
  logic        cfg_we    [N];
  logic [3:0]  cfg_addr  [N];
  logic [31:0] cfg_wdata [N];
  logic [31:0] cfg_rdata [N];
  logic [DATA_W-1:0] tx_data [N][D]; logic tx_last [N][D]; logic tx_valid [N][D]; logic tx_ready [N][D];
  logic [DATA_W-1:0] rx_data [N][D]; logic rx_last [N][D]; logic rx_valid [N][D]; logic rx_ready [N][D];
  logic [15:0] crc_errors [N][D];
  logic [15:0] packets_ok [N][D];

  int checks = 0, failures = 0;
  int n_forward = 0, n_contention = 0, n_crc_discard = 0, n_backpressure = 0, n_mem_stall = 0;
  bit corrupt_arm = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    here[0] = '{z: 4'd0, y: 4'd0, x: 4'd0};
    here[1] = '{z: 4'd0, y: 4'd0, x: 4'd1};
    here[2] = '{z: 4'd0, y: 4'd0, x: 4'd2};
    here[3] = '{z: 4'd0, y: 4'd1, x: 4'd1};
  end

  // Neighbour of node n in lane direction d (0 N, 1 S, 2 E, 3 W, 4 T, 5 B), or -1.
  function automatic int neighbour(int n, int d);
    case ({n[3:0], d[3:0]})
      {4'd0, 4'd2}: return 1;   // SOM2 east  -> SOM1
      {4'd1, 4'd3}: return 0;   // SOM1 west  -> SOM2
      {4'd1, 4'd2}: return 2;   // SOM1 east  -> SOM4
      {4'd2, 4'd3}: return 1;   // SOM4 west  -> SOM1
      {4'd1, 4'd0}: return 3;   // SOM1 north -> SOM3
      {4'd3, 4'd1}: return 1;   // SOM3 south -> SOM1
      default:      return -1;
    endcase
  endfunction
  function automatic int opposite(int d);
    return d ^ 1;
  endfunction

  // Lane wiring, with one optional bit flip on the SOM2 -> SOM1 lane.
  always_comb begin
    for (int n = 0; n < N; n++) for (int d = 0; d < D; d++) begin
      int m;
      m = neighbour(n, d);
      if (m >= 0) begin
        rx_data[n][d]  = tx_data[m][opposite(d)];
        rx_last[n][d]  = tx_last[m][opposite(d)];
        rx_valid[n][d] = tx_valid[m][opposite(d)];
        tx_ready[n][d] = rx_ready[m][opposite(d)];
      end else begin
        rx_data[n][d]  = '0;
        rx_last[n][d]  = 1'b0;
        rx_valid[n][d] = 1'b0;
        tx_ready[n][d] = 1'b0;
      end
    end
    if (corrupt_arm) rx_data[1][3][5] = ~tx_data[0][2][5];
  end
  always @(posedge clk) if (corrupt_arm && tx_valid[0][2] && tx_ready[0][2]) corrupt_arm <= 0;

  for (genvar n = 0; n < N; n++) begin : g_node
    logic rd_req, rd_ready, rd_valid, wr_req, wr_ready;
    logic [31:0] rd_addr, wr_addr;
    logic [63:0] rd_data, wr_data;
    scalp_node u_node (
      .clk, .rst_n, .here(here[n]),
      .cfg_we(cfg_we[n]), .cfg_addr(cfg_addr[n]), .cfg_wdata(cfg_wdata[n]), .cfg_rdata(cfg_rdata[n]),
      .rd_req, .rd_addr, .rd_ready, .rd_valid, .rd_data,
      .wr_req, .wr_addr, .wr_data, .wr_ready,
      .lane_tx_data(tx_data[n]), .lane_tx_last(tx_last[n]), .lane_tx_valid(tx_valid[n]), .lane_tx_ready(tx_ready[n]),
      .lane_rx_data(rx_data[n]), .lane_rx_last(rx_last[n]), .lane_rx_valid(rx_valid[n]), .lane_rx_ready(rx_ready[n]),
      .crc_errors(crc_errors[n]), .packets_ok(packets_ok[n])
    );
    ddr_model #(.WORDS(4096), .LAT(4), .STALLS(n == 1), .SEED(n + 1)) u_mem (.*);
    always @(posedge clk) if (wr_req && !wr_ready) n_mem_stall++;
  end

  // Mechanism monitors.
  always @(posedge clk) if (rst_n) begin
    int wanting;
    wanting = 0;
    for (int i = 0; i < NPORTS; i++) if (g_node[1].u_node.u_router.req[P_LOCAL][i]) wanting++;
    if (wanting > 1) n_contention++;
    for (int i = 0; i < NPORTS; i++)
      if (g_node[1].u_node.r_in_valid[i] && !g_node[1].u_node.r_in_ready[i]) n_backpressure++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wreg(input int n, input int a, input int v);
    cfg_we[n] <= 1; cfg_addr[n] <= 4'(a); cfg_wdata[n] <= 32'(v);
    @(posedge clk);
    cfg_we[n] <= 0;
  endtask

  task automatic rreg(input int n, input int a, output int v);
    cfg_addr[n] <= 4'(a);
    @(negedge clk);
    v = int'(cfg_rdata[n]);
  endtask

  // Start one DMA packet on node n and wait until it has left the DMA.
  task automatic dma_send(input int n, input int addr, input int len, input coord_t dst);
    int v;
    wreg(n, 1, addr); wreg(n, 2, len); wreg(n, 3, int'(dst)); wreg(n, 0, 1);
    do rreg(n, 5, v); while (v != 0);
  endtask

  task automatic send_map(input int n);
    dma_send(n, 0, 64, here[1]);
    dma_send(n, 64, 64, here[1]);
  endtask

  function automatic logic [63:0] pattern(int node, int i);
    return g_node[0].u_mem.fill(node + 1, i);
  endfunction

  initial begin
    int v, t0, t1, base;
    int got_words [N];
    for (int n = 0; n < N; n++) begin cfg_we[n] = 0; cfg_addr[n] = 0; cfg_wdata[n] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int n = 0; n < N; n++) wreg(n, 4, 1024);

    // 1. Forwarding: SOM2 -> SOM4 through SOM1.
    dma_send(0, 500, 20, here[2]);
    repeat (300) @(posedge clk);
    rreg(2, 7, v);
    check(v == 1, $sformatf("SOM4 received %0d packets, expected 1", v));
    rreg(1, 7, v);
    check(v == 0, "SOM1's DMA did not see the forwarded packet");
    check(g_node[2].u_mem.mem[1024 + 1] == pattern(0, 500) && g_node[2].u_mem.mem[1024 + 20] == pattern(0, 519),
          "forwarded payload intact");
    if (packets_ok[1][3] == 1 && packets_ok[2][3] == 1) n_forward++;
    wreg(2, 4, 1024);

    // 2. A corrupted packet on SOM2 -> SOM1 is discarded; the next passes.
    corrupt_arm = 1;
    dma_send(0, 600, 8, here[1]);
    repeat (200) @(posedge clk);
    check(crc_errors[1][3] == 1, $sformatf("SOM1 west crc_errors %0d", crc_errors[1][3]));
    rreg(1, 7, v);
    check(v == 0, "corrupted packet not delivered");
    if (crc_errors[1][3] == 1 && v == 0) n_crc_discard++;

    // 3. Workload: three 16x16 activation maps to SOM1 at once.
    t0 = $time / 10;
    fork
      send_map(0);
      send_map(2);
      send_map(3);
    join
    do begin
      repeat (10) @(posedge clk);
      rreg(1, 7, v);
    end while (v < 6 && ($time / 10 - t0) < 20000);
    t1 = $time / 10;
    check(v == 6, $sformatf("SOM1 received %0d packets, expected 6", v));
    rreg(1, 6, v);
    check(v == 3 * (MAP_WORDS + 2), $sformatf("SOM1 received %0d words", v));
    // Reassemble maps from the headers.
    for (int n = 0; n < N; n++) got_words[n] = 0;
    base = 1024;
    for (int p = 0; p < 6; p++) begin
      header_t h;
      int src;
      h = header_t'(g_node[1].u_mem.mem[base]);
      src = -1;
      for (int n = 0; n < N; n++) if (here[n] == h.src) src = n;
      check(src == 0 || src == 2 || src == 3, $sformatf("packet %0d from unexpected node", p));
      check(h.dst == here[1] && h.len == 7'd64, "packet header");
      if (src >= 0) begin
        for (int i = 0; i < 64; i++)
          check(g_node[1].u_mem.mem[base + 1 + i] == pattern(src, got_words[src] + i),
                $sformatf("map of node %0d word %0d", src, got_words[src] + i));
        got_words[src] += 64;
      end
      base += 65;
    end
    check(got_words[0] == MAP_WORDS && got_words[2] == MAP_WORDS && got_words[3] == MAP_WORDS, "three complete maps");

    check(n_forward > 0, "forwarding happened");
    check(n_contention > 0, "contention at the central board's local port happened");
    check(n_crc_discard > 0, "CRC discard happened");
    check(n_backpressure > 0, "back-pressure into the central router happened");
    check(n_mem_stall > 0, "memory write stalls happened");
    $display("three 16x16 maps delivered in %0d cycles", t1 - t0);
    $display("forward=%0d contention=%0d crc_discard=%0d backpressure=%0d mem_stall=%0d",
             n_forward, n_contention, n_crc_discard, n_backpressure, n_mem_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
