// tb_scalp_array: the 3x3x3 array of SCALP nodes, 27 nodes at their default
// parameters, each wired to up to six neighbours (north/south = +y/-y,
// east/west = +x/-x, top/bottom = +z/-z).  Node n sits at
// (x, y, z) = (n % 3, (n / 3) % 3, n / 9).  All nodes share one clock and
// each lane is wired straight to the facing lane of the neighbour; lanes on
// the faces of the cube are left unconnected.  Each node has a behavioural
// memory preloaded with its own pattern.
//
// Phase 1, mirror exchange: every node sends one 16-word packet to the node
// at the mirrored position (2-x, 2-y, 2-z), all 27 at once; the centre node
// sends to itself through its own local port.  Every node must receive
// exactly one packet, from its mirror, with the payload intact.
// Phase 2, gather: the 26 outer nodes each send one full 64-word packet to
// the centre (1,1,1) at once, so that traffic arrives on all six of its
// lanes and competes for its local port.
//
// In both phases the number of packets counted good by all link receivers
// must equal the sum of the Manhattan distances of the packets, which is
// what dimension-order routing gives (every hop is a shortest-path hop).
// Counted and required at least once: packets on each of the six lane
// directions, and contention at the centre's local port.  The cycles each
// phase took are printed.
module tb_scalp_array;
  import scalp_pkg::*;
  localparam int A = 3;                 // nodes per axis
  localparam int N = A * A * A;
  localparam int C = N / 2;             // centre node (1,1,1)
  localparam int D = NPORTS - 1;        // lanes per node
  localparam int MIRROR_LEN = 16;
  localparam int RX_BASE = 1024;
  localparam int RX_SPAN = 2048;        // receive area copied out for checking

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
  int n_contention = 0;

  // Copy of each node's receive area, refreshed on 'snap' (generate blocks
  // can only be indexed by constants, so each node copies its own).
  logic [63:0] rx_mem [N][RX_SPAN];
  event snap;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic int cx(int n); return n % A;       endfunction
  function automatic int cy(int n); return (n / A) % A; endfunction
  function automatic int cz(int n); return n / (A * A); endfunction
  function automatic int node_at(int x, int y, int z); return x + A * y + A * A * z; endfunction
  function automatic int iabs(int v); return v < 0 ? -v : v; endfunction
  function automatic int hops(int a, int b);
    return iabs(cx(a) - cx(b)) + iabs(cy(a) - cy(b)) + iabs(cz(a) - cz(b));
  endfunction

  initial for (int n = 0; n < N; n++)
    here[n] = '{z: 4'(cz(n)), y: 4'(cy(n)), x: 4'(cx(n))};

  // Neighbour of node n in lane direction d (0 N, 1 S, 2 E, 3 W, 4 T, 5 B), or -1.
  function automatic int neighbour(int n, int d);
    int x, y, z;
    x = cx(n); y = cy(n); z = cz(n);
    case (d)
      0: y++;
      1: y--;
      2: x++;
      3: x--;
      4: z++;
      default: z--;
    endcase
    if (x < 0 || x >= A || y < 0 || y >= A || z < 0 || z >= A) return -1;
    return node_at(x, y, z);
  endfunction

  always_comb
    for (int n = 0; n < N; n++) for (int d = 0; d < D; d++) begin
      int m;
      m = neighbour(n, d);
      if (m >= 0) begin
        rx_data[n][d]  = tx_data[m][d ^ 1];
        rx_last[n][d]  = tx_last[m][d ^ 1];
        rx_valid[n][d] = tx_valid[m][d ^ 1];
        tx_ready[n][d] = rx_ready[m][d ^ 1];
      end else begin
        rx_data[n][d]  = '0;
        rx_last[n][d]  = 1'b0;
        rx_valid[n][d] = 1'b0;
        tx_ready[n][d] = 1'b0;
      end
    end

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
    ddr_model #(.WORDS(4096), .LAT(4), .STALLS(n == C), .SEED(n + 1)) u_mem (.*);
    always @(snap) for (int i = 0; i < RX_SPAN; i++) rx_mem[n][i] = u_mem.mem[RX_BASE + i];
  end

  always @(posedge clk) if (rst_n) begin
    int wanting;
    wanting = 0;
    for (int i = 0; i < NPORTS; i++) if (g_node[C].u_node.u_router.req[P_LOCAL][i]) wanting++;
    if (wanting > 1) n_contention++;
  end

  initial begin
    repeat (100000) @(posedge clk);
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

  task automatic dma_send(input int n, input int addr, input int len, input coord_t dst);
    int v;
    wreg(n, 1, addr); wreg(n, 2, len); wreg(n, 3, int'(dst)); wreg(n, 0, 1);
    do rreg(n, 5, v); while (v != 0);
  endtask

  function automatic logic [63:0] pattern(int node, int i);
    return g_node[0].u_mem.fill(node + 1, i);
  endfunction

  // Packets counted good by every link receiver, and by direction.
  function automatic int total_link_packets();
    int s;
    s = 0;
    for (int n = 0; n < N; n++) for (int d = 0; d < D; d++) s += int'(packets_ok[n][d]);
    return s;
  endfunction

  // Wait until node n's DMA has written 'pkts' packets, or the cycle limit.
  task automatic wait_packets(input int n, input int pkts, input int limit);
    int v, t0;
    t0 = $time / 10;
    do begin
      repeat (8) @(posedge clk);
      rreg(n, 7, v);
    end while (v < pkts && ($time / 10 - t0) < limit);
  endtask

  // Check a packet written at offset 'base' of node r's receive area:
  // header, then the payload, which must match the sender's preload
  // pattern from address 'addr' on.
  task automatic check_packet(input int r, input int base, input int src, input int addr,
                              input int len, input string what);
    header_t h;
    int bad;
    h = header_t'(rx_mem[r][base]);
    check(h.src == here[src] && h.dst == here[r] && int'(h.len) == len,
          $sformatf("%s: header src %0d dst %0d len %0d", what, h.src, h.dst, h.len));
    bad = 0;
    for (int i = 0; i < len; i++)
      if (rx_mem[r][base + 1 + i] != pattern(src, addr + i)) bad++;
    check(bad == 0, $sformatf("%s: %0d payload words wrong", what, bad));
  endtask

  initial begin
    int v, t0, t1, expect_hops, link0;
    int dir_pkts [D];
    bit seen [N];
    for (int n = 0; n < N; n++) begin cfg_we[n] = 0; cfg_addr[n] = 0; cfg_wdata[n] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int n = 0; n < N; n++) wreg(n, 4, RX_BASE);

    // Phase 1: mirror exchange.
    expect_hops = 0;
    for (int n = 0; n < N; n++) expect_hops += hops(n, N - 1 - n);
    t0 = $time / 10;
    for (int n = 0; n < N; n++)
      fork
        automatic int k = n;
        dma_send(k, 16 * k, MIRROR_LEN, here[N - 1 - k]);
      join_none
    wait fork;
    for (int n = 0; n < N; n++) wait_packets(n, 1, 2000);
    t1 = $time / 10;
    -> snap;
    @(posedge clk);
    for (int n = 0; n < N; n++) begin
      int m;
      m = N - 1 - n;
      rreg(n, 7, v);
      check(v == 1, $sformatf("node %0d received %0d packets in phase 1", n, v));
      check_packet(n, 0, m, 16 * m, MIRROR_LEN, $sformatf("mirror packet at node %0d", n));
    end
    for (int d = 0; d < D; d++) begin
      dir_pkts[d] = 0;
      for (int n = 0; n < N; n++) dir_pkts[d] += int'(packets_ok[n][d]);
    end
    link0 = total_link_packets();
    check(link0 == expect_hops, $sformatf("phase 1 link hops %0d, expected %0d", link0, expect_hops));
    for (int d = 0; d < D; d++)
      check(dir_pkts[d] > 0, $sformatf("lane direction %0d carried a packet", d));
    $display("phase 1: 27 mirror packets, %0d link hops, %0d cycles", link0, t1 - t0);

    // Phase 2: 26 packets of 64 words gathered at the centre.
    wreg(C, 4, RX_BASE);
    expect_hops = 0;
    for (int n = 0; n < N; n++) expect_hops += hops(n, C);
    t0 = $time / 10;
    for (int n = 0; n < N; n++)
      if (n != C)
        fork
          automatic int k = n;
          dma_send(k, 512 + k, PKT_WORDS, here[C]);
        join_none
    wait fork;
    wait_packets(C, N - 1, 20000);
    t1 = $time / 10;
    rreg(C, 7, v);
    check(v == N - 1, $sformatf("centre received %0d packets, expected %0d", v, N - 1));
    rreg(C, 6, v);
    check(v == (N - 1) * (PKT_WORDS + 1), $sformatf("centre received %0d words", v));
    -> snap;
    @(posedge clk);
    for (int n = 0; n < N; n++) seen[n] = 0;
    for (int p = 0; p < N - 1; p++) begin
      header_t h;
      int src;
      h = header_t'(rx_mem[C][p * (PKT_WORDS + 1)]);
      src = node_at(int'(h.src.x), int'(h.src.y), int'(h.src.z));
      check(src != C && src < N && !seen[src], $sformatf("gather packet %0d from node %0d", p, src));
      if (src < N && src != C) begin
        seen[src] = 1;
        check_packet(C, p * (PKT_WORDS + 1), src, 512 + src, PKT_WORDS,
                     $sformatf("gather packet from node %0d", src));
      end
    end
    v = total_link_packets() - link0;
    check(v == expect_hops, $sformatf("phase 2 link hops %0d, expected %0d", v, expect_hops));
    for (int n = 0; n < N; n++) for (int d = 0; d < D; d++)
      check(crc_errors[n][d] == 0, $sformatf("no CRC errors at node %0d lane %0d", n, d));
    check(n_contention > 0, "contention at the centre's local port happened");
    $display("phase 2: 26 packets of %0d words gathered, %0d link hops, %0d cycles",
             PKT_WORDS, v, t1 - t0);
    $display("lane packets N=%0d S=%0d E=%0d W=%0d T=%0d B=%0d contention=%0d",
             dir_pkts[0], dir_pkts[1], dir_pkts[2], dir_pkts[3], dir_pkts[4], dir_pkts[5], n_contention);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
