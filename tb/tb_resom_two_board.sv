// tb_resom_two_board: the two-board ReSOM inference exchange, repeated for
// a test set of 300 samples.
//
// Board 1 (address (0,0,0)) holds the visual map and computes the ReSOM
// prediction; board 2 (address (1,0,0), its east neighbour) holds the
// auditory map.  For every sample, board 2's processor places a fresh
// 16x16 activation map (256 32-bit values = 128 words) in its memory and
// sends it to board 1 as two 64-word packets; board 1's processor waits for
// both packets and reads the map back from its memory.  The test checks
// every word of every map, and that no packet is lost or corrupted
// (link counters), and prints the cycles per sample.  Both nodes use their
// default parameters.
module tb_resom_two_board;
  import scalp_pkg::*;
  localparam int D = NPORTS - 1;
  localparam int SAMPLES = 300;
  localparam int MAP_WORDS = 128;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  coord_t here [2];
  logic        cfg_we [2];
  logic [3:0]  cfg_addr [2];
  logic [31:0] cfg_wdata [2];
  logic [31:0] cfg_rdata [2];
  logic [DATA_W-1:0] tx_data [2][D]; logic tx_last [2][D]; logic tx_valid [2][D]; logic tx_ready [2][D];
  logic [DATA_W-1:0] rx_data [2][D]; logic rx_last [2][D]; logic rx_valid [2][D]; logic rx_ready [2][D];
  logic [15:0] crc_errors [2][D];
  logic [15:0] packets_ok [2][D];
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    here[0] = '{z: 4'd0, y: 4'd0, x: 4'd0};
    here[1] = '{z: 4'd0, y: 4'd0, x: 4'd1};
  end

  // Board 1 east lane (2) <-> board 2 west lane (3).
  always_comb begin
    for (int n = 0; n < 2; n++) for (int d = 0; d < D; d++) begin
      rx_data[n][d] = '0; rx_last[n][d] = 0; rx_valid[n][d] = 0; tx_ready[n][d] = 0;
    end
    rx_data[1][3] = tx_data[0][2]; rx_last[1][3] = tx_last[0][2]; rx_valid[1][3] = tx_valid[0][2]; tx_ready[0][2] = rx_ready[1][3];
    rx_data[0][2] = tx_data[1][3]; rx_last[0][2] = tx_last[1][3]; rx_valid[0][2] = tx_valid[1][3]; tx_ready[1][3] = rx_ready[0][2];
  end

  for (genvar n = 0; n < 2; n++) begin : g_board
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
    ddr_model #(.WORDS(1024), .LAT(4), .STALLS(1'b1), .SEED(0)) u_mem (.*);
  end

  initial begin
    repeat (2000000) @(posedge clk);
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

  // Activation value pair i of sample s (two 32-bit values per word).
  function automatic logic [63:0] act(int s, int i);
    return {32'(s * 1000 + 2 * i + 1) * 32'h2545_F491, 32'(s * 1000 + 2 * i) * 32'h2545_F491};
  endfunction

  initial begin
    int v, t0, total;
    for (int n = 0; n < 2; n++) begin cfg_we[n] = 0; cfg_addr[n] = 0; cfg_wdata[n] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    total = 0;
    for (int s = 0; s < SAMPLES; s++) begin
      // Board 2 computes its map (stands in for the SOM software).
      for (int i = 0; i < MAP_WORDS; i++) g_board[1].u_mem.mem[i] = act(s, i);
      wreg(0, 4, 512);                      // board 1 ready to receive
      t0 = $time / 10;
      for (int p = 0; p < 2; p++) begin     // board 2 sends two packets
        wreg(1, 1, 64 * p); wreg(1, 2, 64); wreg(1, 3, int'(here[0])); wreg(1, 0, 1);
        do rreg(1, 5, v); while (v != 0);
      end
      do rreg(0, 7, v); while (v < 2);      // board 1 waits for both
      total += $time / 10 - t0;
      check(v == 2, $sformatf("sample %0d: %0d packets", s, v));
      for (int p = 0; p < 2; p++) begin
        header_t h;
        h = header_t'(g_board[0].u_mem.mem[512 + 65 * p]);
        check(h.src == here[1] && h.len == 7'd64, $sformatf("sample %0d packet %0d header", s, p));
        for (int i = 0; i < 64; i++)
          check(g_board[0].u_mem.mem[512 + 65 * p + 1 + i] == act(s, 64 * p + i),
                $sformatf("sample %0d word %0d", s, 64 * p + i));
      end
    end
    check(packets_ok[0][2] == 16'(2 * SAMPLES) && crc_errors[0][2] == 0,
          $sformatf("link counters ok=%0d err=%0d", packets_ok[0][2], crc_errors[0][2]));
    $display("%0d samples, %0d cycles per 16x16 map on average", SAMPLES, total / SAMPLES);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
