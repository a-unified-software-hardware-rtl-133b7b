// tb_scalp_dma: self-checking test of the DMA channel with a behavioural
// memory.
//
// Sending: memory is filled with known words, registers are programmed and
// a transfer started; the stream leaving the DMA must be a header (correct
// destination, source = node address, length) followed by exactly the
// memory words, with 'last' on the final one, under random back-pressure.
// Lengths 1, 64 (the paper's packet size) and random are used, and a length
// above 64 must be cut to 64.  Receiving: random packets are streamed in and
// must appear word for word in memory at S2MM_ADDR, with the word and packet
// counters right, while the memory stalls writes at random.
module tb_scalp_dma;
  import scalp_pkg::*;
  logic clk = 0, rst_n = 0;
  coord_t here;
  logic cfg_we; logic [3:0] cfg_addr; logic [31:0] cfg_wdata, cfg_rdata;
  logic rd_req, rd_ready, rd_valid, wr_req, wr_ready;
  logic [31:0] rd_addr, wr_addr;
  logic [63:0] rd_data, wr_data, tx_data, rx_data;
  logic tx_last, tx_valid, tx_ready, rx_last, rx_valid, rx_ready;
  int checks = 0, failures = 0;
  int tx_stalls = 0, wr_stalls = 0;

  scalp_dma dut (.*);
  ddr_model #(.WORDS(4096), .LAT(3), .STALLS(1)) mem (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wreg(input int a, input int v);
    cfg_we <= 1; cfg_addr <= 4'(a); cfg_wdata <= 32'(v);
    @(posedge clk);
    cfg_we <= 0;
  endtask

  task automatic rreg(input int a, output int v);
    cfg_addr <= 4'(a);
    @(negedge clk);
    v = int'(cfg_rdata);
  endtask

  // Random back-pressure on the outgoing stream.
  always @(posedge clk) begin
    tx_ready <= ($urandom % 3) != 0;
    if (tx_valid && !tx_ready) tx_stalls++;
    if (wr_req && !wr_ready) wr_stalls++;
  end

  task automatic send_and_check(input int base, input int len, input coord_t d);
    logic [63:0] got[$];
    header_t h;
    int exp_len;
    exp_len = (len > PKT_WORDS) ? PKT_WORDS : len;
    wreg(1, base); wreg(2, len); wreg(3, int'(d)); wreg(0, 1);
    forever begin
      @(negedge clk);
      if (tx_valid && tx_ready) begin
        got.push_back(tx_data);
        if (tx_last) break;
      end
    end
    check(got.size() == exp_len + 1, $sformatf("packet of %0d words, expected %0d", got.size(), exp_len + 1));
    h = header_t'(got[0]);
    check(h.dst == d && h.src == here && int'(h.len) == exp_len, $sformatf("header %h", got[0]));
    for (int i = 1; i < got.size(); i++)
      check(got[i] == mem.mem[base + i - 1], $sformatf("payload word %0d", i - 1));
  endtask

  initial begin
    int v;
    here = '{z: 4'd1, y: 4'd2, x: 4'd3};
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    rx_valid = 0; rx_data = 0; rx_last = 0;
    for (int i = 0; i < 4096; i++) mem.mem[i] = {32'(i), $urandom};
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    send_and_check(100, 1, '{z: 4'd0, y: 4'd0, x: 4'd0});
    send_and_check(200, 64, '{z: 4'd2, y: 4'd1, x: 4'd7});
    send_and_check(300, 100, '{z: 4'd3, y: 4'd3, x: 4'd3});
    for (int n = 0; n < 10; n++) send_and_check($urandom % 1000, 1 + $urandom % 64, coord_t'($urandom));
    @(posedge clk);
    rreg(8, v);
    check(v == 13, $sformatf("MM2S_PKTS %0d", v));
    rreg(5, v);
    check(v == 0, "idle after transfers");

    // Receiving.
    wreg(4, 2048);
    begin
      logic [63:0] words[$];
      int npk = 6;
      for (int p = 0; p < npk; p++) begin
        int len = 2 + $urandom % 64;
        for (int i = 0; i < len; i++) begin
          logic [63:0] w;
          w = {$urandom, $urandom};
          words.push_back(w);
          rx_valid <= 1; rx_data <= w; rx_last <= (i == len - 1);
          @(negedge clk); while (!rx_ready) @(negedge clk); @(posedge clk);
        end
      end
      rx_valid <= 0;
      repeat (5) @(posedge clk);
      rreg(6, v);
      check(v == words.size(), $sformatf("S2MM_WORDS %0d, expected %0d", v, words.size()));
      rreg(7, v);
      check(v == npk, $sformatf("S2MM_PKTS %0d", v));
      for (int i = 0; i < words.size(); i++)
        check(mem.mem[2048 + i] == words[i], $sformatf("received word %0d in memory", i));
    end
    check(tx_stalls > 0 && wr_stalls > 0, "back-pressure happened on both sides");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
