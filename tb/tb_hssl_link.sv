// tb_hssl_link: self-checking test of the link layer (CRC framing on
// transmit, CRC check and store-and-forward on receive).
//
// The link's lane output is looped back to its own lane input through a
// channel model that flips one random bit in chosen packets.  Random
// packets of 1..65 words are sent with random gaps, random lane stalls and
// random back-pressure from the router side.  The test checks that intact
// packets come out whole and in order, corrupted ones never come out, the
// error and good-packet counters match, each packet costs exactly one extra
// lane word, and a received packet is not released before its check word.
module tb_hssl_link;
  import scalp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [DATA_W-1:0] rt_tx_data, rt_rx_data, lane_tx_data, lane_rx_data;
  logic rt_tx_last, rt_tx_valid, rt_tx_ready, rt_rx_last, rt_rx_valid, rt_rx_ready;
  logic lane_tx_last, lane_tx_valid, lane_tx_ready, lane_rx_last, lane_rx_valid, lane_rx_ready;
  logic [15:0] crc_errors, packets_ok;
  int checks = 0, failures = 0;
  int lane_words = 0, sent_words = 0, corrupted = 0, sent_pkts = 0, got_pkts = 0;
  int stall_lane = 0, stall_out = 0;

  typedef logic [DATA_W-1:0] word_q[$];
  word_q expq[$];
  word_q cur;
  bit corrupt_next[$];   // per packet: flip a bit on the lane
  bit corrupt_cur;
  int flip_at;
  int lane_idx;

  hssl_link dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Channel model: lane_tx -> lane_rx with stalls and bit flips.
  logic gate;
  always @(posedge clk) gate <= ($urandom % 5) != 0;
  bit hold = 0;          // stops the lane
  assign lane_rx_valid = lane_tx_valid && gate && !hold;
  assign lane_tx_ready = lane_rx_ready && gate && !hold;
  assign lane_rx_last  = lane_tx_last;
  always_comb begin
    lane_rx_data = lane_tx_data;
    if (corrupt_cur && lane_idx == flip_at) lane_rx_data[flip_at % 64] = ~lane_tx_data[flip_at % 64];
  end
  always @(posedge clk) if (rst_n) begin
    if (lane_tx_valid && !lane_tx_ready) stall_lane++;
    if (lane_tx_valid && lane_tx_ready) begin
      lane_words++;
      lane_idx <= lane_idx + 1;
      if (lane_tx_last) begin
        lane_idx <= 0;
        corrupt_cur <= corrupt_next.size() > 1 ? corrupt_next[1] : 1'b0;
        if (corrupt_next.size() > 0) void'(corrupt_next.pop_front());
        flip_at <= $urandom % 3;
      end
    end
  end

  // Router-side receiver.
  always @(posedge clk) if (rst_n) begin
    rt_rx_ready <= ($urandom % 3) != 0;
    if (rt_rx_valid && !rt_rx_ready) stall_out++;
    if (rt_rx_valid && rt_rx_ready) begin
      cur.push_back(rt_rx_data);
      if (rt_rx_last) begin
        check(expq.size() > 0, "packet out with none expected");
        if (expq.size() > 0) begin word_q e; e = expq.pop_front(); check(e == cur, $sformatf("packet %0d content exp len %0d got len %0d e0 %h c0 %h", got_pkts, e.size(), cur.size(), e[0], cur[0])); end
        got_pkts++;
        cur.delete();
      end
    end
  end

  initial begin
    rt_tx_valid = 0; rt_tx_data = 0; rt_tx_last = 0; rt_rx_ready = 0;
    corrupt_cur = 0; lane_idx = 0; flip_at = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // 1. A packet is held until its check word: stop the lane before the end.
    begin
      word_q q;
      for (int i = 0; i < 5; i++) q.push_back({$urandom, $urandom});
      corrupt_next.push_back(0);
      corrupt_cur = 0;
      expq.push_back(q);
      hold = 1;
      for (int i = 0; i < 5; i++) begin
        rt_tx_valid <= 1; rt_tx_data <= q[i]; rt_tx_last <= (i == 4);
        hold <= 0;
        @(negedge clk); while (!(rt_tx_ready)) @(negedge clk); @(posedge clk);
        hold <= 1;
        rt_tx_valid <= 0;
        if (i < 4) begin
          repeat (4) @(posedge clk);
          check(!rt_rx_valid, "partial packet not released");
        end
      end
      repeat (3) @(posedge clk);
      check(!rt_rx_valid && got_pkts == 0, "packet not released before its check word");
      hold <= 0;
      repeat (20) @(posedge clk);
      check(got_pkts == 1, "packet released after its check word");
      sent_pkts = 1; sent_words = 5;
    end

    // 2. Random traffic, one packet in five corrupted.
    for (int s = 0; s < 150; s++) begin
      word_q q;
      int len;
      bit bad;
      q.delete();
      len = 1 + ($urandom % (PKT_WORDS + 1));
      for (int i = 0; i < len; i++) q.push_back({$urandom, $urandom});
      bad = (s % 5 == 3);
      corrupt_next.push_back(bad);
      if (corrupt_next.size() == 1) corrupt_cur = bad;
      if (bad) corrupted++; else expq.push_back(q);
      for (int i = 0; i < len; i++) begin
        while (($urandom % 4) == 0) begin
          rt_tx_valid <= 0;
          @(posedge clk);
        end
        rt_tx_valid <= 1; rt_tx_data <= q[i]; rt_tx_last <= (i == len - 1);
        @(negedge clk); while (!(rt_tx_ready)) @(negedge clk); @(posedge clk);
      end
      sent_pkts++; sent_words += len;
    end
    rt_tx_valid <= 0;
    repeat (3000) @(posedge clk);
    check(expq.size() == 0, $sformatf("%0d intact packets missing", expq.size()));
    check(got_pkts == sent_pkts - corrupted, $sformatf("got %0d packets, expected %0d", got_pkts, sent_pkts - corrupted));
    check(crc_errors == 16'(corrupted), $sformatf("crc_errors %0d, expected %0d", crc_errors, corrupted));
    check(packets_ok == 16'(sent_pkts - corrupted), $sformatf("packets_ok %0d", packets_ok));
    check(lane_words == sent_words + sent_pkts, $sformatf("lane words %0d, expected %0d", lane_words, sent_words + sent_pkts));
    check(stall_lane > 0 && stall_out > 0, "lane and router stalls happened");
    $display("corrupted=%0d delivered=%0d stall_lane=%0d stall_out=%0d", corrupted, got_pkts, stall_lane, stall_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
