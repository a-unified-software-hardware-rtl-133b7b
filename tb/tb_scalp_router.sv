// tb_scalp_router: self-checking test of the 7-port crossbar router.
//
// The router sits at address (2,2,2).  Every port carries random packets
// (header + 1..64 payload words) to random destinations in a 5x5x5 cube,
// with random gaps on the inputs and random back-pressure on the outputs.
// A reference model works out each packet's output port independently
// (dimension-order rule), and the scoreboard checks that every packet
// arrives complete, unmixed with other packets, on the right port and in
// order per input/output pair.  It then measures the latency and rate of a
// single packet on an idle router (header out two cycles after it went in,
// then one word per cycle) and counts output contention, which must occur.
module tb_scalp_router;
  import scalp_pkg::*;
  logic clk = 0, rst_n = 0;
  coord_t here;
  logic [DATA_W-1:0] in_data  [NPORTS];
  logic              in_last  [NPORTS];
  logic              in_valid [NPORTS];
  logic              in_ready [NPORTS];
  logic [DATA_W-1:0] out_data  [NPORTS];
  logic              out_last  [NPORTS];
  logic              out_valid [NPORTS];
  logic              out_ready [NPORTS];
  int checks = 0, failures = 0;
  int contention = 0, backpressure = 0, delivered = 0;
  bit random_ready = 1;

  typedef logic [DATA_W-1:0] word_q[$];
  word_q expq [NPORTS][NPORTS][$];   // [out][in] queue of packets
  word_q cur  [NPORTS];              // packet being received on each output

  scalp_router dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic port_e ref_port(coord_t h, coord_t d);
    if (d.x != h.x) return (d.x > h.x) ? P_EAST : P_WEST;
    if (d.y != h.y) return (d.y > h.y) ? P_NORTH : P_SOUTH;
    if (d.z != h.z) return (d.z > h.z) ? P_TOP : P_BOTTOM;
    return P_LOCAL;
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Build a packet from input 'src_port'.
  function automatic word_q make_packet(int src_port, int seq, int len, coord_t d);
    header_t h;
    word_q q;
    h = '0;
    h.dst = d;
    h.src = here;
    h.len = LEN_W'(len);
    h.user = 33'({src_port[7:0], seq[15:0]});
    q.push_back(DATA_W'(h));
    for (int i = 0; i < len; i++) q.push_back({8'(src_port), 16'(seq), 8'(i), 32'($urandom)});
    return q;
  endfunction

  task automatic send(int p, word_q q, bit gaps);
    for (int i = 0; i < q.size(); i++) begin
      while (gaps && ($urandom % 4) == 0) begin
        in_valid[p] <= 0;
        @(posedge clk);
      end
      in_valid[p] <= 1; in_data[p] <= q[i]; in_last[p] <= (i == q.size() - 1);
      @(negedge clk); while (!(in_ready[p])) @(negedge clk); @(posedge clk);
    end
    // in_valid stays high with the last word until the caller drives again
  endtask

  // Output scoreboard.
  always @(posedge clk) if (rst_n) begin
    int nreq [NPORTS];
    for (int o = 0; o < NPORTS; o++) begin
      if (random_ready) out_ready[o] <= ($urandom % 3) != 0;
      else              out_ready[o] <= 1'b1;
      if (out_valid[o] && !out_ready[o]) backpressure++;
      if (out_valid[o] && out_ready[o]) begin
        cur[o].push_back(out_data[o]);
        if (out_last[o]) begin
          header_t h;
          int src;
          h = header_t'(cur[o][0]);
          src = int'(h.user[23:16]);
          check(src < NPORTS && expq[o][src].size() > 0,
                $sformatf("unexpected packet on port %0d from %0d", o, src));
          if (src < NPORTS && expq[o][src].size() > 0) begin
            word_q e;
            e = expq[o][src].pop_front();
            check(e == cur[o], $sformatf("packet content on port %0d from %0d", o, src));
            check(ref_port(here, h.dst) == port_e'(o), "packet on wrong port");
          end
          cur[o].delete();
          delivered++;
        end
      end
    end
    // Contention: two idle inputs whose head packets want the same output.
    for (int o = 0; o < NPORTS; o++) nreq[o] = 0;
    for (int i = 0; i < NPORTS; i++)
      if (dut.f_valid[i] && !dut.in_active[i]) nreq[int'(dut.route[i])]++;
    for (int o = 0; o < NPORTS; o++) if (nreq[o] > 1) contention++;
  end

  int total_sent = 0;

  initial begin
    here = '{z: 4'd2, y: 4'd2, x: 4'd2};
    for (int p = 0; p < NPORTS; p++) begin
      in_valid[p] = 0; in_data[p] = '0; in_last[p] = 0; out_ready[p] = 1;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // 1. Random traffic on all ports at once.
    for (int p = 0; p < NPORTS; p++) begin
      automatic int pp = p;
      fork begin
        for (int s = 0; s < 40; s++) begin
          coord_t d;
          word_q q;
          int len;
          d = '{z: 4'($urandom % 5), y: 4'($urandom % 5), x: 4'($urandom % 5)};
          if (s % 8 == 0) d = '{z: 4'd2, y: 4'd3, x: 4'd2};   // all toward north
          len = 1 + ($urandom % PKT_WORDS);
          q = make_packet(pp, s, len, d);
          expq[int'(ref_port(here, d))][pp].push_back(q);
          send(pp, q, 1);
          total_sent++;
        end
        in_valid[pp] <= 0;
      end join_none
    end
    wait (total_sent == 40 * NPORTS);
    repeat (2000) @(posedge clk);
    check(delivered == 40 * NPORTS, $sformatf("delivered %0d of %0d", delivered, 40 * NPORTS));
    for (int o = 0; o < NPORTS; o++) for (int i = 0; i < NPORTS; i++)
      check(expq[o][i].size() == 0, $sformatf("packets left for %0d from %0d", o, i));

    // 2. Latency and rate on an idle router: west input to east output.
    random_ready = 0;
    repeat (5) @(posedge clk);
    begin
      word_q q;
      int t_in, t_out, t_last;
      q = make_packet(P_WEST, 999, 16, '{z: 4'd2, y: 4'd2, x: 4'd4});
      expq[P_EAST][P_WEST].push_back(q);
      fork
        begin
          in_valid[P_WEST] <= 1; in_data[P_WEST] <= q[0]; in_last[P_WEST] <= 0;
          @(posedge clk); t_in = $time / 10;
          for (int i = 1; i < q.size(); i++) begin
            in_data[P_WEST] <= q[i]; in_last[P_WEST] <= (i == q.size() - 1);
            @(posedge clk);
          end
          in_valid[P_WEST] <= 0;
        end
        begin
          do @(negedge clk); while (!((out_valid[P_EAST] && out_ready[P_EAST]))); t_out = $time / 10;
          do @(negedge clk); while (!((out_valid[P_EAST] && out_ready[P_EAST] && out_last[P_EAST]))); t_last = $time / 10;
        end
      join
      check(t_out - t_in == 2, $sformatf("header latency %0d cycles, expected 2", t_out - t_in));
      check(t_last - t_out == 16, $sformatf("17 words took %0d cycles, expected 17", t_last - t_out + 1));
      repeat (5) @(posedge clk);
      check(expq[P_EAST][P_WEST].size() == 0, "latency packet delivered");
    end

    check(contention > 0, "output contention happened");
    check(backpressure > 0, "output back-pressure happened");
    $display("contention=%0d backpressure=%0d delivered=%0d", contention, backpressure, delivered);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
