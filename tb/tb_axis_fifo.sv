// tb_axis_fifo: self-checking test of the receive FIFO at its default size
// (64 words of 64 bits).  Fills it completely, checks that it refuses a
// 65th word, drains it, then runs random traffic with random stalls on both
// sides against a queue model, checking data, last flags, order and the
// occupancy count.
module tb_axis_fifo;
  import scalp_pkg::*;
  localparam int DEPTH = 64;
  logic clk = 0, rst_n = 0;
  logic [63:0] in_data, out_data;
  logic in_last, in_valid, in_ready, out_last, out_valid, out_ready;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [64:0] model[$];

  axis_fifo dut (.*);
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

  // Scoreboard on the output side.
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    logic [64:0] e;
    check(model.size() > 0, "read from empty model");
    if (model.size() > 0) begin
      e = model.pop_front();
      check({out_data, out_last} == e, $sformatf("data %h/%b exp %h", out_data, out_last, e));
    end
  end
  always @(posedge clk) if (rst_n && in_valid && in_ready) model.push_back({in_data, in_last});

  initial begin
    in_valid = 0; in_data = 0; in_last = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    check(out_valid == 0 && count == 0, "empty after reset");
    // Fill completely.
    for (int i = 0; i < DEPTH; i++) begin
      in_valid <= 1; in_data <= 64'(i) * 64'h0101_0101_0101_0101; in_last <= (i == DEPTH-1);
      @(negedge clk); while (!(in_ready)) @(negedge clk); @(posedge clk);
    end
    in_valid <= 0;
    @(posedge clk);
    check(count == DEPTH, $sformatf("count %0d after fill", count));
    check(in_ready == 0, "full FIFO refuses a word");
    // Drain.
    out_ready <= 1;
    repeat (DEPTH) @(posedge clk);
    out_ready <= 0;
    @(posedge clk);
    check(count == 0 && out_valid == 0, "empty after drain");
    // Random traffic.
    for (int n = 0; n < 3000; n++) begin
      in_valid  <= ($urandom % 3) != 0;
      in_data   <= {$urandom, $urandom};
      in_last   <= ($urandom % 5) == 0;
      out_ready <= ($urandom % 4) != 0;
      @(posedge clk);
      check(count == model.size(), "occupancy matches model");
    end
    in_valid <= 0; out_ready <= 1;
    repeat (DEPTH + 2) @(posedge clk);
    check(model.size() == 0, "all words delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
