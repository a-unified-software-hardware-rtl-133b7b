// axis_fifo: synchronous first-in first-out buffer for a stream of 64-bit
// words with an end-of-packet flag.
//
// The node records the packets addressed to it in such a FIFO before the DMA
// writes them to memory; by default it holds one whole packet of 64 words
// of 8 bytes, as the node's receive FIFO does.  The router also uses small
// instances of it as input buffers.  Words are stored in a circular array
// with read and write pointers and an occupancy counter.
//
// Interface: valid/ready handshake on both sides (a word moves when valid
// and ready are both high at a rising clock edge).  in_ready is high while
// the FIFO is not full; out_valid is high while it is not empty.  Timing: a
// word written in cycle n can be read from cycle n+1; a full FIFO accepts a
// new word in the same cycle one is read.  Reset is synchronous, active low.
// Depth and width defaults follow the paper's 64-word, 8-byte packets; the
// circuit itself is this design's choice.
module axis_fifo #(
  parameter int unsigned W     = scalp_pkg::DATA_W,
  parameter int unsigned DEPTH = scalp_pkg::PKT_WORDS
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] in_data,
  input  logic         in_last,
  input  logic         in_valid,
  output logic         in_ready,
  output logic [W-1:0] out_data,
  output logic         out_last,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0] mem_data [DEPTH];
  logic         mem_last [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic push, pop;

  assign in_ready  = (count != DEPTH[$bits(count)-1:0]);
  assign out_valid = (count != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem_data[rd_ptr];
  assign out_last  = mem_last[rd_ptr];

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) begin
      mem_data[wr_ptr] <= in_data;
      mem_last[wr_ptr] <= in_last;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= incr(wr_ptr);
      if (pop)  rd_ptr <= incr(rd_ptr);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  // A word is never written into a full FIFO nor read from an empty one.
  assert property (@(posedge clk) disable iff (!rst_n) count <= DEPTH[$bits(count)-1:0]);

endmodule
