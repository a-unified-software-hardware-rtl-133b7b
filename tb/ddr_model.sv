// ddr_model: behavioural stand-in for a node's local DDR memory, for
// simulation only.  It serves the DMA's read port (accepts a request when
// rd_ready, answers after LAT cycles with rd_valid) and write port (accepts
// a write when wr_ready, which is low on pseudo-random cycles to exercise
// back-pressure when STALLS is set).  The array is reachable
// hierarchically as 'mem' so that testbenches can fill and inspect it;
// with SEED set it starts filled with the pattern fill(SEED, i).
module ddr_model #(
  parameter int unsigned WORDS  = 4096,
  parameter int unsigned LAT    = 3,
  parameter bit          STALLS = 1'b1,
  parameter int unsigned SEED   = 0      // nonzero: preload mem[i] = fill(SEED, i)
) (
  input  logic        clk,
  input  logic        rd_req,
  input  logic [31:0] rd_addr,
  output logic        rd_ready,
  output logic        rd_valid,
  output logic [63:0] rd_data,
  input  logic        wr_req,
  input  logic [31:0] wr_addr,
  input  logic [63:0] wr_data,
  output logic        wr_ready
);
  logic [63:0] mem [WORDS];
  int unsigned cnt = 0;
  logic        busy = 1'b0;
  logic [31:0] a;
  int unsigned stall_cycles = 0;

  // Preload pattern, also used by testbenches to predict the contents.
  function automatic logic [63:0] fill(input int unsigned seed, input int unsigned i);
    return {seed[15:0], 16'(i), 32'(i * 32'h9E37_79B9 ^ seed * 32'h85EB_CA6B)};
  endfunction

  initial begin
    if (SEED != 0) for (int unsigned i = 0; i < WORDS; i++) mem[i] = fill(SEED, i);
    rd_valid = 1'b0;
    rd_data  = '0;
    wr_ready = 1'b1;
  end

  always @(posedge clk) begin
    rd_valid <= 1'b0;
    if (busy) begin
      cnt <= cnt + 1;
      if (cnt + 1 >= LAT) begin
        rd_valid <= 1'b1;
        rd_data  <= mem[a % WORDS];
        busy     <= 1'b0;
      end
    end else if (rd_req && rd_ready) begin
      busy <= 1'b1;
      a    <= rd_addr;
      cnt  <= 0;
    end
    if (wr_req && wr_ready) mem[wr_addr % WORDS] <= wr_data;
    if (STALLS && ($urandom % 8) == 0) begin
      wr_ready <= 1'b0;
      stall_cycles <= stall_cycles + 1;
    end else wr_ready <= 1'b1;
  end
  assign rd_ready = !busy;
endmodule
