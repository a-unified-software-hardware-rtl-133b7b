// rr_arbiter: round-robin arbiter with N requesters.
//
// Grants one of the active requests, searching from the requester after the
// one granted last, so that every requester is served within N grants.  The
// grant is combinational; the priority pointer moves only when the caller
// pulses 'advance' (the router does so when a granted packet starts).
// The platform description does not say how the crossbar arbitrates;
// round-robin is this design's choice.
module rr_arbiter #(
  parameter int unsigned N = 7
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] grant,
  output logic [$clog2(N)-1:0] grant_idx
);
  localparam int IDX_W = $clog2(N);
  logic [$clog2(N)-1:0] last_idx;

  always_comb begin
    logic [IDX_W-1:0] k;
    grant     = '0;
    grant_idx = '0;
    for (int unsigned i = 1; i <= N; i++) begin
      k = IDX_W'((int'(last_idx) + i) % N);
      if (req[k] && grant == '0) begin
        grant[k]  = 1'b1;
        grant_idx = k;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n)                    last_idx <= $clog2(N)'(N - 1);
    else if (advance && req != '0) last_idx <= grant_idx;
  end
endmodule
