// run_extractor: splits a detection vector into runs of consecutive detected
// lines, lowest run first, one run per clock.
//
// The lowest run of a vector r is found without a scan: with low = r & -r
// (the lowest set bit), r + low clears that run and carries into the bit just
// above it, so run = r & ~(r + low). start is the index of low, stop the index
// of the carry bit minus one. Two priority encoders give both indices.
//
// When load is high the vector vec is taken in and its first run is output in
// the same cycle; otherwise the run comes from the held remainder. Whenever
// valid is high the run is consumed: the remainder drops it at the clock edge.
// more tells whether anything is left after the current run. load must only
// be raised when busy is low.
module run_extractor #(
  parameter int unsigned N = 320
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 load,
  input  logic [N-1:0]         vec,
  output logic                 busy,    // a remainder is still held
  output logic                 valid,   // a run is output this cycle
  output logic [$clog2(N)-1:0] start,
  output logic [$clog2(N)-1:0] stop,
  output logic                 more
);
  logic [N-1:0] rem, src, low, run;
  logic [N:0]   sum;

  assign src = load ? vec : rem;
  assign low = src & (~src + 1'b1);
  assign sum = {1'b0, src} + {1'b0, low};
  assign run = src & ~sum[N-1:0];
  assign valid = |src;
  assign more  = |(src & ~run);
  assign busy  = |rem;

  always_comb begin
    start = '0;
    for (int i = N-1; i >= 0; i--)
      if (low[i]) start = ($clog2(N))'(i);
    stop = ($clog2(N))'(N-1);
    for (int i = N-1; i >= 1; i--)
      if (sum[i]) stop = ($clog2(N))'(i-1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rem <= '0;
    else        rem <= src & ~run;
  end

  assert property (@(posedge clk) disable iff (!rst_n) load |-> !busy);
endmodule
