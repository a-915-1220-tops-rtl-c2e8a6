// row_decoder: the row decoder in front of the CRAM word lines. Turns a row
// address into a one-hot word-line vector when enabled; an address beyond
// the last row selects nothing. Purely combinational.
module row_decoder #(
  parameter int unsigned N = 240
) (
  input  logic [$clog2(N)-1:0] addr,
  input  logic                 en,
  output logic [N-1:0]         wl
);
  always_comb begin
    wl = '0;
    for (int unsigned i = 0; i < N; i++)
      wl[i] = en && (addr == ($clog2(N))'(i));
  end
endmodule
