// col_decoder: column decoder with sense-amplifier buffer of the CRAM.
// Write side: turns a column address into a one-hot bit-line select (an
// address beyond the last column selects nothing). Read side: from the bits
// sensed on all bit lines of the selected row it returns the WORD-bit word
// number word_idx (bit k of the word is column word_idx*WORD + k; columns past
// the array end read 0). Purely combinational. The word-wide read-out is this
// design's choice; the chip only names the block.
module col_decoder #(
  parameter int unsigned N    = 320,
  parameter int unsigned WORD = 32
) (
  input  logic [$clog2(N)-1:0]              addr,
  input  logic                              en,
  output logic [N-1:0]                      bl_sel,
  input  logic [N-1:0]                      row_bits,
  input  logic [$clog2((N+WORD-1)/WORD)-1:0] word_idx,
  output logic [WORD-1:0]                   rd_word
);
  localparam int unsigned NWORDS = (N + WORD - 1) / WORD;

  always_comb begin
    bl_sel = '0;
    for (int unsigned i = 0; i < N; i++)
      bl_sel[i] = en && (addr == ($clog2(N))'(i));
  end

  logic [NWORDS*WORD-1:0] padded;
  assign padded  = (NWORDS*WORD)'(row_bits);
  assign rd_word = padded[word_idx*WORD +: WORD];
endmodule
