// tb_col_decoder: checks the column decoder's one-hot write select for every
// 9-bit address, and the word read-out for every word index of random rows
// (bit k of word i is column 32*i + k).
module tb_col_decoder;
  localparam int N = 320, WORD = 32;
  logic [8:0]      addr;
  logic            en;
  logic [N-1:0]    bl_sel, row_bits;
  logic [3:0]      word_idx;
  logic [WORD-1:0] rd_word;
  int checks = 0, failures = 0;

  col_decoder #(.N(N), .WORD(WORD)) dut (.addr, .en, .bl_sel, .row_bits, .word_idx, .rd_word);

  initial begin
    row_bits = '0; word_idx = '0;
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < 512; a++) begin
        addr = 9'(a); en = e[0];
        #1;
        checks++;
        for (int j = 0; j < N; j++)
          if (bl_sel[j] !== (e == 1 && j == a)) begin
            failures++;
            $display("FAIL bl_sel addr=%0d col=%0d", a, j);
            break;
          end
      end
    for (int t = 0; t < 20; t++) begin
      for (int j = 0; j < N; j++) row_bits[j] = 1'($urandom);
      for (int w = 0; w < N/WORD; w++) begin
        logic [WORD-1:0] exp;
        word_idx = 4'(w);
        #1;
        for (int k = 0; k < WORD; k++) exp[k] = row_bits[w*WORD + k];
        checks++;
        if (rd_word !== exp) begin
          failures++;
          $display("FAIL word %0d: %h != %h", w, rd_word, exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
