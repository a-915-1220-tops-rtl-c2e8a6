// tb_row_decoder: exhaustive check of the row decoder (240 rows) over every
// 8-bit address with the enable high and low: exactly the addressed word line
// is high, none for addresses past the last row or with the enable low.
module tb_row_decoder;
  localparam int N = 240;
  logic [7:0]   addr;
  logic         en;
  logic [N-1:0] wl;
  int checks = 0, failures = 0;

  row_decoder #(.N(N)) dut (.addr, .en, .wl);

  initial begin
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < 256; a++) begin
        logic [N-1:0] exp;
        addr = 8'(a); en = e[0];
        #1;
        exp = '0;
        if (e == 1 && a < N) exp[a] = 1'b1;
        checks++;
        if (wl !== exp) begin
          failures++;
          $display("FAIL addr=%0d en=%0d", a, e);
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
