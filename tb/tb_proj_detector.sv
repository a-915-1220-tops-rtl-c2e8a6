// tb_proj_detector: drives random line levels and Vref codes into a bank of
// 240 projection detectors and checks, one cycle later, that each output is
// 1 exactly when its level exceeds vref * 16 (the 4-bit DAC step of an 8-bit
// line level).
module tb_proj_detector;
  localparam int N = 240;
  logic         clk = 0;
  logic [3:0]   vref;
  logic [7:0]   lvl [N];
  logic [N-1:0] det;
  int checks = 0, failures = 0;

  proj_detector #(.N(N), .V(8)) dut (.clk, .vref, .lvl, .det);
  always #5 clk = ~clk;

  initial begin
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      vref = 4'($urandom);
      for (int k = 0; k < N; k++) lvl[k] = 8'($urandom);
      @(posedge clk); #1;
      for (int k = 0; k < N; k++) begin
        checks++;
        if (det[k] !== (int'(lvl[k]) > 16 * int'(vref))) begin
          failures++;
          if (failures < 10) $display("FAIL k=%0d lvl=%0d vref=%0d det=%0d", k, lvl[k], vref, det[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
