// tb_run_extractor: loads random detection vectors (sparse and dense, with
// runs touching both ends) into the 320-bit run extractor and checks that it
// returns every run of consecutive ones, lowest first, one per cycle, with the
// right start, stop and "more" flag; the expected runs come from a bit scan.
module tb_run_extractor;
  localparam int N = 320;
  logic         clk = 0, rst_n = 0, load = 0;
  logic [N-1:0] vec;
  logic         busy, valid, more;
  logic [8:0]   start, stop;
  int checks = 0, failures = 0;

  run_extractor #(.N(N)) dut (.clk, .rst_n, .load, .vec, .busy, .valid, .start, .stop, .more);
  always #5 clk = ~clk;

  int es[$], ee[$];
  task automatic expected_runs(input logic [N-1:0] v);
    es.delete(); ee.delete();
    for (int i = 0; i < N; i++)
      if (v[i] && (i == 0 || !v[i-1])) begin
        automatic int j = i;
        while (j + 1 < N && v[j+1]) j++;
        es.push_back(i); ee.push_back(j);
      end
  endtask

  initial begin
    vec = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      automatic int density = (t % 3 == 0) ? 2 : (t % 3 == 1) ? 50 : 90;
      for (int i = 0; i < N; i++) vec[i] = ($urandom % 100) < density;
      if (t % 7 == 0) begin vec[0] = 1; vec[N-1] = 1; end
      if (t == 5) vec = '0;
      if (t == 6) vec = '1;
      expected_runs(vec);
      @(negedge clk);
      load = 1;
      for (int r = 0; r < es.size(); r++) begin
        #1;
        checks++;
        if (!valid || start != 9'(es[r]) || stop != 9'(ee[r]) || more != (r + 1 < es.size())) begin
          failures++;
          if (failures < 10)
            $display("FAIL t=%0d run %0d: got v=%0d [%0d,%0d] more=%0d exp [%0d,%0d]",
                     t, r, valid, start, stop, more, es[r], ee[r]);
        end
        @(negedge clk);
        load = 0;
      end
      #1;
      checks++;
      if (valid || busy) begin
        failures++;
        $display("FAIL t=%0d: extractor not empty after %0d runs", t, es.size());
      end
      load = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
