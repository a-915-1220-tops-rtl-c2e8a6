// tb_aer_decoder: acts as the sensor's AER encoder. It sends random events
// with the four-phase handshake (request low, wait for acknowledge low,
// release request, wait for acknowledge high) and checks that each event
// gives exactly one data_valid pulse carrying its x and y. Part of the run
// holds the FIFO full: the acknowledge must then stay high and no write may
// happen until full drops.
module tb_aer_decoder;
  logic       clk = 0, rst_n = 0;
  logic       nreq = 1, nack, fifo_full = 0, dv;
  logic [16:0] data;
  logic [8:0] x;
  logic [7:0] y;
  int checks = 0, failures = 0;
  int writes = 0;
  logic [16:0] last_written;

  aer_decoder dut (.aer_clk(clk), .rst_n, .aer_nreq(nreq), .aer_data(data), .aer_nack(nack),
                   .fifo_full, .x_addr(x), .y_addr(y), .data_valid(dv));
  always #5 clk = ~clk;

  always @(posedge clk) if (dv) begin
    writes++;
    last_written = {y, x};
  end

  initial begin
    data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      automatic int w0 = writes;
      automatic int wait_cycles = 0;
      automatic logic [16:0] d = {8'($urandom % 240), 9'($urandom % 320)};
      automatic bit hold_full = (t % 10 == 3);
      @(negedge clk);
      if (hold_full) fifo_full = 1;
      data = d; nreq = 0;
      if (hold_full) begin
        repeat (8) @(negedge clk);
        checks++;
        if (!nack || writes != w0) begin
          failures++;
          $display("FAIL t=%0d: event taken while FIFO full", t);
        end
        fifo_full = 0;
      end
      while (nack && wait_cycles < 50) begin @(negedge clk); wait_cycles++; end
      checks++;
      if (nack) begin failures++; $display("FAIL t=%0d: no acknowledge", t); end
      @(negedge clk);
      checks++;
      if (writes != w0 + 1 || last_written !== d) begin
        failures++;
        $display("FAIL t=%0d: writes=%0d (exp %0d) data=%h exp %h", t, writes - w0, 1, last_written, d);
      end
      nreq = 1;
      data = '1;   // bundled data may change once the request is released
      wait_cycles = 0;
      while (!nack && wait_cycles < 50) begin @(negedge clk); wait_cycles++; end
      checks++;
      if (!nack || writes != w0 + 1) begin failures++; $display("FAIL t=%0d: release", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
