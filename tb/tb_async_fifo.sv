// tb_async_fifo: the 128 x 32 FIFO with unrelated write (7 ns) and read
// (10 ns) clocks. Phase 1 fills it without reading: full must rise after
// exactly 128 words. Phase 2 drains it and then streams random words with
// random write and read enables; every word read must match the one written
// in the same order, and nothing may be lost or duplicated.
module tb_async_fifo;
  logic        wclk = 0, rclk = 0, rst_n = 0;
  logic        wr_en = 0, rd_en = 0, full, empty;
  logic [31:0] wdata, rdata;
  int checks = 0, failures = 0;
  logic [31:0] model[$];
  int n_written = 0, n_read = 0;
  bit writer_done = 0;

  async_fifo #(.DEPTH(128), .WIDTH(32)) dut (.wclk, .wrst_n(rst_n), .wr_en, .wdata, .full,
                                             .rclk, .rrst_n(rst_n), .rd_en, .rdata, .empty);
  always #3.5 wclk = ~wclk;
  always #5   rclk = ~rclk;

  task automatic push(input logic [31:0] d);
    @(negedge wclk);
    wr_en = 1; wdata = d;
    @(posedge wclk);
    model.push_back(d); n_written++;
    #0.1 wr_en = 0;
  endtask

  initial begin
    wdata = '0;
    repeat (4) @(posedge rclk);
    rst_n = 1;
    repeat (4) @(posedge rclk);
    // Phase 1: fill.
    for (int i = 0; i < 128; i++) begin
      checks++;
      if (full) begin failures++; $display("FAIL full after %0d words", i); break; end
      push($urandom);
    end
    @(negedge wclk);
    checks++;
    if (!full) begin failures++; $display("FAIL not full after 128 words"); end
    // Phase 2: random streaming.
    fork
      begin
        for (int i = 0; i < 600; i++) begin
          @(negedge wclk);
          if (!full && ($urandom % 3 != 0)) begin
            wr_en = 1; wdata = $urandom;
            @(posedge wclk);
            model.push_back(wdata); n_written++;
            #0.1 wr_en = 0;
          end
        end
        writer_done = 1;
      end
      begin
        while (!(writer_done && n_read == n_written)) begin
          @(negedge rclk);
          rd_en = 0;
          if (!empty && ($urandom % 4 != 0)) begin
            checks++;
            if (model.size() == 0 || rdata !== model[0]) begin
              failures++;
              if (failures < 10) $display("FAIL read %0d: %h", n_read, rdata);
            end
            if (model.size() != 0) void'(model.pop_front());
            rd_en = 1;
            @(posedge rclk);
            n_read++;
            #0.1 rd_en = 0;
          end
        end
      end
    join
    repeat (10) @(posedge rclk);
    checks++;
    if (!empty || model.size() != 0 || n_read != n_written) begin
      failures++;
      $display("FAIL end: empty=%0d left=%0d read=%0d written=%0d", empty, model.size(), n_read, n_written);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge rclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
