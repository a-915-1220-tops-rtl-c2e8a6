// tb_exec_time: execution time of region proposal against the number of
// objects, on the full 320 x 240 processor. For N = 0..7 it writes N 4x4
// objects through the AER port and runs RP twice: once with every object in
// its own columns and rows (the search's best case: RP must take exactly
// 10N + 12 cycles, 8N + 8 of them in the search) and once with the objects
// stacked in pairs that share columns (more iterations: the time depends on
// where the objects are, not only on how many there are, and it must be
// longer). It prints the cycle counts as a table and at 10 MHz.
module tb_exec_time;
  import cram_pkg::*;
  logic aer_clk = 0, sys_clk = 0, rst_n = 0;
  logic aer_nreq = 1, aer_nack;
  logic [X_W+Y_W-1:0] aer_data = '0;
  logic cmd_valid = 0, cmd_ready;
  mode_e cmd = MODE_CLEAR;
  mode_e mode;
  cfg_t cfg;
  logic rd_en = 0;
  logic [Y_W-1:0] rd_row = '0;
  logic [3:0] rd_word = '0;
  logic [31:0] rd_data;
  logic busy, rp_done, overflow, stall, fifo_full;
  box_t rois [MAX_OBJ];
  logic [OBJ_W-1:0] roi_cnt, iss_cnt, n_noise, n_merged;
  logic [3:0] iterations;
  logic [15:0] rp_cycles;
  int checks = 0, failures = 0, search_cycles = 0;

  ebbi_processor dut (.*);
  always #2 aer_clk = ~aer_clk;
  always #5 sys_clk = ~sys_clk;
  always @(posedge sys_clk) if (dut.u_ctrl.u_iss.busy) search_cycles++;

  task automatic send_rect(input int x0, y0);
    for (int i = y0; i < y0 + 4; i++)
      for (int j = x0; j < x0 + 4; j++) begin
        @(negedge aer_clk);
        aer_data = {Y_W'(i), X_W'(j)};
        aer_nreq = 0;
        while (aer_nack) @(negedge aer_clk);
        aer_nreq = 1;
        while (!aer_nack) @(negedge aer_clk);
      end
  endtask
  task automatic issue(input mode_e m);
    @(negedge sys_clk);
    cmd = m; cmd_valid = 1;
    @(posedge sys_clk);
    while (!cmd_ready) @(posedge sys_clk);
    #1 cmd_valid = 0;
  endtask
  task automatic frame(input int n, input bit stacked, output int cycles, output int search);
    issue(MODE_CLEAR);
    issue(MODE_WRITE);
    for (int k = 0; k < n; k++)
      if (stacked) send_rect(30 + 40 * (k / 2), 20 + 100 * (k % 2));
      else         send_rect(30 + 40 * k, 20 + 25 * k);
    repeat (4) @(posedge sys_clk);
    search_cycles = 0;
    issue(MODE_RP);
    @(posedge sys_clk);
    while (!rp_done) @(posedge sys_clk);
    #1;
    cycles = rp_cycles;
    search = search_cycles;
    checks++;
    if (roi_cnt != OBJ_W'(n)) begin failures++; $display("FAIL N=%0d stacked=%0d: %0d regions", n, stacked, roi_cnt); end
  endtask

  initial begin
    int c, s, cs, ss;
    cfg = '{de_width: 8'd1, de_pulses: 4'd1, de_amp: 2'd0, vref: 4'd0, t_proj: 4'd4,
            size_min: 16'd2, slot: 8'd3};
    repeat (3) @(negedge sys_clk);
    rst_n = 1;
    $display(" N | best case RP (search) | at 10 MHz | stacked RP (search)");
    for (int n = 0; n <= 7; n++) begin
      frame(n, 0, c, s);
      checks += 2;
      if (c != 10 * n + 12) begin failures++; $display("FAIL N=%0d: RP %0d cycles, exp %0d", n, c, 10 * n + 12); end
      if (s != 8 * n + 8)   begin failures++; $display("FAIL N=%0d: search %0d cycles, exp %0d", n, s, 8 * n + 8); end
      frame(n, 1, cs, ss);
      if (n >= 2) begin
        checks++;
        if (cs <= c) begin failures++; $display("FAIL N=%0d: stacked objects not slower (%0d <= %0d)", n, cs, c); end
      end
      $display("%2d | %4d (%4d)           | %5.1f us  | %4d (%4d)", n, c, s, c / 10.0, cs, ss);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge sys_clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
