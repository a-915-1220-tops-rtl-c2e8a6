// tb_diffusion_speed: the diffusion-speed measurement on the full 320 x 240
// processor. A 4x4 blob of '1' pixels is written into an all-'0' frame, once
// in the centre of the array and once in its corner, and restored with a
// single DE pulse at the lowest amplitude. A binary search over the pulse
// width finds the shortest pulse that makes the blob disappear. In the centre
// the charge can spread in every direction; in the corner it is held in by
// the array edge (only the dummy ring lies beyond), so the centre must be
// faster. The widths are printed.
module tb_diffusion_speed;
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
  int checks = 0, failures = 0;

  ebbi_processor dut (.*);
  always #2 aer_clk = ~aer_clk;
  always #5 sys_clk = ~sys_clk;

  task automatic issue(input mode_e m);
    @(negedge sys_clk);
    cmd = m; cmd_valid = 1;
    @(posedge sys_clk);
    while (!cmd_ready) @(posedge sys_clk);
    #1 cmd_valid = 0;
  endtask
  task automatic wait_idle();
    @(negedge sys_clk);
    while (busy) @(negedge sys_clk);
  endtask
  // Write the blob, restore with one pulse of the given width, count the '1'
  // pixels left around it.
  task automatic trial(input int x0, y0, width, output int ones);
    issue(MODE_CLEAR);
    issue(MODE_WRITE);
    for (int i = y0; i < y0 + 4; i++)
      for (int j = x0; j < x0 + 4; j++) begin
        @(negedge aer_clk);
        aer_data = {Y_W'(i), X_W'(j)};
        aer_nreq = 0;
        while (aer_nack) @(negedge aer_clk);
        aer_nreq = 1;
        while (!aer_nack) @(negedge aer_clk);
      end
    repeat (4) @(posedge sys_clk);
    cfg.de_width = 8'(width);
    issue(MODE_IR);
    wait_idle();
    ones = 0;
    for (int i = (y0 > 1 ? y0 - 2 : 0); i < y0 + 6; i++) begin
      @(negedge sys_clk);
      rd_en = 1; rd_row = Y_W'(i); rd_word = 4'(x0 / 32);
      @(negedge sys_clk);
      rd_en = 0;
      ones += $countones(rd_data);
    end
  endtask
  task automatic min_width(input int x0, y0, output int w);
    int lo = 0, hi = 255, ones;
    trial(x0, y0, 255, ones);
    if (ones != 0) begin w = 256; return; end
    while (hi - lo > 1) begin
      int mid = (lo + hi) / 2;
      trial(x0, y0, mid, ones);
      if (ones == 0) hi = mid; else lo = mid;
    end
    w = hi;
  endtask

  initial begin
    int ones, w_centre, w_corner;
    cfg = '{de_width: 8'd1, de_pulses: 4'd1, de_amp: 2'd0, vref: 4'd0, t_proj: 4'd4,
            size_min: 16'd2, slot: 8'd3};
    repeat (3) @(negedge sys_clk);
    rst_n = 1;
    trial(144, 118, 1, ones);
    checks++;
    if (ones != 16) begin failures++; $display("FAIL a 1-cycle pulse changed the blob: %0d pixels", ones); end
    min_width(144, 118, w_centre);
    min_width(0, 0, w_corner);
    $display("shortest DE pulse that removes a 4x4 blob: centre %0d cycles, corner %0d cycles", w_centre, w_corner);
    checks += 2;
    if (w_centre > 255) begin failures++; $display("FAIL blob in the centre never disappears"); end
    if (!(w_centre < w_corner)) begin failures++; $display("FAIL centre not faster than corner"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge sys_clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
