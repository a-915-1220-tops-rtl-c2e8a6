// tb_ebbi_processor: end-to-end test of the EBBI processor at its full size
// (320 x 240 array, 128-word FIFO, 16-entry lists). The testbench plays the
// sensor: it sends each frame as address events over the AER handshake on a
// 4 ns clock, while the processor runs on a 10 ns clock.
//
// Frame 1 (restoration and proposal): four objects (one of them in two
// fragments two columns apart, and one lying in the same columns as another,
// so the search needs a third iteration) plus four isolated noise pixels.
// The events are sent before WRITE is issued, so the FIFO fills up and the
// handshake is held back; WRITE then drains it. IR with one 1-cycle DE pulse
// at full amplitude removes the noise pixels and leaves every object's
// bounding box; RP (SIZE_MIN 4, SLOT 3) must return the four hand-computed
// regions, in at least 10N + 12 cycles.
// Frame 2 (limits): twenty small objects side by side; the first projection
// yields more runs than the extractor can take during one projection (stall)
// and more than a list holds (overflow), so sixteen regions come out.
// Frame 3 (timing): five separable 4x4 objects and a 2x2 speck are queued
// before WRITE and RP is issued at once, so it waits for the FIFO to drain;
// RP must take exactly 10N + 12 cycles and drop the speck as noise.
// Each mechanism is counted and must have happened at least once.
module tb_ebbi_processor;
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
  // mechanism counters
  int n_backpressure = 0, n_write_hold = 0, n_de = 0, n_stall = 0, n_overflow = 0;
  int n_merge = 0, n_noise_drop = 0, n_third_iter = 0, n_modes[4];

  ebbi_processor dut (.*);
  always #2 aer_clk = ~aer_clk;
  always #5 sys_clk = ~sys_clk;

  always @(posedge aer_clk) if (!aer_nreq && aer_nack && fifo_full) n_backpressure++;
  always @(posedge sys_clk) begin
    if (cmd_valid && !cmd_ready) n_write_hold++;
    if (cmd_valid && cmd_ready) n_modes[cmd]++;
    if (dut.de) n_de++;
    if (stall) n_stall++;
  end

  typedef struct { int x0, x1, y0, y1; } rect_t;
  int ev_x[$], ev_y[$];

  task automatic add_rect(input int x0, x1, y0, y1);
    for (int i = y0; i <= y1; i++) for (int j = x0; j <= x1; j++) begin ev_x.push_back(j); ev_y.push_back(i); end
  endtask
  task automatic send_events();
    while (ev_x.size() != 0) begin
      @(negedge aer_clk);
      aer_data = {Y_W'(ev_y.pop_front()), X_W'(ev_x.pop_front())};
      aer_nreq = 0;
      while (aer_nack) @(negedge aer_clk);
      aer_nreq = 1;
      while (!aer_nack) @(negedge aer_clk);
    end
    // Let the last event cross the FIFO's clock-domain synchroniser.
    repeat (4) @(posedge sys_clk);
  endtask
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
  task automatic read_px(input int y, input int x, output bit v);
    @(negedge sys_clk);
    rd_en = 1; rd_row = Y_W'(y); rd_word = 4'(x / 32);
    @(negedge sys_clk);
    rd_en = 0;
    v = rd_data[x % 32];
  endtask
  task automatic expect_eq(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: %0d, exp %0d", what, got, exp); end
  endtask
  task automatic expect_box(input int k, input int x0, x1, y0, y1);
    checks++;
    if (rois[k] !== box_t'{x0: X_W'(x0), x1: X_W'(x1), y0: Y_W'(y0), y1: Y_W'(y1)}) begin
      failures++;
      $display("FAIL region %0d: x[%0d,%0d] y[%0d,%0d], exp x[%0d,%0d] y[%0d,%0d]", k,
               rois[k].x0, rois[k].x1, rois[k].y0, rois[k].y1, x0, x1, y0, y1);
    end
  endtask
  task automatic run_rp();
    issue(MODE_RP);
    @(posedge sys_clk);
    while (!rp_done) @(posedge sys_clk);
    #1;
    expect_eq("mode after RP", int'(mode), int'(MODE_RP));
    if (overflow) n_overflow++;
    n_merge += n_merged;
    n_noise_drop += n_noise;
    if (iterations >= 3) n_third_iter++;
    $display("RP: %0d boxes in %0d iterations, %0d regions, %0d cycles", iss_cnt, iterations, roi_cnt, rp_cycles);
  endtask

  initial begin
    bit v;
    cfg = '{de_width: 8'd1, de_pulses: 4'd1, de_amp: 2'd3, vref: 4'd0, t_proj: 4'd4,
            size_min: 16'd4, slot: 8'd3};
    repeat (3) @(negedge sys_clk);
    rst_n = 1;
    repeat (3) @(negedge sys_clk);
    // ---------------- frame 1 ----------------
    issue(MODE_CLEAR); wait_idle();
    add_rect(20, 39, 30, 49);      // A
    add_rect(100, 111, 100, 119);  // B, left fragment
    add_rect(114, 125, 100, 119);  // B, right fragment
    add_rect(205, 215, 20, 29);    // D, in the columns of C
    add_rect(200, 229, 150, 179);  // C
    add_rect(300, 300, 200, 200);  // noise
    add_rect(60, 60, 200, 200);
    add_rect(150, 150, 60, 60);
    add_rect(250, 250, 100, 100);
    fork
      send_events();
      begin
        repeat (1200) @(posedge sys_clk);   // FIFO fills while nothing reads it
        issue(MODE_WRITE);
      end
    join
    read_px(200, 300, v); expect_eq("noise pixel written", v, 1);
    issue(MODE_IR); wait_idle();
    read_px(200, 300, v); expect_eq("noise pixel (300,200) after IR", v, 0);
    read_px(60, 150, v);  expect_eq("noise pixel (150,60) after IR", v, 0);
    read_px(40, 30, v);   expect_eq("object A after IR", v, 1);
    read_px(30, 20, v);   expect_eq("corner of A after IR", v, 0);
    read_px(30, 21, v);   expect_eq("edge of A after IR", v, 1);
    run_rp();
    expect_eq("ISS boxes", iss_cnt, 5);
    expect_eq("ISS iterations", iterations, 3);
    expect_eq("regions", roi_cnt, 4);
    checks++;
    if (rp_cycles < 10 * 5 + 12) begin failures++; $display("FAIL RP faster than 10N+12"); end
    expect_box(0, 20, 39, 30, 49);
    expect_box(1, 100, 125, 100, 119);
    expect_box(2, 205, 215, 20, 29);
    expect_box(3, 200, 229, 150, 179);
    // ---------------- frame 2 ----------------
    issue(MODE_CLEAR); wait_idle();
    issue(MODE_WRITE);
    for (int k = 0; k < 20; k++) add_rect(10 + 15 * k, 12 + 15 * k, 40 + 5 * k, 42 + 5 * k);
    send_events();
    run_rp();
    expect_eq("regions (list full)", roi_cnt, 16);
    expect_eq("overflow", overflow, 1);
    for (int k = 0; k < 16; k++) expect_box(k, 10 + 15 * k, 12 + 15 * k, 40 + 5 * k, 42 + 5 * k);
    // ---------------- frame 3 ----------------
    // Five separable objects and a 2x2 speck, queued before WRITE; RP is
    // issued at once and must wait for the FIFO to drain. Every box splits
    // no further, so RP takes exactly 10N + 12 cycles with N = 6.
    issue(MODE_CLEAR); wait_idle();
    for (int k = 0; k < 5; k++) add_rect(20 + 50 * k, 23 + 50 * k, 30 + 40 * k, 33 + 40 * k);
    add_rect(300, 301, 5, 6);
    send_events();
    issue(MODE_WRITE);
    run_rp();
    expect_eq("frame 3 ISS boxes", iss_cnt, 6);
    expect_eq("frame 3 RP cycles (10N+12)", rp_cycles, 10 * 6 + 12);
    expect_eq("frame 3 regions", roi_cnt, 5);
    for (int k = 0; k < 5; k++) expect_box(k, 20 + 50 * k, 23 + 50 * k, 30 + 40 * k, 33 + 40 * k);
    // ---------------- mechanisms ----------------
    $display("mechanisms: backpressure=%0d write_hold=%0d de=%0d stall=%0d overflow=%0d merge=%0d noise=%0d iter3=%0d modes=%0d/%0d/%0d/%0d",
             n_backpressure, n_write_hold, n_de, n_stall, n_overflow, n_merge, n_noise_drop, n_third_iter,
             n_modes[0], n_modes[1], n_modes[2], n_modes[3]);
    foreach (n_modes[m]) begin checks++; if (n_modes[m] == 0) begin failures++; $display("FAIL mode %0d never used", m); end end
    checks++; if (n_backpressure == 0) begin failures++; $display("FAIL no AER backpressure"); end
    checks++; if (n_write_hold == 0) begin failures++; $display("FAIL no WRITE hold"); end
    checks++; if (n_de == 0) begin failures++; $display("FAIL no DE pulse"); end
    checks++; if (n_stall == 0) begin failures++; $display("FAIL no extractor stall"); end
    checks++; if (n_overflow == 0) begin failures++; $display("FAIL no list overflow"); end
    checks++; if (n_merge == 0) begin failures++; $display("FAIL no merge"); end
    checks++; if (n_noise_drop == 0) begin failures++; $display("FAIL no noise box dropped"); end
    checks++; if (n_third_iter == 0) begin failures++; $display("FAIL no third ISS iteration"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge sys_clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
