// tb_traffic_f1: detection quality on synthetic traffic frames, on the full
// 320 x 240 processor. Each frame holds two or three vehicles, each drawn as a
// solid block of events split in two by a window that fires no events (two
// empty columns), plus 0.2 % random noise pixels. Every frame is written
// through the AER port, restored (IR) and proposed twice: with the update
// disabled (SIZE_MIN 0, SLOT 0: the raw in-memory search) and enabled
// (SIZE_MIN 4, SLOT 3). A proposal matches a vehicle when their intersection
// over union reaches the threshold; the F1 score over all frames is printed
// for IoU thresholds 0.3, 0.5 and 0.7, with and without the update.
// Part 1 uses one 1-cycle DE pulse at full amplitude on six frames: the update
// must join the fragments and score higher at IoU 0.5, and the full flow must
// reach F1 >= 0.9 there. Part 2 repeats two frames for each of nine
// restoration settings, three DE amplitudes (de_amp 1..3, standing for the
// chip's three resistance settings) times three diffusion times (de_width
// 1..3 cycles), and requires F1 >= 0.9 at IoU 0.5 with the update for each.
// The frames are this test's own; the chip was scored on recorded traffic.
module tb_traffic_f1;
  import cram_pkg::*;
  localparam int FRAMES = 6;
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

  typedef struct { int x0, x1, y0, y1; } rect_t;

  task automatic send(input int x, y);
    @(negedge aer_clk);
    aer_data = {Y_W'(y), X_W'(x)};
    aer_nreq = 0;
    while (aer_nack) @(negedge aer_clk);
    aer_nreq = 1;
    while (!aer_nack) @(negedge aer_clk);
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
  function automatic real iou(rect_t a, box_t b);
    int ix0 = (a.x0 > int'(b.x0)) ? a.x0 : int'(b.x0);
    int ix1 = (a.x1 < int'(b.x1)) ? a.x1 : int'(b.x1);
    int iy0 = (a.y0 > int'(b.y0)) ? a.y0 : int'(b.y0);
    int iy1 = (a.y1 < int'(b.y1)) ? a.y1 : int'(b.y1);
    int inter, ua;
    if (ix1 < ix0 || iy1 < iy0) return 0.0;
    inter = (ix1 - ix0 + 1) * (iy1 - iy0 + 1);
    ua = (a.x1 - a.x0 + 1) * (a.y1 - a.y0 + 1)
       + (int'(b.x1) - int'(b.x0) + 1) * (int'(b.y1) - int'(b.y0) + 1) - inter;
    return real'(inter) / real'(ua);
  endfunction
  // Score the current region list against the vehicles at IoU threshold th.
  task automatic score(input rect_t gt[$], input real th, inout int tp, inout int fp, inout int fn);
    bit used [MAX_OBJ];
    int hits = 0;
    foreach (used[k]) used[k] = 0;
    foreach (gt[g]) begin
      for (int k = 0; k < int'(roi_cnt); k++)
        if (!used[k] && iou(gt[g], rois[k]) >= th) begin used[k] = 1; hits++; break; end
    end
    tp += hits; fn += gt.size() - hits; fp += int'(roi_cnt) - hits;
  endtask
  task automatic propose(input bit update);
    cfg.size_min = update ? 16'd4 : 16'd0;
    cfg.slot     = update ? 8'd3 : 8'd0;
    issue(MODE_RP);
    @(posedge sys_clk);
    while (!rp_done) @(posedge sys_clk);
    #1;
  endtask
  // A random frame: vehicles (ground truth) and noise pixel positions.
  task automatic make_frame(input int f, output rect_t gt[$], output int noise[$]);
    gt = {}; noise = {};
    for (int c = 0; c < 2 + f % 2; c++) begin
      automatic rect_t r;
      r.x0 = 10 + 100 * c + $urandom % 30;
      r.x1 = r.x0 + 20 + $urandom % 20;
      r.y0 = 20 + $urandom % 180;
      r.y1 = r.y0 + 10 + $urandom % 10;
      gt.push_back(r);
    end
    for (int k = 0; k < 150; k++) noise.push_back(($urandom % ARR_H) * ARR_W + $urandom % ARR_W);
  endtask
  // Clear the array, write the frame through the AER port and restore it.
  task automatic load_frame(input rect_t gt[$], input int noise[$]);
    issue(MODE_CLEAR);
    issue(MODE_WRITE);
    foreach (gt[c]) begin
      automatic int win = gt[c].x0 + (gt[c].x1 - gt[c].x0) * 2 / 5;
      for (int i = gt[c].y0; i <= gt[c].y1; i++)
        for (int j = gt[c].x0; j <= gt[c].x1; j++)
          if (j != win && j != win + 1) send(j, i);
    end
    foreach (noise[k]) send(noise[k] % ARR_W, noise[k] / ARR_W);
    repeat (4) @(posedge sys_clk);
    issue(MODE_IR);
    wait_idle();
  endtask
  function automatic real f1(int tp, int fp, int fn);
    return (tp == 0) ? 0.0 : 2.0 * tp / (2.0 * tp + fp + fn);
  endfunction

  initial begin
    real th [3] = '{0.3, 0.5, 0.7};
    int tp [2][3], fp [2][3], fn [2][3];
    rect_t gt[$];
    int noise[$];
    foreach (tp[u, t]) begin tp[u][t] = 0; fp[u][t] = 0; fn[u][t] = 0; end
    cfg = '{de_width: 8'd1, de_pulses: 4'd1, de_amp: 2'd3, vref: 4'd0, t_proj: 4'd4,
            size_min: 16'd4, slot: 8'd3};
    repeat (3) @(negedge sys_clk);
    rst_n = 1;
    // Part 1: F1 against IoU, search alone and with the update.
    for (int f = 0; f < FRAMES; f++) begin
      make_frame(f, gt, noise);
      load_frame(gt, noise);
      for (int u = 0; u < 2; u++) begin
        propose(u[0]);
        for (int t = 0; t < 3; t++) score(gt, th[t], tp[u][t], fp[u][t], fn[u][t]);
      end
      $display("frame %0d: %0d vehicles, %0d regions after update", f, gt.size(), roi_cnt);
    end
    for (int t = 0; t < 3; t++)
      $display("F1 at IoU %.1f: search only %.3f (tp %0d fp %0d fn %0d), with update %.3f (tp %0d fp %0d fn %0d)",
               th[t], f1(tp[0][t], fp[0][t], fn[0][t]), tp[0][t], fp[0][t], fn[0][t],
               f1(tp[1][t], fp[1][t], fn[1][t]), tp[1][t], fp[1][t], fn[1][t]);
    checks += 2;
    if (!(f1(tp[1][1], fp[1][1], fn[1][1]) > f1(tp[0][1], fp[0][1], fn[0][1]))) begin
      failures++; $display("FAIL update does not improve F1");
    end
    if (f1(tp[1][1], fp[1][1], fn[1][1]) < 0.9) begin
      failures++; $display("FAIL F1 with update below 0.9");
    end
    // Part 2: robustness over diffusion strength and time.
    for (int a = 1; a <= 3; a++)
      for (int w = 1; w <= 3; w++) begin
        automatic int stp = 0, sfp = 0, sfn = 0;
        cfg.de_amp = 2'(a);
        cfg.de_width = 8'(w);
        for (int f = 0; f < 2; f++) begin
          make_frame(f, gt, noise);
          load_frame(gt, noise);
          propose(1);
          score(gt, 0.5, stp, sfp, sfn);
        end
        $display("de_amp %0d de_width %0d: F1 %.3f (tp %0d fp %0d fn %0d)", a, w,
                 f1(stp, sfp, sfn), stp, sfp, sfn);
        checks++;
        if (f1(stp, sfp, sfn) < 0.9) begin
          failures++; $display("FAIL F1 below 0.9 at de_amp %0d de_width %0d", a, w);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1500000) @(posedge sys_clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
