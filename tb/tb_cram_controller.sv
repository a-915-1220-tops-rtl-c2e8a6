// tb_cram_controller: the controller driving a 48 x 32 CRAM array model and
// its projection detectors, with a behavioural show-ahead FIFO in front.
//  * CLEAR empties the array;
//  * WRITE drains the FIFO into the array; a command issued while events are
//    still queued must wait (cmd_ready low) until the FIFO is empty;
//  * IR: two DE pulses of 3 cycles (DE high exactly 6 cycles, the latch switch
//    open around them) remove an isolated noise pixel and keep solid objects;
//  * RP on a hand-made frame: one object, one object in two fragments two
//    columns apart, one noise pixel, one more object. The search finds 5
//    boxes in 2 iterations; the update drops the noise pixel (SIZE_MIN = 2)
//    and joins the fragments (SLOT = 3), leaving 3 regions, worked out by
//    hand; the whole RP takes 10 x 5 + 12 cycles.
module tb_cram_controller;
  import cram_pkg::*;
  localparam int W = 48, H = 32, NOBJ = 16;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready;
  mode_e cmd = MODE_CLEAR;
  cfg_t cfg;
  logic fifo_empty, fifo_rd;
  logic [31:0] fifo_rdata;
  logic arr_clear, sw_en, de, we, busy, rp_done, overflow, stall;
  logic [1:0] de_amp;
  logic [X_W-1:0] wr_x;
  logic [Y_W-1:0] wr_y;
  logic [1:0] plh_cfg [H];
  logic [1:0] plv_cfg [W];
  logic [H-1:0] plh_det, wl, tb_wl = '0;
  logic [W-1:0] plv_det, bl_sel, row_q;
  logic [7:0] plh_lvl [H];
  logic [7:0] plv_lvl [W];
  mode_e cur_mode;
  box_t rois [NOBJ];
  logic [4:0] roi_cnt, iss_cnt, n_noise, n_merged;
  logic [3:0] iterations;
  logic [15:0] rp_cycles;
  logic tb_re = 0;
  int checks = 0, failures = 0;
  int de_cycles = 0, hold_cycles = 0;
  logic [31:0] q[$];

  cram_controller #(.W(W), .H(H), .NOBJ(NOBJ)) dut (.*);
  cram_array #(.W(W), .H(H), .V(8)) u_arr (.clk, .clear(arr_clear), .sw_en, .de, .de_amp,
    .wl, .bl_sel, .we, .wr_data(1'b1), .re(tb_re), .row_q, .plh_cfg, .plv_cfg, .plh_lvl, .plv_lvl);
  proj_detector #(.N(H), .V(8)) u_yd (.clk, .vref(cfg.vref), .lvl(plh_lvl), .det(plh_det));
  proj_detector #(.N(W), .V(8)) u_xd (.clk, .vref(cfg.vref), .lvl(plv_lvl), .det(plv_det));

  always_comb begin
    wl = tb_wl; bl_sel = '0;
    if (we) begin
      wl = '0; wl[wr_y] = 1'b1; bl_sel[wr_x] = 1'b1;
    end
  end
  assign fifo_empty = (q.size() == 0);
  assign fifo_rdata = fifo_empty ? 32'd0 : q[0];
  always @(posedge clk) begin
    if (fifo_rd) void'(q.pop_front());
    if (de) de_cycles++;
    if (cmd_valid && !cmd_ready && cur_mode == MODE_WRITE) hold_cycles++;
  end
  always #5 clk = ~clk;

  task automatic issue(input mode_e m);
    @(negedge clk);
    cmd = m; cmd_valid = 1;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    #1 cmd_valid = 0;
  endtask
  task automatic wait_idle();
    @(negedge clk);
    while (busy) @(negedge clk);
  endtask
  task automatic ev_rect(input int x0, x1, y0, y1);
    for (int i = y0; i <= y1; i++) for (int j = x0; j <= x1; j++) q.push_back({15'd0, 8'(i), 9'(j)});
  endtask
  task automatic read_px(input int y, input int x, output bit v);
    @(negedge clk);
    tb_wl = '0; tb_wl[y] = 1; tb_re = 1;
    @(negedge clk);
    tb_wl = '0; tb_re = 0;
    v = row_q[x];
  endtask
  task automatic count_ones(output int n);
    n = 0;
    for (int i = 0; i < H; i++) begin
      @(negedge clk);
      tb_wl = '0; tb_wl[i] = 1; tb_re = 1;
      @(negedge clk);
      tb_wl = '0; tb_re = 0;
      n += $countones(row_q);
    end
  endtask
  task automatic expect_eq(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: %0d, exp %0d", what, got, exp); end
  endtask

  initial begin
    bit v;
    int n;
    cfg = '{de_width: 8'd3, de_pulses: 4'd2, de_amp: 2'd3, vref: 4'd0, t_proj: 4'd4,
            size_min: 16'd2, slot: 8'd3};
    repeat (3) @(negedge clk);
    rst_n = 1;
    // CLEAR then WRITE: a 6x6 block and an isolated pixel
    issue(MODE_CLEAR); wait_idle();
    count_ones(n); expect_eq("ones after clear", n, 0);
    issue(MODE_WRITE);
    ev_rect(10, 15, 10, 15);
    ev_rect(30, 30, 5, 5);
    issue(MODE_IR);        // must wait until all 37 events are written
    expect_eq("FIFO empty when IR accepted", q.size(), 0);
    checks++;
    if (hold_cycles == 0) begin failures++; $display("FAIL no WRITE hold"); end
    wait_idle();
    expect_eq("DE high cycles", de_cycles, 6);
    read_px(5, 30, v);  expect_eq("noise pixel after IR", v, 0);
    read_px(12, 12, v); expect_eq("object pixel after IR", v, 1);
    count_ones(n);
    checks++;
    if (n < 20) begin failures++; $display("FAIL object eroded: %0d ones", n); end
    // RP scene
    issue(MODE_CLEAR); wait_idle();
    issue(MODE_WRITE);
    ev_rect(2, 6, 2, 8);
    ev_rect(12, 15, 10, 14);
    ev_rect(18, 20, 10, 14);
    ev_rect(30, 30, 20, 20);
    ev_rect(36, 44, 20, 28);
    issue(MODE_RP);
    @(posedge clk);
    while (!rp_done) @(posedge clk);
    #1;
    expect_eq("ISS boxes", iss_cnt, 5);
    expect_eq("ISS iterations", iterations, 2);
    expect_eq("RP cycles (10N+12)", rp_cycles, 62);
    expect_eq("regions", roi_cnt, 3);
    expect_eq("noise boxes", n_noise, 1);
    expect_eq("merged boxes", n_merged, 1);
    checks++;
    if (rois[0] !== box_t'{x0: 2, x1: 6, y0: 2, y1: 8} ||
        rois[1] !== box_t'{x0: 12, x1: 20, y0: 10, y1: 14} ||
        rois[2] !== box_t'{x0: 36, x1: 44, y0: 20, y1: 28}) begin
      failures++;
      for (int k = 0; k < 3; k++)
        $display("FAIL roi %0d: x[%0d,%0d] y[%0d,%0d]", k, rois[k].x0, rois[k].x1, rois[k].y0, rois[k].y1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
