// tb_iss_engine: runs the ISS search on a 48 x 32 CRAM array model with its
// projection detectors (Vref code 0, t_proj = 4) and compares the box list
// with an independent software version of the search (projections computed
// directly from the image). Scenes: an empty frame (8 cycles), 1..7 objects
// that split no further (busy exactly 8N + 8 cycles, the chip's minimum), the
// two-column example of four objects that needs a third iteration, ten
// objects in one projection (the run extractor falls behind: stall), twenty
// (the box list overflows at 16) and random blobs.
module tb_iss_engine;
  import cram_pkg::*;
  localparam int W = 48, H = 32, NOBJ = 16;
  logic clk = 0, rst_n = 0, start = 0;
  logic clear = 0, we = 0, re = 0;
  logic [H-1:0] wl = '0, plh_det;
  logic [W-1:0] bl_sel = '0, plv_det, row_q;
  logic [1:0] plh_cfg [H];
  logic [1:0] plv_cfg [W];
  logic [7:0] plh_lvl [H];
  logic [7:0] plv_lvl [W];
  logic busy, done, overflow, stall;
  box_t objs [NOBJ];
  logic [4:0] obj_cnt;
  logic [3:0] iterations;
  int checks = 0, failures = 0;
  int stall_cycles = 0, busy_cycles = 0;
  bit img [H][W];

  iss_engine #(.W(W), .H(H), .NOBJ(NOBJ), .MAX_ITER(8)) dut (
    .clk, .rst_n, .start, .t_proj(4'd4), .plh_cfg, .plv_cfg, .plh_det, .plv_det,
    .busy, .done, .objs, .obj_cnt, .iterations, .overflow, .stall);
  cram_array #(.W(W), .H(H), .V(8)) u_arr (.clk, .clear, .sw_en(1'b1), .de(1'b0), .de_amp(2'd0),
    .wl, .bl_sel, .we, .wr_data(1'b1), .re, .row_q, .plh_cfg, .plv_cfg, .plh_lvl, .plv_lvl);
  proj_detector #(.N(H), .V(8)) u_yd (.clk, .vref(4'd0), .lvl(plh_lvl), .det(plh_det));
  proj_detector #(.N(W), .V(8)) u_xd (.clk, .vref(4'd0), .lvl(plv_lvl), .det(plv_det));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (busy)  busy_cycles++;
    if (stall) stall_cycles++;
  end

  // ---------------- scene set-up ----------------
  task automatic clear_img();
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int i = 0; i < H; i++) for (int j = 0; j < W; j++) img[i][j] = 0;
  endtask
  task automatic rect(input int x0, x1, y0, y1);
    for (int i = y0; i <= y1; i++)
      for (int j = x0; j <= x1; j++) begin
        @(negedge clk);
        wl = '0; bl_sel = '0; wl[i] = 1; bl_sel[j] = 1; we = 1;
        @(negedge clk);
        we = 0; wl = '0; bl_sel = '0;
        img[i][j] = 1;
      end
  endtask

  // ---------------- reference search ----------------
  box_t ref_list[$];
  bit   ref_ovf;
  int   ref_iter;
  task automatic ref_iss();
    box_t cur[$], nxt[$];
    bit axis_y = 0, first = 1;
    cur.push_back('{x0: 0, x1: W-1, y0: 0, y1: H-1});
    ref_ovf = 0; ref_iter = 0;
    forever begin
      nxt.delete();
      ref_iter++;
      foreach (cur[b]) begin
        int lo = axis_y ? cur[b].y0 : cur[b].x0;
        int hi = axis_y ? cur[b].y1 : cur[b].x1;
        int k = lo;
        while (k <= hi) begin
          bit d;
          d = 0;
          for (int m = (axis_y ? cur[b].x0 : cur[b].y0); m <= (axis_y ? cur[b].x1 : cur[b].y1); m++)
            d |= axis_y ? img[k][m] : img[m][k];
          if (d) begin
            int s = k;
            bit dd = 1;
            while (dd && k <= hi) begin
              k++;
              dd = 0;
              if (k <= hi)
                for (int m = (axis_y ? cur[b].x0 : cur[b].y0); m <= (axis_y ? cur[b].x1 : cur[b].y1); m++)
                  dd |= axis_y ? img[k][m] : img[m][k];
            end
            if (nxt.size() < NOBJ) begin
              box_t nb = cur[b];
              if (axis_y) begin nb.y0 = Y_W'(s); nb.y1 = Y_W'(k-1); end
              else        begin nb.x0 = X_W'(s); nb.x1 = X_W'(k-1); end
              nxt.push_back(nb);
            end else ref_ovf = 1;
          end else k++;
        end
      end
      if (first ? (nxt.size() == 0)
                : (nxt.size() == cur.size() || nxt.size() == 0 || ref_iter >= 8)) break;
      cur = nxt; axis_y = !axis_y; first = 0;
    end
    ref_list = nxt;
  endtask

  task automatic run_and_check(input string name, input int exp_cycles);
    int c0;
    ref_iss();
    @(negedge clk);
    busy_cycles = 0;
    start = 1;
    @(negedge clk);
    start = 0;
    c0 = 0;
    while (!done && c0 < 5000) begin @(posedge clk); #1; c0++; end
    checks++;
    if (!done) begin failures++; $display("FAIL %s: no done", name); return; end
    checks++;
    if (int'(obj_cnt) != ref_list.size() || overflow != ref_ovf || int'(iterations) != ref_iter) begin
      failures++;
      $display("FAIL %s: count %0d exp %0d, overflow %0d exp %0d, iterations %0d exp %0d",
               name, obj_cnt, ref_list.size(), overflow, ref_ovf, iterations, ref_iter);
    end
    foreach (ref_list[k]) begin
      checks++;
      if (k < NOBJ && objs[k] !== ref_list[k]) begin
        failures++;
        $display("FAIL %s: box %0d = x[%0d,%0d] y[%0d,%0d], exp x[%0d,%0d] y[%0d,%0d]", name, k,
                 objs[k].x0, objs[k].x1, objs[k].y0, objs[k].y1,
                 ref_list[k].x0, ref_list[k].x1, ref_list[k].y0, ref_list[k].y1);
      end
    end
    if (exp_cycles >= 0) begin
      checks++;
      if (busy_cycles != exp_cycles) begin
        failures++;
        $display("FAIL %s: %0d busy cycles, exp %0d", name, busy_cycles, exp_cycles);
      end
    end
    $display("%s: %0d boxes, %0d iterations, %0d cycles", name, obj_cnt, iterations, busy_cycles);
  endtask

  initial begin
    for (int i = 0; i < H; i++) plh_det[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    clear_img();
    run_and_check("empty", 8);
    for (int n = 1; n <= 7; n++) begin
      clear_img();
      for (int k = 0; k < n; k++) rect(6*k + 1, 6*k + 3, (5*k) % 25, (5*k) % 25 + 2);
      run_and_check($sformatf("%0d objects", n), 8*n + 8);
    end
    // Two column groups of two objects each: 2, then 4, then 4 boxes.
    clear_img();
    rect(2, 8, 16, 24); rect(5, 12, 3, 7); rect(24, 32, 1, 6); rect(28, 31, 18, 21);
    run_and_check("four objects", -1);
    checks++;
    if (iterations != 3 || obj_cnt != 4) begin failures++; $display("FAIL four objects: expected 3 iterations, 4 boxes"); end
    // Ten objects in one projection: the extractor stalls the next EXTRACT.
    stall_cycles = 0;
    clear_img();
    for (int k = 0; k < 10; k++) rect(4*k + 1, 4*k + 2, 3, 4);
    run_and_check("ten objects", -1);
    checks++;
    if (stall_cycles == 0) begin failures++; $display("FAIL ten objects: no stall"); end
    // Twenty objects: list overflow.
    clear_img();
    for (int k = 0; k < 20; k++) rect(2*k + 1, 2*k + 1, 10, 10);
    run_and_check("twenty objects", -1);
    checks++;
    if (!overflow) begin failures++; $display("FAIL twenty objects: no overflow"); end
    // Random blobs.
    for (int t = 0; t < 6; t++) begin
      clear_img();
      for (int k = 0; k < 5; k++) begin
        automatic int x = $urandom % (W - 6), y = $urandom % (H - 6);
        rect(x, x + $urandom % 5, y, y + $urandom % 5);
      end
      run_and_check($sformatf("random %0d", t), -1);
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
