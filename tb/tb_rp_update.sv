// tb_rp_update: feeds random box lists (including tiny noise boxes and boxes
// close to each other) into the RP update block with random SIZE_MIN and SLOT
// and compares the region list, the noise and merge counts and the busy time
// (2N + 1 cycles for N input boxes) with an independent model of the update
// flow: drop if width*height <= SIZE_MIN, keep the first survivor, merge into
// the first kept box whose gaps in x and y are both below SLOT, else keep.
module tb_rp_update;
  import cram_pkg::*;
  localparam int NOBJ = 16;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  box_t in_objs [NOBJ];
  box_t rois [NOBJ];
  logic [4:0] in_cnt, roi_cnt, n_noise, n_merged;
  logic [15:0] size_min;
  logic [7:0] slot;
  int checks = 0, failures = 0, busy_cycles = 0;

  rp_update #(.NOBJ(NOBJ)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (busy) busy_cycles++;

  function automatic int gap1(int a0, int a1, int b0, int b1);
    if (b0 > a1) return b0 - a1 - 1;
    if (a0 > b1) return a0 - b1 - 1;
    return 0;
  endfunction

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      automatic box_t kept[$];
      automatic int noise = 0, merged = 0, n;
      n = (t < 3) ? t : 1 + $urandom % NOBJ;
      size_min = 16'($urandom % 12);
      slot = 8'($urandom % 8);
      for (int k = 0; k < NOBJ; k++) begin
        automatic int x0 = $urandom % 300, y0 = $urandom % 220;
        automatic int big = ($urandom % 3 != 0);
        in_objs[k].x0 = X_W'(x0);
        in_objs[k].x1 = X_W'(x0 + (big ? $urandom % 20 : $urandom % 2));
        in_objs[k].y0 = Y_W'(y0);
        in_objs[k].y1 = Y_W'(y0 + (big ? $urandom % 20 : $urandom % 2));
        if (k > 0 && $urandom % 2 == 1) begin   // close to the previous box
          in_objs[k].x0 = in_objs[k-1].x1 + X_W'($urandom % 6);
          in_objs[k].x1 = in_objs[k].x0 + X_W'($urandom % 10);
          in_objs[k].y0 = in_objs[k-1].y0;
          in_objs[k].y1 = in_objs[k-1].y1;
        end
      end
      in_cnt = 5'(n);
      // reference
      for (int k = 0; k < n; k++) begin
        automatic box_t b = in_objs[k];
        automatic int area = (int'(b.x1) - int'(b.x0) + 1) * (int'(b.y1) - int'(b.y0) + 1);
        automatic int m = -1;
        if (!(area > int'(size_min))) begin noise++; continue; end
        foreach (kept[r])
          if (m < 0 && gap1(kept[r].x0, kept[r].x1, b.x0, b.x1) < int'(slot)
                    && gap1(kept[r].y0, kept[r].y1, b.y0, b.y1) < int'(slot)) m = r;
        if (m >= 0) begin
          merged++;
          if (b.x0 < kept[m].x0) kept[m].x0 = b.x0;
          if (b.x1 > kept[m].x1) kept[m].x1 = b.x1;
          if (b.y0 < kept[m].y0) kept[m].y0 = b.y0;
          if (b.y1 > kept[m].y1) kept[m].y1 = b.y1;
        end else kept.push_back(b);
      end
      // DUT
      @(negedge clk);
      busy_cycles = 0;
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      checks++;
      if (int'(roi_cnt) != kept.size() || int'(n_noise) != noise || int'(n_merged) != merged) begin
        failures++;
        $display("FAIL t=%0d: rois %0d/%0d noise %0d/%0d merged %0d/%0d", t, roi_cnt, kept.size(),
                 n_noise, noise, n_merged, merged);
      end
      foreach (kept[r]) begin
        checks++;
        if (rois[r] !== kept[r]) begin failures++; $display("FAIL t=%0d roi %0d", t, r); end
      end
      checks++;
      if (busy_cycles != 2*n + 1) begin failures++; $display("FAIL t=%0d: %0d cycles, exp %0d", t, busy_cycles, 2*n + 1); end
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
