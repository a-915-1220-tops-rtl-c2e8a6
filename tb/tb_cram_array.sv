// tb_cram_array: exercises the CRAM array model at 16 x 12 cells.
//  1. clear, then every row reads back as zeros;
//  2. random single-bit writes, read back row by row;
//  3. projections: random sets of pulled-up orthogonal lines, floating lines
//     integrate t cycles; each level must equal t x (number of '1' cells on
//     pulled-up lines), saturated at 255; pulled-down lines read 0 and
//     pulled-up lines 255;
//  4. diffusion: DE pulses of random width and amplitude on random images,
//     compared with an independent integer model of the RC step
//     (v += floor((n+s+e+w-4v)*(amp+1)/16), dummy ring included) followed by
//     re-digitisation at half VDD; plus the restoration effects themselves: an
//     isolated noise pixel disappears and a one-pixel hole in a solid block is
//     filled.
module tb_cram_array;
  import cram_pkg::*;
  localparam int W = 16, H = 12;
  logic clk = 0, clear = 0, sw_en = 1, de = 0, we = 0, wr_data = 0, re = 0;
  logic [1:0] de_amp = 0;
  logic [H-1:0] wl = '0;
  logic [W-1:0] bl_sel = '0, row_q;
  logic [1:0] plh_cfg [H];
  logic [1:0] plv_cfg [W];
  logic [7:0] plh_lvl [H];
  logic [7:0] plv_lvl [W];
  int checks = 0, failures = 0;
  int img [H][W];
  int ref_v [H+2][W+2];

  cram_array #(.W(W), .H(H), .V(8)) dut (.*);
  always #5 clk = ~clk;

  task automatic all_lines(input logic [1:0] c);
    for (int i = 0; i < H; i++) plh_cfg[i] = c;
    for (int j = 0; j < W; j++) plv_cfg[j] = c;
  endtask

  task automatic write_px(input int y, input int x, input bit d);
    @(negedge clk);
    wl = '0; bl_sel = '0; wl[y] = 1; bl_sel[x] = 1; we = 1; wr_data = d;
    @(negedge clk);
    we = 0; wl = '0; bl_sel = '0;
    img[y][x] = d;
  endtask

  task automatic check_image(input string what);
    for (int i = 0; i < H; i++) begin
      @(negedge clk);
      wl = '0; wl[i] = 1; re = 1;
      @(negedge clk);
      re = 0; wl = '0;
      for (int j = 0; j < W; j++) begin
        checks++;
        if (row_q[j] !== img[i][j][0]) begin
          failures++;
          if (failures < 15) $display("FAIL %s: cell (%0d,%0d) = %0d, exp %0d", what, i, j, row_q[j], img[i][j]);
        end
      end
    end
  endtask

  task automatic do_clear();
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int i = 0; i < H; i++) for (int j = 0; j < W; j++) img[i][j] = 0;
  endtask

  function automatic int ref_step(int c, int n, int s, int e, int w, int amp);
    int d, nv;
    d  = n + s + e + w - 4 * c;
    nv = c + ((d * (amp + 1)) >>> 4);
    if (nv < 0) nv = 0;
    if (nv > 255) nv = 255;
    return nv;
  endfunction

  task automatic diffuse(input int width, input int amp);
    int nxt [H+2][W+2];
    // reference
    for (int i = 0; i < H+2; i++) for (int j = 0; j < W+2; j++)
      ref_v[i][j] = (i >= 1 && i <= H && j >= 1 && j <= W) ? 255 * img[i-1][j-1] : 0;
    for (int t = 0; t < width; t++) begin
      for (int i = 0; i < H+2; i++) for (int j = 0; j < W+2; j++)
        nxt[i][j] = ref_step(ref_v[i][j],
                             (i > 0) ? ref_v[i-1][j] : ref_v[i][j],
                             (i < H+1) ? ref_v[i+1][j] : ref_v[i][j],
                             (j < W+1) ? ref_v[i][j+1] : ref_v[i][j],
                             (j > 0) ? ref_v[i][j-1] : ref_v[i][j], amp);
      ref_v = nxt;
    end
    for (int i = 0; i < H; i++) for (int j = 0; j < W; j++)
      img[i][j] = (ref_v[i+1][j+1] >= 128) ? 1 : 0;
    // DUT: open switch, DE pulse, close switch
    @(negedge clk); sw_en = 0; de_amp = 2'(amp);
    @(negedge clk); de = 1;
    repeat (width) @(negedge clk);
    de = 0;
    @(negedge clk); sw_en = 1;
    @(negedge clk);
  endtask

  initial begin
    all_lines(PL_PULL_DOWN);
    repeat (2) @(negedge clk);
    // 1. clear
    do_clear();
    check_image("clear");
    // 2. writes
    for (int k = 0; k < 60; k++) write_px($urandom % H, $urandom % W, 1'($urandom));
    check_image("write");
    // 3. projections
    for (int t = 0; t < 20; t++) begin
      automatic int tp = 1 + $urandom % 6;
      automatic logic [W-1:0] up_v;
      automatic logic [H-1:0] up_h;
      automatic bit horiz = t[0];
      up_v = W'($urandom); up_h = H'($urandom);
      @(negedge clk); all_lines(PL_PULL_DOWN);
      @(negedge clk);
      if (horiz) begin
        for (int j = 0; j < W; j++) plv_cfg[j] = up_v[j] ? PL_PULL_UP : PL_PULL_DOWN;
        for (int i = 0; i < H; i++) plh_cfg[i] = PL_FLOAT;
      end else begin
        for (int i = 0; i < H; i++) plh_cfg[i] = up_h[i] ? PL_PULL_UP : PL_PULL_DOWN;
        for (int j = 0; j < W; j++) plv_cfg[j] = PL_FLOAT;
      end
      repeat (tp) @(negedge clk);
      if (horiz) begin
        for (int i = 0; i < H; i++) begin
          automatic int cnt = 0;
          for (int j = 0; j < W; j++) cnt += img[i][j] * int'(up_v[j]);
          checks++;
          if (int'(plh_lvl[i]) != ((tp * cnt > 255) ? 255 : tp * cnt)) begin
            failures++;
            if (failures < 15) $display("FAIL PL_H<%0d> = %0d exp %0d", i, plh_lvl[i], tp * cnt);
          end
        end
        for (int j = 0; j < W; j++) begin
          checks++;
          if (plv_lvl[j] !== (up_v[j] ? 8'hff : 8'h00)) begin failures++; $display("FAIL PL_V<%0d> drive level", j); end
        end
      end else begin
        for (int j = 0; j < W; j++) begin
          automatic int cnt = 0;
          for (int i = 0; i < H; i++) cnt += img[i][j] * int'(up_h[i]);
          checks++;
          if (int'(plv_lvl[j]) != ((tp * cnt > 255) ? 255 : tp * cnt)) begin
            failures++;
            if (failures < 15) $display("FAIL PL_V<%0d> = %0d exp %0d", j, plv_lvl[j], tp * cnt);
          end
        end
      end
    end
    @(negedge clk); all_lines(PL_PULL_DOWN);
    // 4. diffusion against the reference model
    for (int t = 0; t < 6; t++) begin
      do_clear();
      for (int k = 0; k < 80; k++) write_px($urandom % H, $urandom % W, 1);
      diffuse(1 + $urandom % 5, $urandom % 4);
      check_image("diffusion");
    end
    // restoration effects: noise pixel removed, hole filled
    do_clear();
    write_px(2, 2, 1);
    for (int i = 5; i < 10; i++) for (int j = 8; j < 13; j++) if (!(i == 7 && j == 10)) write_px(i, j, 1);
    diffuse(3, 3);
    checks += 2;
    if (img[2][2] != 0)  begin failures++; $display("FAIL reference keeps the noise pixel"); end
    if (img[7][10] != 1) begin failures++; $display("FAIL reference does not fill the hole"); end
    check_image("restoration");
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
