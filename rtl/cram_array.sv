// cram_array: behavioural model of the 320 x 240 CRAM macro with its ring of
// dummy cells. The real macro is a mixed-signal array of 11-transistor cells
// (6T SRAM with a transmission-gate switch in the latch loop, two diffusion
// transistors MDV/MDH to the vertical and horizontal neighbours, and a
// storage/projection transistor MS); this model reproduces its behaviour in
// fixed point, one clock at a time.
//
// Cell voltage: VW bits, 0 = GND, 2**VW-1 = VDD. The stored bit is the
// voltage's top bit.
//  * clear      : every cell, dummy ring included, goes to 0.
//  * sw_en = 1  : SRAM mode. The latch restores every cell to a full 0/1
//                 (inv1 threshold at VDD/2). A write (we) sets the cells
//                 selected by wl & bl_sel to wr_data; a read (re) copies the
//                 row selected by wl into row_q (registered, one cycle).
//  * sw_en = 0, de = 1 : diffusion (DRAM mode, DE high). Each clock every cell,
//                 dummy ring included, moves by alpha*(sum of its 4 neighbours
//                 - 4*self), alpha = (de_amp+1)/16, i.e. one explicit step of
//                 the 2-D RC network. An edge of the dummy ring sees itself as
//                 its missing neighbour (no charge leaves the ring). The pulse
//                 width is the number of such clocks; the amplitude is de_amp.
//                 The analog voltages are re-digitised when sw closes again.
//  * sw_en = 0, de = 0 : DRAM hold. The voltages stay as they are (no
//                 leakage is modelled). The chip can also write and read the
//                 cells as 1T1C DRAM; this model, and the controller, write and
//                 read in SRAM mode only.
//  * projection : a floating line (PU/PD = 10) integrates, each clock, one unit
//                 per '1' cell whose orthogonal line is pulled up (00), which
//                 is V_PL = t_proj * I_cell / C_PL * sum(data) of the chip's
//                 projection equation with I_cell*T/C = 1 unit. A pulled-down
//                 line (11) reads 0, a pulled-up line VDD. The levels go out
//                 to the projection detectors.
// The mode behaviours and the line codes follow the chip; the fixed-point
// voltage, the diffusion step, the threshold and the dummy-ring boundary are
// this model's choices.
module cram_array
  import cram_pkg::*;
#(
  parameter int unsigned W  = ARR_W,
  parameter int unsigned H  = ARR_H,
  parameter int unsigned V  = VW
) (
  input  logic               clk,
  input  logic               clear,
  input  logic               sw_en,     // SP/SN: latch switch closed
  input  logic               de,        // diffusion enable
  input  logic [1:0]         de_amp,    // DE pulse amplitude code
  input  logic [H-1:0]       wl,        // word lines (one-hot)
  input  logic [W-1:0]       bl_sel,    // column select for a write
  input  logic               we,
  input  logic               wr_data,
  input  logic               re,
  output logic [W-1:0]       row_q,
  input  logic [1:0]         plh_cfg [H],  // {PU, PD} of PL_H<i>
  input  logic [1:0]         plv_cfg [W],  // {PU, PD} of PL_V<j>
  output logic [V-1:0]       plh_lvl [H],
  output logic [V-1:0]       plv_lvl [W]
);
  localparam logic [V-1:0] VDD  = '1;
  localparam logic [V-1:0] HALF = V'(1) << (V-1);

  // Cells including the dummy ring: index 0 and H+1 / W+1 are dummies.
  logic [V-1:0] v [H+2][W+2];

  function automatic logic [V-1:0] step(input logic [V-1:0] c, n, s, e, w,
                                        input logic [1:0] amp);
    logic signed [V+3:0] delta;
    logic signed [V+6:0] nv;
    delta = $signed({4'b0, n}) + $signed({4'b0, s}) + $signed({4'b0, e})
          + $signed({4'b0, w}) - $signed({2'b0, c, 2'b0});
    nv    = $signed({7'b0, c}) + ((delta * $signed({5'b0, amp} + 7'sd1)) >>> 4);
    if (nv < 0)                    return '0;
    if (nv > $signed({7'b0, VDD})) return VDD;
    return nv[V-1:0];
  endfunction

  always_ff @(posedge clk) begin
    if (clear) begin
      for (int i = 0; i < H+2; i++)
        for (int j = 0; j < W+2; j++)
          v[i][j] <= '0;
    end else if (!sw_en && de) begin
      for (int i = 0; i < H+2; i++)
        for (int j = 0; j < W+2; j++)
          v[i][j] <= step(v[i][j],
                          (i > 0)   ? v[i-1][j] : v[i][j],
                          (i < H+1) ? v[i+1][j] : v[i][j],
                          (j < W+1) ? v[i][j+1] : v[i][j],
                          (j > 0)   ? v[i][j-1] : v[i][j],
                          de_amp);
    end else if (sw_en) begin
      for (int i = 0; i < H+2; i++)
        for (int j = 0; j < W+2; j++) begin
          if (we && i > 0 && i <= H && j > 0 && j <= W && wl[i-1] && bl_sel[j-1])
            v[i][j] <= wr_data ? VDD : '0;
          else
            v[i][j] <= (v[i][j] >= HALF) ? VDD : '0;
        end
    end
  end

  // Row read-out through the bit lines.
  always_ff @(posedge clk) begin
    if (re && sw_en) begin
      row_q <= '0;
      for (int i = 0; i < H; i++)
        if (wl[i])
          for (int j = 0; j < W; j++)
            row_q[j] <= v[i+1][j+1][V-1];
    end
  end

  // Projection lines.
  function automatic logic [V-1:0] integrate(input logic [1:0] lcfg,
                                             input logic [V-1:0] lvl,
                                             input logic [$clog2(W+H+1):0] cnt);
    logic [$clog2(W+H+1)+1:0] sum;
    sum = ($clog2(W+H+1)+2)'(lvl) + ($clog2(W+H+1)+2)'(cnt);
    unique case (lcfg)
      PL_PULL_DOWN: return '0;
      PL_PULL_UP:   return VDD;
      PL_FLOAT:     return (sum > ($clog2(W+H+1)+2)'(VDD)) ? VDD : sum[V-1:0];
      default:      return lvl;   // PU off and PD on together is not used
    endcase
  endfunction

  always_ff @(posedge clk) begin
    if (de) begin
      // Diffusion: the projection lines are held down.
      for (int i = 0; i < H; i++) plh_lvl[i] <= '0;
      for (int j = 0; j < W; j++) plv_lvl[j] <= '0;
    end else begin
      for (int i = 0; i < H; i++) begin
        logic [$clog2(W+H+1):0] cnt;
        cnt = '0;
        for (int j = 0; j < W; j++)
          cnt += ($clog2(W+H+1)+1)'(v[i+1][j+1][V-1] && plv_cfg[j] == PL_PULL_UP);
        plh_lvl[i] <= integrate(plh_cfg[i], plh_lvl[i], cnt);
      end
      for (int j = 0; j < W; j++) begin
        logic [$clog2(W+H+1):0] cnt;
        cnt = '0;
        for (int i = 0; i < H; i++)
          cnt += ($clog2(W+H+1)+1)'(v[i+1][j+1][V-1] && plh_cfg[i] == PL_PULL_UP);
        plv_lvl[j] <= integrate(plv_cfg[j], plv_lvl[j], cnt);
      end
    end
  end
endmodule
