// rp_update: second phase of region proposal, consolidation of the boxes the
// in-memory search found (the chip's "RP update" flow).
//
// The boxes are taken one by one. A box whose size (width x height, pixels)
// is not above size_min is noise and is dropped. The first box that survives
// is kept. A later box is compared with every box kept so far: if its gap to
// one of them is below slot in both x and y, it is merged into it (the kept
// box grows to the union of both); otherwise it is kept as a new object. The
// gap on one axis is the number of empty lines between the two intervals, 0
// when they touch or overlap. Merging is what joins an object that the sensor saw in fragments.
//
// Timing: one INIT cycle, then two cycles per box (EVAL compares with all kept
// boxes in parallel, COMMIT writes); busy is high for 2N + 1 cycles and done
// pulses in the cycle after the last one. The size measure, the single
// slot for both axes and the choice of the lowest-index box as merge target
// are this design's choices; the flow (noise test, first object, gap test,
// merge) follows the chip.
module rp_update
  import cram_pkg::*;
#(
  parameter int unsigned NOBJ = MAX_OBJ
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  box_t        in_objs [NOBJ],
  input  logic [$clog2(NOBJ+1)-1:0] in_cnt,
  input  logic [15:0] size_min,
  input  logic [7:0]  slot,
  output box_t        rois [NOBJ],
  output logic [$clog2(NOBJ+1)-1:0] roi_cnt,
  output logic        busy,
  output logic        done,
  output logic [$clog2(NOBJ+1)-1:0] n_noise,    // boxes dropped as noise
  output logic [$clog2(NOBJ+1)-1:0] n_merged    // boxes merged into another
);
  localparam int unsigned CW = $clog2(NOBJ+1);
  localparam int unsigned IW = (NOBJ > 1) ? $clog2(NOBJ) : 1;
  typedef enum logic [1:0] {S_IDLE, S_INIT, S_EVAL, S_COMMIT} state_e;
  state_e state;

  logic [CW-1:0] k;
  box_t          cur;
  logic          is_noise, do_merge;
  logic [IW-1:0] merge_idx;

  // Gap between intervals [a0,a1] and [b0,b1].
  function automatic logic [X_W-1:0] gap(input logic [X_W-1:0] a0, a1, b0, b1);
    if (b0 > a1) return b0 - a1 - 1'b1;
    if (a0 > b1) return a0 - b1 - 1'b1;
    return '0;
  endfunction

  // EVAL: size test and gap test against all kept boxes.
  logic [X_W:0]  w;
  logic [Y_W:0]  h;
  logic [X_W+Y_W+1:0] area;
  logic [NOBJ-1:0] hit;
  logic          any_hit;
  logic [IW-1:0] first_hit;
  box_t          obj;
  assign obj  = in_objs[IW'(k)];
  assign w    = {1'b0, obj.x1} - {1'b0, obj.x0} + 1'b1;
  assign h    = {1'b0, obj.y1} - {1'b0, obj.y0} + 1'b1;
  assign area = w * h;
  always_comb begin
    for (int r = 0; r < NOBJ; r++) begin
      logic [X_W-1:0] gx, gy;
      gx = gap(rois[r].x0, rois[r].x1, obj.x0, obj.x1);
      gy = gap(X_W'(rois[r].y0), X_W'(rois[r].y1), X_W'(obj.y0), X_W'(obj.y1));
      hit[r] = (CW'(r) < roi_cnt) && (gx < X_W'(slot)) && (gy < X_W'(slot));
    end
    any_hit   = |hit;
    first_hit = '0;
    for (int r = NOBJ-1; r >= 0; r--)
      if (hit[r]) first_hit = IW'(r);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; k <= '0; cur <= '0; is_noise <= 1'b0; do_merge <= 1'b0;
      merge_idx <= '0; roi_cnt <= '0; done <= 1'b0; n_noise <= '0; n_merged <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) state <= S_INIT;
        S_INIT: begin
          roi_cnt <= '0; k <= '0; n_noise <= '0; n_merged <= '0;
          state   <= (in_cnt == '0) ? S_IDLE : S_EVAL;
          done    <= (in_cnt == '0);
        end
        S_EVAL: begin
          cur       <= obj;
          is_noise  <= !(area > (X_W+Y_W+2)'(size_min));
          do_merge  <= any_hit;
          merge_idx <= first_hit;
          state     <= S_COMMIT;
        end
        S_COMMIT: begin
          if (is_noise) begin
            n_noise <= n_noise + 1'b1;
          end else if (do_merge) begin
            n_merged <= n_merged + 1'b1;
            rois[merge_idx].x0 <= (cur.x0 < rois[merge_idx].x0) ? cur.x0 : rois[merge_idx].x0;
            rois[merge_idx].x1 <= (cur.x1 > rois[merge_idx].x1) ? cur.x1 : rois[merge_idx].x1;
            rois[merge_idx].y0 <= (cur.y0 < rois[merge_idx].y0) ? cur.y0 : rois[merge_idx].y0;
            rois[merge_idx].y1 <= (cur.y1 > rois[merge_idx].y1) ? cur.y1 : rois[merge_idx].y1;
          end else begin
            rois[IW'(roi_cnt)] <= cur;   // at most one kept box per input box: cannot overflow
            roi_cnt       <= roi_cnt + 1'b1;
          end
          k <= k + 1'b1;
          if (k + 1'b1 >= in_cnt) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_EVAL;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
  assign busy = (state != S_IDLE);
endmodule
