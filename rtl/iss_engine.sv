// iss_engine: first phase of region proposal, the iterative and selective
// search (ISS) over in-memory projections.
//
// Iteration 1 projects the whole array onto the x axis (vertical projection:
// all rows drive, the column lines PL_V are sensed) and every run of detected
// columns becomes a box spanning all rows. Each later iteration projects every
// box of the previous iteration onto the other axis: the lines of the box's
// range on one axis are pulled up, the lines of its range on the other axis
// float and are sensed, all other lines are pulled down. Each run of detected
// lines becomes a child box (the run on the sensed axis, the parent's range on
// the other). The search stops when two successive iterations find the same
// number of boxes (or an iteration finds none, or MAX_ITER is reached), and
// the last list is the result.
//
// One projection takes t_proj + 4 cycles (8 at t_proj = 4):
//   PREP     fetch the box
//   RESET    all lines pulled down (line levels cleared)
//   PROJ     t_proj cycles: drive lines pulled up, sense lines floating
//   SENSE    drive lines pulled down, sense lines float and hold; the
//            detectors latch their comparison
//   EXTRACT  the detection vector goes into the run extractor, whose first run
//            is appended at once; further runs are appended one per cycle
//            while the next projection runs.
// EXTRACT waits (a stall) while the extractor still holds runs of the
// previous projection, i.e. when a projection found more runs than fit in the
// following one. With N boxes found and every box splitting no further, the
// search takes 8 + 8N cycles (busy high), the chip's minimum.
//
// Two list banks alternate: the current iteration reads one and appends to
// the other. Appending to a full bank drops the box and sets overflow. The
// projection sequence, the stall, the two banks and the limits are this
// design's choices; the search itself and its stop rule follow the chip.
module iss_engine
  import cram_pkg::*;
#(
  parameter int unsigned W        = ARR_W,
  parameter int unsigned H        = ARR_H,
  parameter int unsigned NOBJ     = MAX_OBJ,
  parameter int unsigned MAX_ITER = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [3:0]        t_proj,
  output logic [1:0]        plh_cfg [H],
  output logic [1:0]        plv_cfg [W],
  input  logic [H-1:0]      plh_det,
  input  logic [W-1:0]      plv_det,
  output logic              busy,
  output logic              done,          // one-cycle pulse
  output box_t              objs [NOBJ],
  output logic [$clog2(NOBJ+1)-1:0] obj_cnt,
  output logic [3:0]        iterations,
  output logic              overflow,
  output logic              stall          // EXTRACT waiting for the extractor
);
  localparam int unsigned CW = $clog2(NOBJ+1);
  localparam int unsigned IW = (NOBJ > 1) ? $clog2(NOBJ) : 1;
  localparam int unsigned NL = (W > H) ? W : H;
  localparam int unsigned LW = $clog2(NL);

  typedef enum logic [2:0] {S_IDLE, S_PREP, S_RESET, S_PROJ, S_SENSE, S_EXTRACT, S_WAIT} state_e;
  state_e state;

  box_t            list [2][NOBJ];
  logic [CW-1:0]   cnt  [2];
  logic            cb;            // bank read by the current iteration
  logic            res_bank;
  logic            axis_y;        // 0: project onto x (sense PL_V), 1: onto y
  logic            first;         // iteration 1: the whole array is the box
  logic [CW-1:0]   idx;
  logic [3:0]      tcnt;
  box_t            box_r;
  // What the extractor's held runs belong to.
  box_t            ext_box;
  logic            ext_axis_y, ext_bank;

  // ---------------- run extractor ----------------
  logic          ex_load, ex_busy, ex_valid, ex_more;
  logic [NL-1:0] ex_vec;
  logic [LW-1:0] ex_start, ex_stop;

  always_comb begin
    ex_vec = '0;
    if (axis_y) ex_vec[H-1:0] = plh_det;
    else        ex_vec[W-1:0] = plv_det;
  end
  assign ex_load = (state == S_EXTRACT) && !ex_busy;
  assign stall   = (state == S_EXTRACT) && ex_busy;

  run_extractor #(.N(NL)) u_ext (
    .clk, .rst_n, .load(ex_load), .vec(ex_vec), .busy(ex_busy),
    .valid(ex_valid), .start(ex_start), .stop(ex_stop), .more(ex_more)
  );

  // Box formed by the current run.
  box_t run_box;
  logic run_axis_y, run_bank;
  always_comb begin
    run_box    = ex_load ? box_r  : ext_box;
    run_axis_y = ex_load ? axis_y : ext_axis_y;
    run_bank   = ex_load ? ~cb    : ext_bank;
    if (run_axis_y) begin
      run_box.y0 = Y_W'(ex_start);
      run_box.y1 = Y_W'(ex_stop);
    end else begin
      run_box.x0 = X_W'(ex_start);
      run_box.x1 = X_W'(ex_stop);
    end
  end
  logic append_ok;
  assign append_ok = ex_valid && (cnt[run_bank] < CW'(NOBJ));

  // Count of the new bank once the run appended this cycle is included.
  logic [CW-1:0] new_cnt_now;
  assign new_cnt_now = cnt[~cb] + CW'(append_ok && run_bank == ~cb);

  // End of the box list of this iteration (list final: extractor idle).
  logic last_box;
  assign last_box = first || (idx + 1'b1 >= cnt[cb]);

  // ---------------- control ----------------
  logic end_iter, finish;
  logic [CW-1:0] final_cnt;
  always_comb begin
    end_iter  = 1'b0;
    final_cnt = new_cnt_now;
    if (state == S_EXTRACT && ex_load && last_box && !(ex_more && !first))
      end_iter = 1'b1;
    if (state == S_WAIT && !ex_busy)
      end_iter = 1'b1;
    if (first)
      finish = (new_cnt_now == '0) && !ex_more;
    else
      finish = (final_cnt == cnt[cb]) || (final_cnt == '0) || (iterations >= 4'(MAX_ITER));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cb <= 1'b0; res_bank <= 1'b0; axis_y <= 1'b0; first <= 1'b0;
      idx <= '0; tcnt <= '0; box_r <= '0; ext_box <= '0; ext_axis_y <= 1'b0; ext_bank <= 1'b0;
      cnt[0] <= '0; cnt[1] <= '0; iterations <= '0; overflow <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      // Append the extracted run.
      if (ex_valid) begin
        if (append_ok) begin
          list[run_bank][IW'(cnt[run_bank])] <= run_box;
          cnt[run_bank] <= cnt[run_bank] + 1'b1;
        end else begin
          overflow <= 1'b1;
        end
      end
      if (ex_load) begin
        ext_box <= box_r; ext_axis_y <= axis_y; ext_bank <= ~cb;
      end

      unique case (state)
        S_IDLE: if (start) begin
          state <= S_PREP; cb <= 1'b0; axis_y <= 1'b0; first <= 1'b1; idx <= '0;
          cnt[0] <= '0; cnt[1] <= '0; iterations <= 4'd1; overflow <= 1'b0;
        end
        S_PREP: begin
          box_r <= first ? box_t'{x0: '0, x1: X_W'(W-1), y0: '0, y1: Y_W'(H-1)} : list[cb][IW'(idx)];
          state <= S_RESET;
        end
        S_RESET: begin
          tcnt  <= (t_proj == 0) ? 4'd1 : t_proj;
          state <= S_PROJ;
        end
        S_PROJ: begin
          tcnt <= tcnt - 1'b1;
          if (tcnt == 4'd1) state <= S_SENSE;
        end
        S_SENSE: state <= S_EXTRACT;
        S_EXTRACT: if (ex_load) begin
          if (!last_box) begin
            idx   <= idx + 1'b1;
            state <= S_PREP;
          end else if (!end_iter) begin
            state <= S_WAIT;
          end
        end
        S_WAIT: ;
        default: state <= S_IDLE;
      endcase

      if (end_iter) begin
        if (finish) begin
          state    <= S_IDLE;
          done     <= 1'b1;
          res_bank <= ~cb;
        end else begin
          // Next iteration reads the bank just filled; the old one is emptied.
          state      <= S_PREP;
          cb         <= ~cb;
          cnt[cb]    <= '0;
          axis_y     <= ~axis_y;
          first      <= 1'b0;
          idx        <= '0;
          iterations <= iterations + 1'b1;
        end
      end
    end
  end

  assign busy = (state != S_IDLE);
  assign obj_cnt = cnt[res_bank];
  always_comb
    for (int k = 0; k < NOBJ; k++) objs[k] = list[res_bank][k];

  // ---------------- projection-line configuration ----------------
  logic drive_phase, sense_phase;
  assign drive_phase = (state == S_PROJ);
  assign sense_phase = (state == S_PROJ) || (state == S_SENSE) || (state == S_EXTRACT);

  always_comb begin
    for (int i = 0; i < H; i++) begin
      logic in_rng;
      in_rng = (Y_W'(i) >= box_r.y0) && (Y_W'(i) <= box_r.y1);
      plh_cfg[i] = PL_PULL_DOWN;
      if (!axis_y && drive_phase && in_rng) plh_cfg[i] = PL_PULL_UP;
      if ( axis_y && sense_phase && in_rng) plh_cfg[i] = PL_FLOAT;
    end
    for (int j = 0; j < W; j++) begin
      logic in_rng;
      in_rng = (X_W'(j) >= box_r.x0) && (X_W'(j) <= box_r.x1);
      plv_cfg[j] = PL_PULL_DOWN;
      if ( axis_y && drive_phase && in_rng) plv_cfg[j] = PL_PULL_UP;
      if (!axis_y && sense_phase && in_rng) plv_cfg[j] = PL_FLOAT;
    end
  end
endmodule
