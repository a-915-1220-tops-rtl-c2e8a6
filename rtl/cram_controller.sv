// cram_controller: the digital controller of the EBBI processor. It runs the
// four operation modes of the chip on the CRAM array and holds the region
// proposal logic.
//
// Commands arrive on cmd_valid / cmd / cmd_ready (a valid-ready handshake):
//  * CLEAR: one cycle of the array's global clear.
//  * WRITE: pops one event per cycle from the event FIFO (show-ahead, word
//           {.., y, x}) and writes a '1' at (x, y). WRITE stays active until
//           the next command; that command is accepted only once the FIFO is
//           empty, so a frame is always fully written before it is processed.
//  * IR:    image restoration by charge diffusion. For each of cfg.de_pulses
//           pulses: the latch switch opens (1 cycle, the cells keep their
//           charge), DE is high for cfg.de_width cycles at amplitude
//           cfg.de_amp, then the switch closes (1 cycle) and every cell is
//           re-digitised by its inverter.
//  * RP:    region proposal: the ISS search (iss_engine) followed by the
//           consolidation (rp_update). With N boxes from the search and the
//           minimum search time it takes 10N + 12 cycles, counted in
//           rp_cycles (8N + 8 of them in the search).
// The write address (wr_x, wr_y) is the FIFO head word itself and de_amp is
// cfg.de_amp: the controller only qualifies them with we and de. The vref
// field of cfg and the upper bits of the FIFO word are not used here (vref
// goes straight to the sense amplifiers).
// Outside RP all projection lines are pulled down; the latch switch is
// closed (SRAM mode) except during the diffusion. The command handshake, the
// IR pulse framing and the cycle budget of the RP phases are this design's
// choices; the modes, the pulse parameters and both RP phases follow the chip.
module cram_controller
  import cram_pkg::*;
#(
  parameter int unsigned W    = ARR_W,
  parameter int unsigned H    = ARR_H,
  parameter int unsigned NOBJ = MAX_OBJ
) (
  input  logic              clk,
  input  logic              rst_n,
  // commands and configuration
  input  logic              cmd_valid,
  input  mode_e             cmd,
  output logic              cmd_ready,
  input  cfg_t              cfg,
  // event FIFO (read side)
  input  logic              fifo_empty,
  input  logic [31:0]       fifo_rdata,
  output logic              fifo_rd,
  // CRAM array control
  output logic              arr_clear,
  output logic              sw_en,
  output logic              de,
  output logic [1:0]        de_amp,
  output logic              we,
  output logic [X_W-1:0]    wr_x,
  output logic [Y_W-1:0]    wr_y,
  output logic [1:0]        plh_cfg [H],
  output logic [1:0]        plv_cfg [W],
  input  logic [H-1:0]      plh_det,
  input  logic [W-1:0]      plv_det,
  // status and results
  output logic              busy,
  output mode_e             cur_mode,
  output logic              rp_done,
  output box_t              rois [NOBJ],
  output logic [$clog2(NOBJ+1)-1:0] roi_cnt,
  output logic [$clog2(NOBJ+1)-1:0] iss_cnt,
  output logic [3:0]        iterations,
  output logic              overflow,
  output logic              stall,
  output logic [$clog2(NOBJ+1)-1:0] n_noise,
  output logic [$clog2(NOBJ+1)-1:0] n_merged,
  output logic [15:0]       rp_cycles
);
  typedef enum logic [3:0] {
    S_IDLE, S_CLEAR, S_WRITE, S_IR_OPEN, S_IR_DE, S_IR_CLOSE,
    S_RP_START, S_RP_ISS, S_RP_UPD
  } state_e;
  state_e state;

  logic [7:0] de_cnt;
  logic [3:0] pulse_cnt;
  logic       iss_start, iss_busy, iss_done;
  logic       upd_start, upd_busy, upd_done;
  box_t       iss_objs [NOBJ];
  logic [1:0] iss_plh_cfg [H];
  logic [1:0] iss_plv_cfg [W];

  assign cmd_ready = (state == S_IDLE) || (state == S_WRITE && fifo_empty);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cur_mode <= MODE_CLEAR; de_cnt <= '0; pulse_cnt <= '0;
      rp_done <= 1'b0; rp_cycles <= '0;
    end else begin
      rp_done <= 1'b0;
      if (state inside {S_RP_START, S_RP_ISS, S_RP_UPD})
        rp_cycles <= rp_cycles + 1'b1;
      if (cmd_valid && cmd_ready) begin
        cur_mode <= cmd;
        unique case (cmd)
          MODE_CLEAR: state <= S_CLEAR;
          MODE_WRITE: state <= S_WRITE;
          MODE_IR: begin
            pulse_cnt <= cfg.de_pulses;
            state     <= (cfg.de_pulses == '0) ? S_IDLE : S_IR_OPEN;
          end
          MODE_RP: begin
            rp_cycles <= '0;
            state     <= S_RP_START;
          end
          default: state <= S_IDLE;
        endcase
      end else begin
        unique case (state)
          S_IDLE, S_WRITE: ;
          S_CLEAR: state <= S_IDLE;
          S_IR_OPEN: begin
            de_cnt <= (cfg.de_width == '0) ? 8'd1 : cfg.de_width;
            state  <= S_IR_DE;
          end
          S_IR_DE: begin
            de_cnt <= de_cnt - 1'b1;
            if (de_cnt == 8'd1) state <= S_IR_CLOSE;
          end
          S_IR_CLOSE: begin
            pulse_cnt <= pulse_cnt - 1'b1;
            state     <= (pulse_cnt == 4'd1) ? S_IDLE : S_IR_OPEN;
          end
          S_RP_START: state <= S_RP_ISS;
          S_RP_ISS: if (iss_done) state <= S_RP_UPD;
          S_RP_UPD: if (upd_done) begin
            state   <= S_IDLE;
            rp_done <= 1'b1;
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end

  assign busy      = (state != S_IDLE) && (state != S_WRITE);
  assign arr_clear = (state == S_CLEAR);
  assign sw_en     = !(state inside {S_IR_OPEN, S_IR_DE});
  assign de        = (state == S_IR_DE);
  assign de_amp    = cfg.de_amp;
  assign fifo_rd   = (state == S_WRITE) && !fifo_empty;
  assign we        = fifo_rd;
  assign wr_x      = fifo_rdata[X_W-1:0];
  assign wr_y      = fifo_rdata[X_W +: Y_W];
  assign iss_start = (state == S_RP_START);
  assign upd_start = (state == S_RP_ISS) && iss_done;

  iss_engine #(.W(W), .H(H), .NOBJ(NOBJ)) u_iss (
    .clk, .rst_n, .start(iss_start), .t_proj(cfg.t_proj),
    .plh_cfg(iss_plh_cfg), .plv_cfg(iss_plv_cfg), .plh_det, .plv_det,
    .busy(iss_busy), .done(iss_done), .objs(iss_objs), .obj_cnt(iss_cnt),
    .iterations, .overflow, .stall
  );

  rp_update #(.NOBJ(NOBJ)) u_upd (
    .clk, .rst_n, .start(upd_start), .in_objs(iss_objs), .in_cnt(iss_cnt),
    .size_min(cfg.size_min), .slot(cfg.slot), .rois, .roi_cnt,
    .busy(upd_busy), .done(upd_done), .n_noise, .n_merged
  );

  // The search owns the projection lines only while it runs; otherwise they
  // are pulled down.
  always_comb begin
    for (int i = 0; i < H; i++) plh_cfg[i] = iss_busy ? iss_plh_cfg[i] : PL_PULL_DOWN;
    for (int j = 0; j < W; j++) plv_cfg[j] = iss_busy ? iss_plv_cfg[j] : PL_PULL_DOWN;
  end

  // The two RP phases never overlap.
  assert property (@(posedge clk) disable iff (!rst_n) !(iss_busy && upd_busy));
endmodule
