// ebbi_processor: top level of the event-based binary image (EBBI) processor.
//
// Address events from a neuromorphic vision sensor arrive over the AER
// handshake in the aer_clk domain; the AER decoder splits them into x/y and
// writes them into the 128 x 32-bit asynchronous FIFO. On the sys_clk side the
// controller drains the FIFO into the 320 x 240 CRAM array (one pixel per
// event) through the row and column decoders, then restores the frame by
// in-memory charge diffusion (IR) and proposes regions (RP) by in-memory row
// and column projections, sensed by one projection detector per line (the X-
// and Y-projection and detection blocks) against the 4-bit Vref code. The
// region list (bounding boxes) and RP statistics are the outputs.
//
// Interface: the AER handshake; a command port (cmd_valid/cmd/cmd_ready, mode
// CLEAR, WRITE, IR or RP) with the configuration record cfg and a mode output
// echoing the last accepted command; a read port
// returning 32-bit words of a stored row (rd_en with rd_row/rd_word, data in
// rd_data on the next cycle, ignored while the controller writes). Both clock
// domains share the asynchronous active-low reset rst_n, whose release the
// user must bring in line with each clock. An event becomes visible to the
// controller about three sys_clk cycles after its acknowledge (FIFO pointer
// synchroniser), so a command that ends a frame should follow the frame's
// last acknowledge by at least that much.
module ebbi_processor
  import cram_pkg::*;
(
  input  logic              aer_clk,
  input  logic              sys_clk,
  input  logic              rst_n,
  // AER input
  input  logic              aer_nreq,
  input  logic [X_W+Y_W-1:0] aer_data,
  output logic              aer_nack,
  // commands and configuration
  input  logic              cmd_valid,
  input  mode_e             cmd,
  output logic              cmd_ready,
  input  cfg_t              cfg,
  // image read-out
  input  logic              rd_en,
  input  logic [Y_W-1:0]    rd_row,
  input  logic [3:0]        rd_word,
  output logic [31:0]       rd_data,
  // results and status
  output logic              busy,
  output mode_e             mode,      // last command accepted
  output logic              rp_done,
  output box_t              rois [MAX_OBJ],
  output logic [OBJ_W-1:0]  roi_cnt,
  output logic [OBJ_W-1:0]  iss_cnt,
  output logic [3:0]        iterations,
  output logic              overflow,
  output logic              stall,
  output logic [OBJ_W-1:0]  n_noise,
  output logic [OBJ_W-1:0]  n_merged,
  output logic [15:0]       rp_cycles,
  output logic              fifo_full
);
  // AER side
  logic [X_W-1:0] ev_x;
  logic [Y_W-1:0] ev_y;
  logic           ev_valid;

  aer_decoder u_aer (
    .aer_clk, .rst_n, .aer_nreq, .aer_data, .aer_nack, .fifo_full,
    .x_addr(ev_x), .y_addr(ev_y), .data_valid(ev_valid)
  );

  logic        fifo_empty, fifo_rd;
  logic [31:0] fifo_rdata;

  async_fifo #(.DEPTH(128), .WIDTH(32)) u_fifo (
    .wclk(aer_clk), .wrst_n(rst_n), .wr_en(ev_valid),
    .wdata(32'({ev_y, ev_x})), .full(fifo_full),
    .rclk(sys_clk), .rrst_n(rst_n), .rd_en(fifo_rd), .rdata(fifo_rdata), .empty(fifo_empty)
  );

  // Controller
  logic           arr_clear, sw_en, de, we;
  logic [1:0]     de_amp;
  logic [X_W-1:0] wr_x;
  logic [Y_W-1:0] wr_y;
  logic [1:0]     plh_cfg [ARR_H];
  logic [1:0]     plv_cfg [ARR_W];
  logic [ARR_H-1:0] plh_det;
  logic [ARR_W-1:0] plv_det;

  cram_controller u_ctrl (
    .clk(sys_clk), .rst_n, .cmd_valid, .cmd, .cmd_ready, .cfg,
    .fifo_empty, .fifo_rdata, .fifo_rd,
    .arr_clear, .sw_en, .de, .de_amp, .we, .wr_x, .wr_y,
    .plh_cfg, .plv_cfg, .plh_det, .plv_det,
    .busy, .cur_mode(mode), .rp_done, .rois, .roi_cnt, .iss_cnt, .iterations, .overflow,
    .stall, .n_noise, .n_merged, .rp_cycles
  );

  // Row decoder & buffer, column decoder & SA & buffer
  logic [ARR_H-1:0] wl;
  logic [ARR_W-1:0] bl_sel, row_q;
  logic             re;
  logic [3:0]       rd_word_q;

  assign re = rd_en && !we;

  row_decoder #(.N(ARR_H)) u_rowdec (
    .addr(we ? wr_y : rd_row), .en(we || re), .wl
  );

  col_decoder #(.N(ARR_W), .WORD(32)) u_coldec (
    .addr(wr_x), .en(we), .bl_sel, .row_bits(row_q), .word_idx(rd_word_q), .rd_word(rd_data)
  );

  always_ff @(posedge sys_clk or negedge rst_n) begin
    if (!rst_n)  rd_word_q <= '0;
    else if (re) rd_word_q <= rd_word;
  end

  // CRAM macro with its dummy ring
  logic [VW-1:0] plh_lvl [ARR_H];
  logic [VW-1:0] plv_lvl [ARR_W];

  cram_array u_array (
    .clk(sys_clk), .clear(arr_clear), .sw_en, .de, .de_amp,
    .wl, .bl_sel, .we, .wr_data(1'b1), .re, .row_q,
    .plh_cfg, .plv_cfg, .plh_lvl, .plv_lvl
  );

  // Y-projection & detection (rows, PL_H) and X-projection & detection (columns, PL_V)
  proj_detector #(.N(ARR_H)) u_ydet (.clk(sys_clk), .vref(cfg.vref), .lvl(plh_lvl), .det(plh_det));
  proj_detector #(.N(ARR_W)) u_xdet (.clk(sys_clk), .vref(cfg.vref), .lvl(plv_lvl), .det(plv_det));
endmodule
