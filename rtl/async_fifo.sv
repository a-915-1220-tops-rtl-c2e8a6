// async_fifo: the chip's 128 x 32-bit asynchronous event buffer between the
// AER clock domain (write) and the system clock domain (read).
//
// Classic dual-clock FIFO: binary pointers with one extra wrap bit, Gray-coded
// copies crossed into the other domain through two flip-flops. Full is
// computed in the write domain, empty in the read domain; both are
// conservative (they clear a few cycles late). Read data is show-ahead: rdata
// holds the oldest word whenever empty is low, and rd_en pops it. The depth
// and width follow the chip; the pointer scheme and show-ahead read are this
// design's choices. DEPTH must be a power of two.
module async_fifo #(
  parameter int unsigned DEPTH = 128,
  parameter int unsigned WIDTH = 32
) (
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wdata,
  output logic             full,
  input  logic             rclk,
  input  logic             rrst_n,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rdata,
  output logic             empty
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wptr, rptr;            // binary pointers
  logic [AW:0] wgray, rgray;          // Gray copies
  logic [AW:0] rgray_w1, rgray_w2;    // read pointer in the write domain
  logic [AW:0] wgray_r1, wgray_r2;    // write pointer in the read domain

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // Write domain
  always_ff @(posedge wclk) begin
    if (wr_en && !full) mem[wptr[AW-1:0]] <= wdata;
  end
  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wptr <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      {rgray_w2, rgray_w1} <= {rgray_w1, rgray};
      if (wr_en && !full) begin
        wptr  <= wptr + 1'b1;
        wgray <= bin2gray(wptr + 1'b1);
      end
    end
  end
  // Full when the write pointer is one lap ahead of the read pointer.
  assign full = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});

  // Read domain
  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rptr <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      {wgray_r2, wgray_r1} <= {wgray_r1, wgray};
      if (rd_en && !empty) begin
        rptr  <= rptr + 1'b1;
        rgray <= bin2gray(rptr + 1'b1);
      end
    end
  end
  assign empty = (rgray == wgray_r2);
  assign rdata = mem[rptr[AW-1:0]];

  assert property (@(posedge wclk) disable iff (!wrst_n) wr_en |-> !full);
  assert property (@(posedge rclk) disable iff (!rrst_n) rd_en |-> !empty);
endmodule
