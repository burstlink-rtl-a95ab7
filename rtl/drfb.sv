// drfb: double remote frame buffer in the panel's timing controller.
//
// Two frame buffers of H_RES x V_RES pixels. The pixel formatter always reads
// the front buffer; link writes go to the back buffer, so a new frame can
// arrive at full link speed while the panel keeps refreshing from the frame it
// is showing. When the receiver reports a complete burst frame (frame_done),
// the back buffer is marked ready; at the next refresh boundary (swap_req from
// the pixel formatter) front and back exchange roles. With no new frame the
// front buffer is simply read again: that is panel self-refresh.
//
// wr_both writes a pixel into both buffers (used for updates that arrive at the
// panel's own pixel rate, see edp_rx). A write into the back buffer while a
// finished frame there still waits to be shown is counted as an overrun.
//
// Size: the paper doubles a 24 MB remote frame buffer to 48 MB; 2 x 3840 x
// 2160 x 24 bits is that size. The storage is a plain array with one write
// port and one read port; rd_data is registered (one cycle after rd_en).
module drfb
  import burstlink_pkg::*;
#(
  parameter int unsigned H_RES  = 3840,
  parameter int unsigned V_RES  = 2160,
  parameter int unsigned ADDR_W = $clog2(H_RES * V_RES)
) (
  input  logic              clk,
  input  logic              rst_n,
  // write side (eDP receiver)
  input  logic              wr_en,
  input  logic              wr_both,
  input  logic [ADDR_W-1:0] wr_addr,
  input  pixel_t            wr_data,
  input  logic              frame_done,
  // read side (pixel formatter)
  input  logic              rd_en,
  input  logic [ADDR_W-1:0] rd_addr,
  output pixel_t            rd_data,
  input  logic              swap_req,     // refresh boundary
  // status
  output logic              front,        // buffer being displayed
  output logic              frame_ready,  // complete frame waiting in the back buffer
  output logic              swapped,      // a new frame became the displayed one
  output logic              overrun       // back buffer written while a frame waited
);

  localparam int unsigned FRAME_PIX = H_RES * V_RES;

  pixel_t mem [2*FRAME_PIX];

  function automatic int unsigned idx(input logic bank, input logic [ADDR_W-1:0] a);
    return (bank ? FRAME_PIX : 0) + int'(a);
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en) begin
      mem[idx(!front, wr_addr)] <= wr_data;
      if (wr_both) mem[idx(front, wr_addr)] <= wr_data;
    end
    if (rd_en) rd_data <= mem[idx(front, rd_addr)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      front       <= 1'b0;
      frame_ready <= 1'b0;
      swapped     <= 1'b0;
      overrun     <= 1'b0;
    end else begin
      swapped <= 1'b0;
      overrun <= wr_en && !wr_both && frame_ready;
      if (swap_req && frame_ready) begin
        front       <= !front;
        frame_ready <= 1'b0;           // the frame now shown is the newest one
        swapped     <= 1'b1;
      end else if (frame_done) begin
        frame_ready <= 1'b1;
      end
    end
  end

  a_addr_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    (wr_en |-> int'(wr_addr) < FRAME_PIX) and (rd_en |-> int'(rd_addr) < FRAME_PIX));

endmodule
