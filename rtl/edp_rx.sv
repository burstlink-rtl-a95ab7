// edp_rx: the eDP receiver in the panel's timing controller (T-con).
//
// Decodes the link words sent by edp_tx. A header opens an update: it gives
// the rectangle (x, y, w, h) and whether the update is a burst. Each pixel
// word that follows is written into the double remote frame buffer (DRFB) at
// the next address of that rectangle, in raster order; for a PSR2 selective
// update only the window's addresses are touched, the rest of the stored
// frame stays as it was. The address is kept as a running line base plus a
// column count, so the only multiply is y*H_RES when a header arrives.
//
// Burst updates go into the DRFB's back buffer and frame_done tells the DRFB
// that a complete frame is there. A non-burst update (conventional pacing,
// data arriving at the panel's own pixel rate) is written into both buffers
// (wr_both), so that a later selective update into either buffer finds the
// full background around the window. This write-both rule is a choice of this
// design; the paper only says that the receiver stores into the DRFB and that
// selective updates go to the window's offsets.
//
// Timing: one DRFB write in the cycle after a pixel word arrives; frame_done
// pulses together with the write of the last pixel.
module edp_rx
  import burstlink_pkg::*;
#(
  parameter int unsigned H_RES = 3840,
  parameter int unsigned V_RES = 2160,
  parameter int unsigned ADDR_W = $clog2(H_RES * V_RES)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  link_word_t        link,
  // DRFB write port
  output logic              wr_en,
  output logic              wr_both,
  output logic [ADDR_W-1:0] wr_addr,
  output pixel_t            wr_data,
  // status
  output logic              frame_done,     // a burst frame is complete in the back buffer
  output logic              update_done,    // any update (burst or not) completed
  output logic              selective_q,    // current/last update was a window
  output logic              rx_error        // pixel word outside an update
);

  link_hdr_t         hdr_in;
  beat_t             beat_in;
  logic              active;
  logic              burst_q;
  region_t           reg_q;
  logic [ADDR_W-1:0] line_base;
  coord_t            col, row;

  assign hdr_in  = link_hdr_t'(link.payload);
  assign beat_in = beat_t'(link.payload[$bits(beat_t)-1:0]);

  logic pix_in, last_pix;
  assign pix_in   = (link.kind == LW_PIX) && active;
  assign last_pix = (col == reg_q.w - 1'b1) && (row == reg_q.h - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active      <= 1'b0;
      burst_q     <= 1'b0;
      selective_q <= 1'b0;
      reg_q       <= '0;
      line_base   <= '0;
      col         <= '0;
      row         <= '0;
      wr_en       <= 1'b0;
      wr_both     <= 1'b0;
      wr_addr     <= '0;
      wr_data     <= '0;
      frame_done  <= 1'b0;
      update_done <= 1'b0;
      rx_error    <= 1'b0;
    end else begin
      wr_en       <= 1'b0;
      frame_done  <= 1'b0;
      update_done <= 1'b0;
      rx_error    <= (link.kind == LW_PIX) && !active;
      if (link.kind == LW_HDR) begin
        active      <= 1'b1;
        burst_q     <= hdr_in.burst;
        selective_q <= hdr_in.selective;
        reg_q       <= hdr_in.region;
        line_base   <= ADDR_W'(hdr_in.region.y * H_RES + hdr_in.region.x);
        col         <= '0;
        row         <= '0;
      end else if (pix_in) begin
        wr_en   <= 1'b1;
        wr_both <= !burst_q;
        wr_addr <= line_base + ADDR_W'(col);
        wr_data <= beat_in.pix;
        if (col == reg_q.w - 1'b1) begin
          col       <= '0;
          row       <= row + 1'b1;
          line_base <= line_base + ADDR_W'(H_RES);
        end else begin
          col <= col + 1'b1;
        end
        if (last_pix) begin
          active      <= 1'b0;
          frame_done  <= burst_q;
          update_done <= 1'b1;
        end
      end
    end
  end

  // The sender's end-of-frame mark and the header's rectangle must agree.
  a_eof_matches: assert property (@(posedge clk) disable iff (!rst_n)
    pix_in |-> (beat_in.eof == last_pix));

endmodule
