// edp_tx: display-controller side of the eDP link, with Frame Bursting.
//
// Takes the pixel stream out of the DC buffer and sends it over the link as a
// header word followed by one word per pixel. The header names the rectangle
// the transfer updates (the whole panel, or the video window in PSR2 mode) and
// whether the frame is a burst. One link word per cycle is the link's full
// bandwidth (25.92 Gbps for eDP 1.4).
//
// Pacing is the point of the block:
//   burst_en = 0 (conventional) - the transmitter is tied to the panel's pixel
//     update rate: it sends a pixel only when a fractional credit counter,
//     advanced by RATE_NUM each cycle, reaches RATE_DEN. The defaults 113/259
//     are 11.3 Gbps (4K at 60 Hz) over 25.92 Gbps.
//   burst_en = 1 (Frame Bursting) - a pixel every cycle the buffer has one,
//     so a whole frame crosses the link in about RATE_NUM/RATE_DEN of a
//     refresh period and the link can then be switched off.
// The burst and region settings are sampled when a frame's first pixel
// arrives and held for the whole frame. frame_sent pulses with the last pixel.
// The header/pixel word format is this design's own; the real eDP packet and
// secondary-data format is not modelled.
module edp_tx
  import burstlink_pkg::*;
#(
  parameter int unsigned RATE_NUM = 113,
  parameter int unsigned RATE_DEN = 259
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       link_on,        // transmitter powered (not in C9)
  input  logic       burst_en,
  input  logic       selective,      // PSR2 window update
  input  region_t    region,
  // from the DC buffer
  input  logic       in_valid,
  output logic       in_ready,
  input  beat_t      in_beat,
  // link
  output link_word_t link,
  // status
  output logic       sending,        // inside a frame transfer
  output logic       frame_sent      // last pixel of a frame sent this cycle
);

  localparam int unsigned ACC_W = $clog2(RATE_NUM + RATE_DEN + 1) + 1;

  logic             in_frame;
  logic             burst_q;
  logic [ACC_W-1:0] acc;
  logic             credit;
  logic             send_hdr;
  logic             send_pix;
  link_hdr_t        hdr;

  assign credit   = burst_q || (acc >= ACC_W'(RATE_DEN));
  // a frame opens with its header; pixels then follow at the paced rate
  assign send_hdr = link_on && !in_frame && in_valid && in_beat.sof;
  assign send_pix = link_on &&  in_frame && in_valid && credit;
  assign in_ready = send_pix;
  assign sending  = in_frame;
  assign frame_sent = send_pix && in_beat.eof;

  always_comb begin
    hdr.burst     = burst_en;
    hdr.selective = selective;
    hdr.region    = region;
    link = '{kind: LW_IDLE, payload: '0};
    if (send_hdr)      link = '{kind: LW_HDR, payload: hdr};
    else if (send_pix) link = '{kind: LW_PIX, payload: LINK_PAYLOAD_W'(in_beat)};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_frame <= 1'b0;
      burst_q  <= 1'b0;
      acc      <= '0;
    end else begin
      if (send_hdr) begin
        in_frame <= 1'b1;
        burst_q  <= burst_en;
        acc      <= '0;
      end else if (in_frame) begin
        if (send_pix && in_beat.eof) in_frame <= 1'b0;
        if (!burst_q) begin
          // keep at most one pixel's worth of saved credit
          if (send_pix)                       acc <= acc - ACC_W'(RATE_DEN) + ACC_W'(RATE_NUM);
          else if (acc < ACC_W'(RATE_DEN))   acc <= acc + ACC_W'(RATE_NUM);
        end
      end
    end
  end

  a_no_gap_in_burst: assert property (@(posedge clk) disable iff (!rst_n)
    (in_frame && burst_q && link_on && in_valid) |-> send_pix);

endmodule
