// dest_selector: destination selector at the output of the video decoder.
//
// The decoder's frame stream goes straight to the display controller's buffer
// (peer-to-peer over the on-chip interconnect, "Frame Buffer Bypass") when two
// conditions hold: the display controller reports that only the video plane is
// shown (video_plane_only) and the decoder's own registers show exactly one
// video application running (single_video, derived here from the application
// count the decoder already keeps). Otherwise the frame is written to the DRAM
// frame buffer as in a conventional system, and this block also produces the
// sequential DRAM write address for it.
//
// The route is chosen when a frame starts (on its sof beat, or while the
// stream is idle) and held until that frame's eof beat, so a frame is never
// split between the two destinations; this hold is a choice of this design.
//
// Interface: valid/ready stream in, two valid/ready streams out. The selected
// output's ready is passed back combinationally; no latency is added.
module dest_selector
  import burstlink_pkg::*;
#(
  parameter int unsigned ADDR_W = 32   // DRAM frame-buffer address width
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic              video_plane_only,   // from the DC
  input  logic [3:0]        num_video_apps,     // decoder CSR: concurrently running video applications
  input  logic [ADDR_W-1:0] fb_base,            // DRAM frame buffer base address (in pixels)
  // decoded frame from the decoder
  input  logic              in_valid,
  output logic              in_ready,
  input  beat_t             in_beat,
  // to the DC buffer (bypass)
  output logic              dc_valid,
  input  logic              dc_ready,
  output beat_t             dc_beat,
  // to the DRAM frame buffer (conventional)
  output logic              mem_valid,
  input  logic              mem_ready,
  output beat_t             mem_beat,
  output logic [ADDR_W-1:0] mem_addr,
  // status
  output logic              single_video,
  output logic              bypass_active        // route of the current/next frame
);

  logic              in_frame;      // between sof and eof of a frame
  logic              route_bypass;  // route latched for the current frame
  logic              want_bypass;
  logic              sel_bypass;
  logic [ADDR_W-1:0] wr_addr;

  assign single_video = (num_video_apps == 4'd1);
  assign want_bypass  = video_plane_only && single_video;
  // A new frame takes the route the conditions give now; a frame in flight keeps its route.
  assign sel_bypass   = (in_frame && !in_beat.sof) ? route_bypass : want_bypass;
  assign bypass_active = sel_bypass;

  always_comb begin
    dc_valid  = in_valid &&  sel_bypass;
    mem_valid = in_valid && !sel_bypass;
    dc_beat   = in_beat;
    mem_beat  = in_beat;
    in_ready  = sel_bypass ? dc_ready : mem_ready;
    mem_addr  = (in_beat.sof ? fb_base : wr_addr);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_frame     <= 1'b0;
      route_bypass <= 1'b0;
      wr_addr      <= '0;
    end else if (in_valid && in_ready) begin
      route_bypass <= sel_bypass;
      in_frame     <= !in_beat.eof;
      if (!sel_bypass) wr_addr <= mem_addr + 1'b1;
    end
  end

endmodule
