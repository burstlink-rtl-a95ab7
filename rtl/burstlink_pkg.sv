// burstlink_pkg: types and constants shared by the display-path blocks.
//
// Pixels are 24 bits (8 bits per colour). A frame of 3840x2160 such pixels is
// about 24 MB, the frame size used throughout for a 4K panel. Pixel streams
// between blocks carry a start-of-frame and end-of-frame mark with each pixel.
// The eDP link is modelled at word level: each link word is either a header
// that opens a frame update and names the rectangle it covers (a full frame,
// or the video window of a PSR2 selective update), or one pixel.
// Package C-states follow the Skylake naming (C0, C2, C7, C7' = C7 with the
// video decoder clock-gated, C8, C9).
package burstlink_pkg;

  localparam int unsigned PIX_W   = 24;   // bits per pixel
  localparam int unsigned COORD_W = 13;   // up to 8191 pixels per axis (5K = 5120x2880)

  typedef logic [PIX_W-1:0]   pixel_t;
  typedef logic [COORD_W-1:0] coord_t;

  // One beat of a pixel stream.
  typedef struct packed {
    logic   sof;   // first pixel of a frame (or of an update window)
    logic   eof;   // last pixel of a frame (or of an update window)
    pixel_t pix;
  } beat_t;

  // Rectangle updated by one frame transfer.
  typedef struct packed {
    coord_t x;
    coord_t y;
    coord_t w;
    coord_t h;
  } region_t;

  typedef enum logic [1:0] {
    LW_IDLE = 2'd0,
    LW_HDR  = 2'd1,   // header: region and flags follow in the payload
    LW_PIX  = 2'd2    // one pixel
  } link_kind_e;

  localparam int unsigned LINK_PAYLOAD_W = $bits(region_t) + 2;

  // Header payload: where the update goes and how the receiver stores it.
  typedef struct packed {
    logic    burst;       // frame sent at full link rate into the back buffer
    logic    selective;   // PSR2 selective update of a window
    region_t region;
  } link_hdr_t;

  typedef struct packed {
    link_kind_e                kind;
    logic [LINK_PAYLOAD_W-1:0] payload;  // link_hdr_t, or {.., beat_t} for a pixel
  } link_word_t;

  // Package C-states used by the sequencer.
  typedef enum logic [2:0] {
    PC0  = 3'd0,   // cores active: driver orchestration (and decode in the DRAM path)
    PC2  = 3'd1,   // cores idle, DRAM active: DC fetches a chunk from DRAM
    PC7  = 3'd2,   // DRAM in self-refresh, VD streams into the DC buffer
    PC7P = 3'd3,   // C7 with the VD clock-gated (DC buffer full)
    PC8  = 3'd4,   // only DC and display IO on (DC buffer full, DRAM path)
    PC9  = 3'd5    // DC and eDP off, panel refreshes itself from the DRFB
  } cstate_e;

  localparam int unsigned N_CSTATES = 6;

endpackage
