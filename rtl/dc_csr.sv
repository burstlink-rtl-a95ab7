// dc_csr: display controller configuration registers and the mode signals
// derived from them.
//
// The display driver writes which planes are enabled (background, video,
// application graphics, cursor), how many panels are attached, whether Frame
// Bursting and PSR2 (selective update of a window) are enabled, and the video
// window for PSR2. From these the block derives:
//   video_plane_only - only the video plane is shown on a single panel and no
//                      graphics interrupt is pending; sent to the decoder's
//                      destination selector to allow Frame Buffer Bypass.
//   single_plane     - exactly one plane of any kind on one panel; with
//                      burst_en this lets non-video workloads use Frame Bursting.
//   psr2_active      - windowed video: the DC sends only the window.
//   update_region    - the rectangle each frame transfer covers.
// A graphics interrupt (a GUI plane appears) sets the graphics-plane enable and
// and leaves PSR2, so it forces the conventional path; a user-input interrupt
// leaves PSR2 mode.
// Both rules follow the paper's list of fallback cases. The register map and
// encodings are this design's own.
//
// Register map (word addresses, 32-bit data, write-only port plus a read port):
//   0 PLANE_EN  bit0 background, bit1 video, bit2 graphics, bit3 cursor
//   1 DISPLAYS  number of attached panels
//   2 MODE      bit0 burst_en, bit1 psr2_en
//   3 WIN_XY    [12:0] x, [28:16] y
//   4 WIN_WH    [12:0] w, [28:16] h
// Outputs are registered values or simple logic on them; writes take effect
// on the next cycle.
module dc_csr
  import burstlink_pkg::*;
#(
  parameter int unsigned H_RES = 3840,
  parameter int unsigned V_RES = 2160
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        csr_we,
  input  logic [2:0]  csr_addr,
  input  logic [31:0] csr_wdata,
  output logic [31:0] csr_rdata,
  input  logic        gfx_irq,        // a graphics plane became available
  input  logic        user_irq,       // touch/keyboard input: leave PSR2
  output logic        video_plane_only,
  output logic        single_plane,
  output logic        burst_en,
  output logic        psr2_active,
  output region_t     update_region
);

  localparam logic [3:0] PL_VIDEO = 4'b0010;

  logic [3:0]  plane_en;
  logic [3:0]  displays;
  logic [1:0]  mode;
  region_t     win;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      plane_en <= PL_VIDEO;
      displays <= 4'd1;
      mode     <= 2'b00;
      win      <= '{x: '0, y: '0, w: coord_t'(H_RES), h: coord_t'(V_RES)};
    end else begin
      if (csr_we) begin
        unique case (csr_addr)
          3'd0: plane_en <= csr_wdata[3:0];
          3'd1: displays <= csr_wdata[3:0];
          3'd2: mode     <= csr_wdata[1:0];
          3'd3: begin win.x <= csr_wdata[12:0]; win.y <= csr_wdata[28:16]; end
          3'd4: begin win.w <= csr_wdata[12:0]; win.h <= csr_wdata[28:16]; end
          default: ;
        endcase
      end
      if (gfx_irq)  begin plane_en[2] <= 1'b1; mode[1] <= 1'b0; end
      if (user_irq) mode[1] <= 1'b0;
    end
  end

  always_comb begin
    unique case (csr_addr)
      3'd0:    csr_rdata = {28'd0, plane_en};
      3'd1:    csr_rdata = {28'd0, displays};
      3'd2:    csr_rdata = {30'd0, mode};
      3'd3:    csr_rdata = {3'd0, win.y, 3'd0, win.x};
      3'd4:    csr_rdata = {3'd0, win.h, 3'd0, win.w};
      default: csr_rdata = 32'd0;
    endcase
  end

  // In PSR2 the background and graphics planes are frozen in the panel's buffer,
  // so the video plane counts as the only plane that changes.
  assign psr2_active      = mode[1];
  assign video_plane_only = (displays == 4'd1) &&
                            ((plane_en == PL_VIDEO) ||
                             (psr2_active && plane_en[1]));
  assign single_plane     = (displays == 4'd1) && $onehot(plane_en);
  assign burst_en         = mode[0];
  assign update_region    = psr2_active ? win
                          : '{x: '0, y: '0, w: coord_t'(H_RES), h: coord_t'(V_RES)};

endmodule
