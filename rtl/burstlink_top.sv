// burstlink_top: the BurstLink display path from the video decoder's output
// to the panel's pixel formatter.
//
// Processor side: the destination selector sends each decoded frame either
// straight into the display controller's double buffer (Frame Buffer Bypass,
// when the DC reports only the video plane and the decoder runs a single
// video) or to the DRAM frame buffer, from where the DC's fetch engine reads
// it back chunk by chunk (conventional path). The eDP transmitter drains the
// DC buffer either at the panel's pixel rate or, with Frame Bursting enabled,
// at full link rate. The power-management sequencer follows the package
// C-state through each frame window, halts the decoder while the DC buffer is
// full and wakes it when a half frees up.
//
// Panel side: the eDP receiver writes the frame (or the PSR2 window) into the
// back half of the double remote frame buffer; the pixel formatter refreshes
// the panel from the front half at its own rate and swaps halves at a refresh
// boundary once a new frame is complete.
//
// Parts outside this RTL appear as ports: the decoder core (vd_*), the DRAM
// frame buffer behind the memory controller (mem_*), the eDP physical link
// (edp_link_tx out, edp_link_rx in; connect them through any link model), the
// LCD drivers (lcd_*), and the CPU's driver orchestration (orch_done,
// frame_due). The panel's vsync opens each frame window.
//
// Timing: one clock; one link word (one pixel) per cycle is the full eDP
// rate of 25.92 Gbps, and RATE_NUM/RATE_DEN (113/259 = 11.3/25.92 Gbps) is
// the panel's pixel rate used by the pixel formatter and by paced sends. A
// 4K burst therefore takes H_RES*V_RES cycles plus a header word; a paced
// frame about 2.3 times as long. Streams use valid/ready; the CSR port is a
// single-cycle write with combinational read data.
//
// Following the original description: the two bypass conditions, the DC
// double buffer with empty/wakeup, Frame Bursting into a double remote frame
// buffer, the fallback cases and the C-state sequence. This design's own
// choices: bursting whenever the display is single-plane or video-plane-only
// and the burst bit is set, the fetch engine's priority on the buffer write
// port, the word-level link, and vsync as the frame-window start.
//
// Lint notes: the DRFB's front/frame_ready flags, the receiver's selective
// flag and the DRAM write beat's sof bit are left unconnected on purpose;
// they are status the top does not need (the address carries the position).
// rst_n also appears in assertions' disable conditions, which lint reports
// as a reset used both synchronously and asynchronously.
module burstlink_top
  import burstlink_pkg::*;
#(
  parameter int unsigned H_RES      = 3840,
  parameter int unsigned V_RES      = 2160,
  parameter int unsigned RATE_NUM   = 113,     // panel pixel rate / link rate = 11.3 / 25.92 Gbps
  parameter int unsigned RATE_DEN   = 259,
  parameter int unsigned BANK_WORDS = 174762,  // DC buffer half: 512 KB of 24-bit pixels
  parameter int unsigned MEM_ADDR_W = 32,
  parameter int unsigned FB_ADDR_W  = $clog2(H_RES * V_RES)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // display-controller registers
  input  logic                  csr_we,
  input  logic [2:0]            csr_addr,
  input  logic [31:0]           csr_wdata,
  output logic [31:0]           csr_rdata,
  input  logic                  gfx_irq,
  input  logic                  user_irq,
  // decoder (or GPU) output and control
  input  logic [3:0]            num_video_apps,
  input  logic [MEM_ADDR_W-1:0] fb_base,
  input  logic                  vd_valid,
  output logic                  vd_ready,
  input  beat_t                 vd_beat,
  output logic                  vd_clk_en,
  output logic                  vd_wakeup,
  // CPU / driver
  input  logic                  orch_done,
  input  logic                  frame_due,
  // DRAM frame buffer
  output logic                  mem_wr_valid,
  input  logic                  mem_wr_ready,
  output logic [MEM_ADDR_W-1:0] mem_wr_addr,
  output pixel_t                mem_wr_data,
  output logic                  mem_rd_valid,
  input  logic                  mem_rd_ready,
  output logic [MEM_ADDR_W-1:0] mem_rd_addr,
  input  logic                  mem_rsp_valid,
  input  pixel_t                mem_rsp_data,
  // eDP physical link
  output link_word_t            edp_link_tx,
  input  link_word_t            edp_link_rx,
  // LCD interface
  input  logic                  panel_on,
  output logic                  lcd_valid,
  output logic                  lcd_sol,
  output logic                  lcd_sof,
  output pixel_t                lcd_pix,
  // status
  output cstate_e               cstate,
  output logic                  dram_active,
  output logic                  link_on,
  output logic                  window_start,       // panel vsync: a frame window opens
  output logic                  bypass_active,
  output logic                  single_video,
  output logic                  burst_active,
  output logic [N_CSTATES-1:0][31:0] residency,
  output logic [31:0]           halt_count,
  output logic [31:0]           wake_count,
  output logic [31:0]           refresh_count,
  output logic [31:0]           self_refresh_count,
  output logic                  drfb_swapped,
  output logic                  drfb_overrun,
  output logic                  rx_update_done,
  output logic                  rx_error
);

  // ---------------- display-controller configuration ----------------
  logic    video_plane_only, single_plane, burst_en, psr2_active;
  region_t update_region;

  dc_csr #(.H_RES(H_RES), .V_RES(V_RES)) u_csr (
    .clk, .rst_n, .csr_we, .csr_addr, .csr_wdata, .csr_rdata, .gfx_irq, .user_irq,
    .video_plane_only, .single_plane, .burst_en, .psr2_active, .update_region
  );

  // ---------------- decoder output: destination selector ----------------
  logic  sel_dc_valid, sel_dc_ready;
  beat_t sel_dc_beat;
  beat_t sel_mem_beat;

  dest_selector #(.ADDR_W(MEM_ADDR_W)) u_sel (
    .clk, .rst_n, .video_plane_only, .num_video_apps, .fb_base,
    .in_valid(vd_valid), .in_ready(vd_ready), .in_beat(vd_beat),
    .dc_valid(sel_dc_valid), .dc_ready(sel_dc_ready), .dc_beat(sel_dc_beat),
    .mem_valid(mem_wr_valid), .mem_ready(mem_wr_ready), .mem_beat(sel_mem_beat),
    .mem_addr(mem_wr_addr), .single_video, .bypass_active
  );
  assign mem_wr_data = sel_mem_beat.pix;

  logic vd_frame_in_dram;
  assign vd_frame_in_dram = mem_wr_valid && mem_wr_ready && sel_mem_beat.eof;

  // ---------------- DC: DRAM fetch, double buffer ----------------
  logic  fetch_valid, fetch_busy, fetch_active;
  beat_t fetch_beat;
  logic  buf_wr_valid, buf_wr_ready;
  beat_t buf_wr_beat;
  logic  buf_rd_valid, buf_rd_ready;
  beat_t buf_rd_beat;
  logic  dc_full, dc_empty;

  dc_fetch #(.CHUNK_WORDS(BANK_WORDS), .ADDR_W(MEM_ADDR_W)) u_fetch (
    .clk, .rst_n, .start(vd_frame_in_dram), .fb_base,
    .frame_pixels(32'(update_region.w) * 32'(update_region.h)),
    .buf_empty(dc_empty),
    .req_valid(mem_rd_valid), .req_ready(mem_rd_ready), .req_addr(mem_rd_addr),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data),
    .out_valid(fetch_valid), .out_ready(buf_wr_ready), .out_beat(fetch_beat),
    .busy(fetch_busy), .fetching(fetch_active)
  );

  // The fetch engine owns the buffer's write side while it moves a frame.
  always_comb begin
    buf_wr_valid = fetch_busy ? fetch_valid : sel_dc_valid;
    buf_wr_beat  = fetch_busy ? fetch_beat  : sel_dc_beat;
    sel_dc_ready = buf_wr_ready && !fetch_busy;
  end

  dc_buffer #(.BANK_WORDS(BANK_WORDS)) u_dcbuf (
    .clk, .rst_n,
    .wr_valid(buf_wr_valid), .wr_ready(buf_wr_ready), .wr_beat(buf_wr_beat),
    .rd_valid(buf_rd_valid), .rd_ready(buf_rd_ready), .rd_beat(buf_rd_beat),
    .full(dc_full), .empty(dc_empty)
  );

  // ---------------- DC: eDP transmitter ----------------
  logic tx_sending, frame_sent, burst_go;

  // Frame Bursting is used when enabled and the DC shows a single plane (any
  // single-plane workload) or only the video plane (bypass and PSR2 windows).
  assign burst_go = burst_en && (single_plane || video_plane_only);

  edp_tx #(.RATE_NUM(RATE_NUM), .RATE_DEN(RATE_DEN)) u_tx (
    .clk, .rst_n, .link_on, .burst_en(burst_go), .selective(psr2_active), .region(update_region),
    .in_valid(buf_rd_valid), .in_ready(buf_rd_ready), .in_beat(buf_rd_beat),
    .link(edp_link_tx), .sending(tx_sending), .frame_sent
  );

  assign burst_active = burst_go;

  // ---------------- power management ----------------


  pmu_ctrl u_pmu (
    .clk, .rst_n, .window_start(window_start), .frame_due, .orch_done,
    .bypass(bypass_active), .vd_frame_done(vd_frame_in_dram),
    .dc_full, .dc_empty, .dc_fetching(fetch_active),
    .tx_sending, .frame_sent,
    .cstate, .vd_clk_en, .wakeup(vd_wakeup), .dram_active, .link_on,
    .residency, .halt_count, .wake_count
  );

  // ---------------- panel: receiver, DRFB, pixel formatter ----------------
  logic                 fb_wr_en, fb_wr_both, fb_frame_done;
  logic [FB_ADDR_W-1:0] fb_wr_addr, fb_rd_addr;
  pixel_t               fb_wr_data, fb_rd_data;
  logic                 fb_rd_en, fb_swap_req, fb_front, fb_frame_ready;
  logic                 rx_selective;

  edp_rx #(.H_RES(H_RES), .V_RES(V_RES), .ADDR_W(FB_ADDR_W)) u_rx (
    .clk, .rst_n, .link(edp_link_rx),
    .wr_en(fb_wr_en), .wr_both(fb_wr_both), .wr_addr(fb_wr_addr), .wr_data(fb_wr_data),
    .frame_done(fb_frame_done), .update_done(rx_update_done),
    .selective_q(rx_selective), .rx_error
  );

  drfb #(.H_RES(H_RES), .V_RES(V_RES), .ADDR_W(FB_ADDR_W)) u_drfb (
    .clk, .rst_n,
    .wr_en(fb_wr_en), .wr_both(fb_wr_both), .wr_addr(fb_wr_addr), .wr_data(fb_wr_data),
    .frame_done(fb_frame_done),
    .rd_en(fb_rd_en), .rd_addr(fb_rd_addr), .rd_data(fb_rd_data),
    .swap_req(fb_swap_req), .front(fb_front), .frame_ready(fb_frame_ready),
    .swapped(drfb_swapped), .overrun(drfb_overrun)
  );

  pixel_formatter #(.H_RES(H_RES), .V_RES(V_RES), .RATE_NUM(RATE_NUM), .RATE_DEN(RATE_DEN),
                    .ADDR_W(FB_ADDR_W)) u_pf (
    .clk, .rst_n, .enable(panel_on),
    .rd_en(fb_rd_en), .rd_addr(fb_rd_addr), .rd_data(fb_rd_data),
    .swap_req(fb_swap_req), .swapped(drfb_swapped),
    .lcd_valid, .lcd_sol, .lcd_sof, .lcd_pix,
    .vsync(window_start), .refresh_count, .self_refresh_count
  );

endmodule
