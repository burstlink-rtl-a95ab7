// tb_burstlink_top: end-to-end test of the display path.
//
// Around the top sit models of what the RTL leaves out: a video decoder that
// emits one frame per frame window when one is due (only while its clock is
// enabled), a DRAM frame buffer with in-order read latency, a one-cycle eDP
// link, and a CPU that finishes orchestration a few cycles after each vsync.
// The run goes through five phases:
//   1 BurstLink   - bypass + Frame Bursting, 60 frames/s on a 60 Hz panel
//   2 30 FPS      - the same with a new frame every other window
//   3 bypass only - Frame Buffer Bypass without bursting (paced link)
//   4 fallback    - a graphics interrupt adds a plane: frames go through DRAM
//   5 PSR2        - windowed video: a full background frame, then selective
//                   bursts of the video window only
// Checks: every complete panel refresh shows exactly the image expected from
// the updates received so far (refreshes that overlap a paced update are
// skipped, they tear by nature); burst transfers take N link cycles for N
// pixels, plus at most one idle cycle per DC-buffer half; paced ones about N*RATE_DEN/RATE_NUM; no DRAM traffic in bypass
// phases; DRAM writes and reads of whole frames in the fallback phase. Every
// mechanism (bypass, burst, decoder halt and wakeup, DRAM fallback with C2 and
// C8, C9, self refresh, DRFB swap, PSR2 window update, graphics-interrupt
// fallback) is counted and must occur at least once.
module tb_burstlink_top;
  import burstlink_pkg::*;

  localparam int H = 16, V = 8, N = H * V, BW = 32, NUM = 113, DEN = 259;
  localparam int REFRESH = (N * DEN) / NUM;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // DUT signals
  logic csr_we; logic [2:0] csr_addr; logic [31:0] csr_wdata, csr_rdata;
  logic gfx_irq, user_irq;
  logic [3:0] num_video_apps; logic [31:0] fb_base;
  logic vd_valid, vd_ready, vd_clk_en, vd_wakeup; beat_t vd_beat;
  logic orch_done, frame_due;
  logic mem_wr_valid, mem_wr_ready, mem_rd_valid, mem_rd_ready, mem_rsp_valid;
  logic [31:0] mem_wr_addr, mem_rd_addr; pixel_t mem_wr_data, mem_rsp_data;
  link_word_t edp_link_tx, edp_link_rx;
  logic panel_on, lcd_valid, lcd_sol, lcd_sof; pixel_t lcd_pix;
  cstate_e cstate; logic dram_active, link_on, window_start, bypass_active, single_video, burst_active;
  logic [N_CSTATES-1:0][31:0] residency;
  logic [31:0] halt_count, wake_count, refresh_count, self_refresh_count;
  logic drfb_swapped, drfb_overrun, rx_update_done, rx_error;

  burstlink_top #(.H_RES(H), .V_RES(V), .RATE_NUM(NUM), .RATE_DEN(DEN), .BANK_WORDS(BW)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL %s @%0t", msg, $time); end
  endtask
  initial begin
    #40000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- eDP link: one register stage ----------------
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) edp_link_rx <= '{kind: LW_IDLE, payload: '0};
    else        edp_link_rx <= edp_link_tx;

  // ---------------- DRAM model ----------------
  pixel_t dram [logic [31:0]];
  logic [31:0] rq_addr[$]; int rq_due[$]; int cyc;
  int n_dram_wr, n_dram_rd;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (mem_wr_valid && mem_wr_ready) begin dram[mem_wr_addr] = mem_wr_data; n_dram_wr++; end
    if (mem_rd_valid && mem_rd_ready) begin rq_addr.push_back(mem_rd_addr); rq_due.push_back(cyc + $urandom_range(2, 5)); n_dram_rd++; end
  end
  always @(negedge clk) begin
    mem_wr_ready = $urandom_range(0, 4) != 0;
    mem_rd_ready = $urandom_range(0, 4) != 0;
    mem_rsp_valid = 0; mem_rsp_data = '0;
    if (rq_addr.size() > 0 && rq_due[0] <= cyc) begin
      mem_rsp_valid = 1;
      mem_rsp_data = dram.exists(rq_addr[0]) ? dram[rq_addr[0]] : '0;
      void'(rq_addr.pop_front()); void'(rq_due.pop_front());
    end
  end

  // ---------------- test-side view of the configuration ----------------
  bit fps30;              // new frame every other window
  bit vd_full_rate;       // decoder offers a beat every cycle
  int win_w, win_h, win_x, win_y;   // size of each decoded frame and where it lands
  int win_count;

  // ---------------- CPU: orchestration and frame schedule ----------------
  int orch_timer;
  always @(posedge clk) begin
    orch_done <= (orch_timer == 1);
    if (window_start) orch_timer <= 5;
    else if (orch_timer > 0) orch_timer <= orch_timer - 1;
  end
  always @(posedge clk) if (window_start) win_count <= win_count + 1;
  bit hold;               // no new frames
  assign frame_due = !hold && (!fps30 || (win_count % 2 == 0));

  // ---------------- video decoder model ----------------
  int vd_frame, vd_idx, vd_pending; bit vd_busy;
  function automatic pixel_t vpix(input int f, input int i);
    return pixel_t'({8'(f), 16'(i)}) ^ 24'h5A0000;
  endfunction
  always @(posedge clk) begin
    if (orch_done && frame_due) vd_pending++;
    if (vd_valid && vd_ready) begin
      if (vd_idx == win_w * win_h - 1) begin vd_idx = 0; vd_busy = 0; vd_frame++; end
      else vd_idx++;
    end
    if (!vd_busy && vd_pending > 0 && vd_clk_en) begin vd_busy = 1; vd_pending--; end
  end
  always_comb begin
    vd_beat.pix = vpix(vd_frame, vd_idx);
    vd_beat.sof = (vd_idx == 0);
    vd_beat.eof = (vd_idx == win_w * win_h - 1);
  end
  logic vd_rand;
  always @(negedge clk) vd_rand = vd_full_rate || ($urandom_range(0, 3) != 0);
  assign vd_valid = vd_busy && vd_clk_en && vd_rand;

  // clock gating rule: the decoder never moves data while halted
  always @(posedge clk) if (rst_n && vd_valid) check(vd_clk_en, "decoder active only with clock enabled");

  // DRAM frame buffers: alternate between two for successive frames
  always @(posedge clk) if (vd_valid && vd_ready && vd_beat.sof) fb_base <= (vd_frame % 2 == 0) ? 32'h10000 : 32'h20000;

  // ---------------- expected panel image ----------------
  pixel_t img_cur [N];     // what the displayed buffer holds
  pixel_t img_next [N];    // a burst frame waiting in the back buffer
  pixel_t img_rx [N];      // image being assembled from the current update
  int rx_frame; bit rx_burst, rx_sel; int rx_x, rx_y, rx_w, rx_h, rx_i;
  bit paced_busy;          // a paced update is being written
  bit img_known = 1'b0;         // the displayed image is known (not the buffer's power-up content)
  always @(posedge clk) if (rst_n) begin
    // the end of one update and the header of the next can share a cycle:
    // close the previous update first
    if (rx_update_done) begin
      img_next = img_rx;                 // burst: back buffer; paced: both buffers
      if (!rx_burst) paced_busy = 0;
    end
    if (drfb_swapped) begin img_cur = img_next; img_known = 1; end
    if (rx_update_done && !rx_burst && !rx_sel) img_known = 1;
    if (edp_link_rx.kind == LW_HDR) begin
      link_hdr_t h; h = link_hdr_t'(edp_link_rx.payload);
      rx_burst = h.burst; rx_sel = h.selective;
      rx_x = int'(h.region.x); rx_y = int'(h.region.y); rx_w = int'(h.region.w); rx_h = int'(h.region.h);
      rx_i = 0; img_rx = rx_burst ? img_next : img_cur;
      if (!rx_burst) paced_busy = 1;
    end else if (edp_link_rx.kind == LW_PIX) begin
      beat_t b; b = beat_t'(edp_link_rx.payload[$bits(beat_t)-1:0]);
      img_rx[(rx_y + rx_i / rx_w) * H + rx_x + rx_i % rx_w] = b.pix;
      if (!rx_burst) img_cur[(rx_y + rx_i / rx_w) * H + rx_x + rx_i % rx_w] = b.pix;
      rx_i++;
    end
  end

  // ---------------- panel refresh checker ----------------
  pixel_t shot [N]; pixel_t exp_shot [N]; int sp; bit torn; int n_refresh_checked;
  always @(posedge clk) if (rst_n) begin
    if (paced_busy) torn = 1;
    if (lcd_valid) begin
      if (lcd_sof) begin sp = 0; torn = paced_busy || !img_known; exp_shot = img_cur; end
      shot[sp] = lcd_pix; sp++;
      if (sp == N) begin
        if (!torn) begin
          bit same; same = 1;
          for (int i = 0; i < N; i++) if (shot[i] != exp_shot[i]) begin
            if (same) $display("  first difference at pixel %0d: shown %h expected %h", i, shot[i], exp_shot[i]);
            same = 0;
          end
          check(same, $sformatf("refresh %0d shows the expected image", refresh_count));
          n_refresh_checked++;
        end
      end
    end
  end

  // ---------------- link timing and mechanism counters ----------------
  int hdr_cyc, npix_link; bit link_burst;
  int n_bursts, n_paced, n_selective, n_bypass_frames, n_dram_frames, n_swaps, n_gfx_fallback;
  bit in_bypass_phase;
  always @(posedge clk) if (rst_n) begin
    if (edp_link_tx.kind == LW_HDR) begin
      link_hdr_t h; h = link_hdr_t'(edp_link_tx.payload);
      hdr_cyc = cyc; npix_link = int'(h.region.w) * int'(h.region.h); link_burst = h.burst;
      if (h.selective) n_selective++;
    end
    if (edp_link_tx.kind == LW_PIX) begin
      beat_t b; b = beat_t'(edp_link_tx.payload[$bits(beat_t)-1:0]);
      if (b.eof) begin
        if (link_burst) begin
          n_bursts++;
          // one idle cycle at most per DC-buffer half handover
          if (vd_full_rate) check(cyc - hdr_cyc >= npix_link && cyc - hdr_cyc <= npix_link + npix_link / BW,
            $sformatf("burst: %0d pixels in %0d cycles", npix_link, cyc - hdr_cyc));
        end else begin
          n_paced++;
          check(cyc - hdr_cyc >= (npix_link * DEN) / NUM - 2,
            $sformatf("paced: %0d pixels took %0d cycles, at least %0d expected", npix_link, cyc - hdr_cyc, (npix_link * DEN) / NUM));
        end
      end
    end
    if (vd_valid && vd_ready && vd_beat.sof) begin
      if (bypass_active) n_bypass_frames++; else n_dram_frames++;
    end
    if (in_bypass_phase) check(!mem_wr_valid && !mem_rd_valid, "no DRAM traffic while bypassing");
    if (drfb_swapped) n_swaps++;
    check(!rx_error && !drfb_overrun, "link and DRFB errors");
  end

  task automatic wr(input logic [2:0] a, input logic [31:0] d);
    @(negedge clk); csr_we = 1; csr_addr = a; csr_wdata = d;
    @(negedge clk); csr_we = 0;
  endtask
  task automatic windows(input int n);
    repeat (n) @(posedge window_start);
  endtask

  initial begin
    int w0, s0, b0, d0, c2_0, c8_0;
    csr_we = 0; csr_addr = 0; csr_wdata = 0; gfx_irq = 0; user_irq = 0;
    num_video_apps = 1; fb_base = 32'h10000; panel_on = 1;
    fps30 = 0; vd_full_rate = 1; win_w = H; win_h = V; win_x = 0; win_y = 0; win_count = 0; hold = 0;
    vd_frame = 1; vd_idx = 0; vd_pending = 0; vd_busy = 0; cyc = 0;
    n_dram_wr = 0; n_dram_rd = 0; paced_busy = 0; torn = 1; sp = 0; n_refresh_checked = 0;
    n_bursts = 0; n_paced = 0; n_selective = 0; n_bypass_frames = 0; n_dram_frames = 0; n_swaps = 0;
    n_gfx_fallback = 0; in_bypass_phase = 0; orch_timer = 0; orch_done = 0;
    for (int i = 0; i < N; i++) begin img_cur[i] = '0; img_next[i] = '0; end
    repeat (3) @(posedge clk); rst_n = 1;
    // The panel starts with an unknown image: show a first frame through the paced path.
    // ---- phase 1: BurstLink, 60 FPS ----
    wr(2, 32'h1);                        // burst on, PSR2 off; planes: video only (reset value)
    in_bypass_phase = 1;
    windows(8);
    check(n_bursts >= 6, $sformatf("phase 1: %0d burst frames", n_bursts));
    check(residency[PC9] > 0 && residency[PC7] > 0, "phase 1: C7 and C9 visited");
    // ---- phase 2: 30 FPS ----
    s0 = int'(self_refresh_count);
    fps30 = 1; vd_full_rate = 0;
    windows(8);
    check(int'(self_refresh_count) - s0 >= 3, "phase 2: self refreshes between frames");
    fps30 = 0;
    // ---- phase 3: bypass without bursting ----
    wr(2, 32'h0);
    w0 = int'(wake_count);
    windows(6);
    check(int'(halt_count) > 0 && int'(wake_count) > w0, "phase 3: decoder halted and woken");
    in_bypass_phase = 0;
    // ---- phase 4: fallback through DRAM ----
    @(negedge clk); gfx_irq = 1; @(negedge clk); gfx_irq = 0;
    n_gfx_fallback++;
    check(!dut.video_plane_only, "graphics interrupt removes video_plane_only");
    fps30 = 1;
    d0 = n_dram_frames; c2_0 = int'(residency[PC2]); c8_0 = int'(residency[PC8]);
    windows(10);
    check(n_dram_frames - d0 >= 3, "phase 4: frames went through DRAM");
    check(n_dram_wr >= 3 * N && n_dram_rd >= 3 * N, "phase 4: DRAM written and read");
    check(int'(residency[PC2]) > c2_0 && int'(residency[PC8]) > c8_0, "phase 4: C2 and C8 visited");
    fps30 = 0;
    // ---- phase 5: windowed video with PSR2 ----
    wr(0, 32'h3);                        // background + video planes
    windows(3);                           // the full frame (conventional path) fills both buffers
    hold = 1;
    windows(3);
    check(!dut.fetch_busy && !dut.tx_sending && vd_pending == 0, "phase 5: path idle before PSR2");
    hold = 0;
    win_x = 3; win_y = 2; win_w = 6; win_h = 4;
    wr(3, {3'd0, 13'(win_y), 3'd0, 13'(win_x)});
    wr(4, {3'd0, 13'(win_h), 3'd0, 13'(win_w)});
    wr(2, 32'h3);                        // burst + PSR2
    in_bypass_phase = 1;
    windows(8);
    check(n_selective >= 4, $sformatf("phase 5: %0d selective window updates", n_selective));
    // user input ends PSR2: back to conventional
    in_bypass_phase = 0;
    hold = 1;
    windows(2);
    @(negedge clk); user_irq = 1; @(negedge clk); user_irq = 0;
    check(!dut.psr2_active, "user input leaves PSR2");
    // ---- mechanism summary ----
    $display("bursts=%0d paced=%0d selective=%0d bypass_frames=%0d dram_frames=%0d halts=%0d wakes=%0d swaps=%0d self_refresh=%0d refreshes_checked=%0d",
             n_bursts, n_paced, n_selective, n_bypass_frames, n_dram_frames, halt_count, wake_count,
             n_swaps, self_refresh_count, n_refresh_checked);
    $display("residency C0=%0d C2=%0d C7=%0d C7'=%0d C8=%0d C9=%0d", residency[PC0], residency[PC2],
             residency[PC7], residency[PC7P], residency[PC8], residency[PC9]);
    check(n_bypass_frames > 0, "mechanism: frame buffer bypass");
    check(n_bursts > 0, "mechanism: frame bursting");
    check(n_paced > 0, "mechanism: paced (conventional-rate) transfer");
    check(halt_count > 0, "mechanism: decoder halt (C7')");
    check(wake_count > 0, "mechanism: wakeup");
    check(n_dram_frames > 0, "mechanism: DRAM fallback");
    check(n_gfx_fallback > 0, "mechanism: graphics-interrupt fallback");
    check(n_selective > 0, "mechanism: PSR2 selective update");
    check(n_swaps > 0, "mechanism: DRFB swap");
    check(self_refresh_count > 0, "mechanism: panel self refresh");
    check(residency[PC9] > 0 && residency[PC2] > 0 && residency[PC8] > 0 && residency[PC7P] > 0, "all C-states visited");
    check(n_refresh_checked >= 20, $sformatf("%0d refreshes compared", n_refresh_checked));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
