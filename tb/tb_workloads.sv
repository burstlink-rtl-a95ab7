// tb_workloads: planar video streaming and single-plane graphics workloads,
// BurstLink against the conventional display path.
//
// Planar streaming at FHD, QHD, 4K or 5K differs only in frame size, so one
// scaled-down 16:9 panel (32x18 pixels, DC buffer halves of 64 pixels)
// stands for all of them. The clock is the link word rate; the panel reads
// at RATE_NUM/RATE_DEN of it (11.3/25.92 Gbps, a 4K 60 Hz panel). Each
// configuration starts from reset and runs 10 frame windows. Windows 3 to 10
// are measured: package C-state residency and DRAM traffic.
//
//   burst60  BurstLink, 60 FPS video on the 60 Hz panel: bypass + bursting
//   burst30  BurstLink, 30 FPS: a new frame every other window
//   base60   conventional: the frame goes through DRAM (two video
//            applications keep the bypass off) and is sent at the panel rate
//   base30   conventional, 30 FPS
//   gfx60    single-plane graphics (video capture, conferencing, gaming):
//            the frame comes from DRAM and is sent as a burst
//
// Expected values come from the rates alone, not from the RTL:
//   - BurstLink sends an N-pixel frame in about N of the N*259/113 cycles of
//     a window, so the idle share of a 60 FPS window is 1 - 113/259 = 56%
//     (minus C0 and the decoder's start-up); C9 must cover 45%..60% of it.
//     At 30 FPS every other window is all C9: at least 70%.
//   - No DRAM traffic with BurstLink. The conventional path writes and reads
//     every pixel of every frame once (N writes and N reads per frame).
//   - The conventional 60 FPS path sends at the panel rate for the whole
//     window, so it spends less than 10% in C9.
//   - gfx60 reads every frame once from DRAM and still bursts it, so DRAM
//     is open (C2) for about N cycles per frame and C9 follows. Here the
//     producer writes the frame into DRAM at the start of the same window,
//     so C0 also takes about N cycles and C9 is only what remains
//     (1 - 2*113/259 at most); it must still exceed the conventional path's.
// DRAM read counts per frame are allowed 10% slack: a fetch can straddle the
// edge of the measured interval.
// Every refresh after the first frame must show a frame the decoder made,
// checked on pixel 0 and the last pixel.
module tb_workloads;
  import burstlink_pkg::*;

  localparam int H = 32, V = 18, N = H * V, BW = 64, NUM = 113, DEN = 259;
  localparam int WIN = (N * DEN) / NUM;            // cycles per frame window

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

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
    #5000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ideal eDP link: one register stage
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) edp_link_rx <= '{kind: LW_IDLE, payload: '0};
    else        edp_link_rx <= edp_link_tx;

  // DRAM: always ready, fixed read latency of 3 cycles, in order
  pixel_t dram [logic [31:0]];
  logic [31:0] rq_addr[$]; int rq_due[$]; int cyc;
  int n_dram_wr, n_dram_rd;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && mem_wr_valid && mem_wr_ready) begin dram[mem_wr_addr] = mem_wr_data; n_dram_wr++; end
    if (rst_n && mem_rd_valid && mem_rd_ready) begin rq_addr.push_back(mem_rd_addr); rq_due.push_back(cyc + 3); n_dram_rd++; end
  end
  assign mem_wr_ready = 1'b1;
  assign mem_rd_ready = 1'b1;
  always @(negedge clk) begin
    mem_rsp_valid = 0; mem_rsp_data = '0;
    if (rq_addr.size() > 0 && rq_due[0] <= cyc) begin
      mem_rsp_valid = 1;
      mem_rsp_data = dram.exists(rq_addr[0]) ? dram[rq_addr[0]] : '0;
      void'(rq_addr.pop_front()); void'(rq_due.pop_front());
    end
  end

  // CPU: orchestration ends 5 cycles after each window start
  int orch_timer, win_count; bit fps30;
  always @(posedge clk) begin
    orch_done <= rst_n && (orch_timer == 1);
    if (window_start) begin orch_timer <= 5; win_count <= win_count + 1; end
    else if (orch_timer > 0) orch_timer <= orch_timer - 1;
  end
  assign frame_due = !fps30 || (win_count % 2 == 0);

  // video decoder (or, for gfx60, the graphics producer): one frame per due
  // window, one pixel per cycle while its clock runs
  int vd_frame, vd_idx, vd_pending; bit vd_busy;
  function automatic pixel_t vpix(input int f, input int i);
    return pixel_t'({8'(f), 16'(i)}) ^ 24'h3C0000;
  endfunction
  always @(posedge clk) if (rst_n) begin
    if (orch_done && frame_due) vd_pending++;
    if (vd_valid && vd_ready) begin
      if (vd_idx == N - 1) begin vd_idx = 0; vd_busy = 0; vd_frame++; end
      else vd_idx++;
    end
    if (!vd_busy && vd_pending > 0 && vd_clk_en) begin vd_busy = 1; vd_pending--; end
  end
  assign vd_valid = vd_busy && vd_clk_en;
  always_comb begin
    vd_beat.pix = vpix(vd_frame, vd_idx);
    vd_beat.sof = (vd_idx == 0);
    vd_beat.eof = (vd_idx == N - 1);
  end

  // panel: every refresh after the first swap shows a decoded frame
  int shown_frame, n_bursts, n_paced;
  bit any_swap, swap_pending;
  int last_c2;             // C2 cycles of the last measured run
  pixel_t first_pix;
  int pix_i;
  always @(posedge clk) if (rst_n) begin
    if (drfb_swapped) swap_pending = 1;
    if (edp_link_tx.kind == LW_HDR) begin
      link_hdr_t h; h = link_hdr_t'(edp_link_tx.payload);
      if (h.burst) n_bursts++; else n_paced++;
    end
    if (lcd_valid) begin
      if (lcd_sof) begin pix_i = 0; first_pix = lcd_pix; if (swap_pending) any_swap = 1; end
      if (pix_i == N - 1 && any_swap && n_paced == 0) begin
        shown_frame = int'(first_pix[23:16] ^ 8'h3C);
        check(first_pix == vpix(shown_frame, 0) && lcd_pix == vpix(shown_frame, N - 1),
              $sformatf("refresh shows one whole decoded frame (%h..%h)", first_pix, lcd_pix));
      end
      pix_i++;
    end
    check(!rx_error && !drfb_overrun, "link and DRFB errors");
  end

  task automatic wr(input logic [2:0] a, input logic [31:0] d);
    @(negedge clk); csr_we = 1; csr_addr = a; csr_wdata = d;
    @(negedge clk); csr_we = 0;
  endtask

  // one configuration: reset, configure, run 10 windows, measure 3..10
  task automatic run(input string name, input bit f30, input int apps, input logic [3:0] planes,
                     input bit burst, output real c9_share, output int wr_per_frame, output int rd_per_frame,
                     output int frames);
    logic [N_CSTATES-1:0][31:0] r0;
    int c0, w0, rd0, f0, total;
    rst_n = 0; fps30 = f30; num_video_apps = 4'(apps);
    vd_frame = 1; vd_idx = 0; vd_pending = 0; vd_busy = 0;
    n_bursts = 0; n_paced = 0; any_swap = 0; swap_pending = 0; pix_i = 0; win_count = 0; orch_timer = 0;
    rq_addr.delete(); rq_due.delete(); dram.delete();
    repeat (4) @(posedge clk);
    rst_n = 1;
    wr(0, 32'(planes));
    wr(2, {31'd0, burst});
    repeat (2) @(posedge window_start);
    r0 = residency; w0 = n_dram_wr; rd0 = n_dram_rd; f0 = vd_frame; c0 = cyc;
    repeat (8) @(posedge window_start);
    total = 0;
    for (int s = 0; s < N_CSTATES; s++) total += int'(residency[s] - r0[s]);
    c9_share = real'(residency[PC9] - r0[PC9]) / real'(total);
    frames = vd_frame - f0;
    last_c2 = int'(residency[PC2] - r0[PC2]);
    wr_per_frame = frames > 0 ? (n_dram_wr - w0) / frames : 0;
    rd_per_frame = frames > 0 ? (n_dram_rd - rd0) / frames : 0;
    $display("%-8s frames=%0d window=%0d cycles  C0=%0d C2=%0d C7=%0d C7'=%0d C8=%0d C9=%0d  C9 share=%0.2f  DRAM wr/frame=%0d rd/frame=%0d bursts=%0d paced=%0d",
             name, frames, (cyc - c0) / 8,
             residency[PC0] - r0[PC0], residency[PC2] - r0[PC2], residency[PC7] - r0[PC7],
             residency[PC7P] - r0[PC7P], residency[PC8] - r0[PC8], residency[PC9] - r0[PC9],
             c9_share, wr_per_frame, rd_per_frame, n_bursts, n_paced);
    check(total >= 8 * WIN - 8 && total <= 8 * WIN + 8, $sformatf("%s: 8 windows of %0d cycles measured (%0d)", name, WIN, total));
  endtask

  initial begin
    real s_b60, s_b30, s_c60, s_c30, s_g60;
    int w, r, f;
    csr_we = 0; csr_addr = 0; csr_wdata = 0; gfx_irq = 0; user_irq = 0;
    fb_base = 32'h1000; panel_on = 1; cyc = 0; n_dram_wr = 0; n_dram_rd = 0;
    fps30 = 0; num_video_apps = 1;

    run("burst60", 0, 1, 4'b0010, 1, s_b60, w, r, f);
    check(f == 8, $sformatf("burst60: one frame per window (%0d)", f));
    check(w == 0 && r == 0, "burst60: no DRAM traffic");
    check(s_b60 >= 0.45 && s_b60 <= 0.60, $sformatf("burst60: C9 share %0.2f, about 1-113/259", s_b60));
    check(n_paced == 0 && n_bursts >= 8, "burst60: every frame bursts");
    check(halt_count > 0 && wake_count == halt_count, "burst60: decoder halted and woken");

    run("burst30", 1, 1, 4'b0010, 1, s_b30, w, r, f);
    check(f == 4, $sformatf("burst30: a frame every other window (%0d)", f));
    check(w == 0 && r == 0, "burst30: no DRAM traffic");
    check(s_b30 >= 0.70, $sformatf("burst30: C9 share %0.2f", s_b30));
    check(self_refresh_count >= 4, "burst30: panel self-refresh between frames");

    run("base60", 0, 2, 4'b0010, 0, s_c60, w, r, f);
    check(f == 8, $sformatf("base60: one frame per window (%0d)", f));
    check(w == N && r >= N - N / 10 && r <= N + N / 10, $sformatf("base60: N writes and N reads per frame (%0d, %0d)", w, r));
    check(s_c60 < 0.10, $sformatf("base60: C9 share %0.2f", s_c60));
    check(n_bursts == 0, "base60: no bursts");

    run("base30", 1, 2, 4'b0010, 0, s_c30, w, r, f);
    check(f == 4, $sformatf("base30: a frame every other window (%0d)", f));
    check(w == N && r >= N - N / 10 && r <= N + N / 10, $sformatf("base30: N writes and N reads per frame (%0d, %0d)", w, r));
    check(s_c30 < s_b30, $sformatf("base30: C9 share %0.2f below BurstLink's %0.2f", s_c30, s_b30));

    run("gfx60", 0, 1, 4'b0100, 1, s_g60, w, r, f);
    check(f == 8, $sformatf("gfx60: one frame per window (%0d)", f));
    check(w == N && r >= N - N / 10 && r <= N + N / 10, $sformatf("gfx60: frame written to and read from DRAM (%0d, %0d)", w, r));
    check(n_paced == 0 && n_bursts >= 8, "gfx60: single plane is burst");
    check(last_c2 / f <= N + N / 4, $sformatf("gfx60: DRAM open (C2) %0d cycles per frame, about N", last_c2 / f));
    check(s_g60 > s_c60, $sformatf("gfx60: C9 share %0.2f above conventional %0.2f", s_g60, s_c60));

    check(s_b60 > s_c60 + 0.3, "BurstLink idles far more than the conventional path at 60 FPS");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
