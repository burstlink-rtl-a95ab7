// tb_burstlink_full: one complete BurstLink frame at the full default size.
//
// The top runs with its default parameters: a 3840x2160 panel with 24-bit
// pixels, 48 MB of DRFB, a DC buffer of two 512 KB halves, and a pixel rate of
// 113/259 of the link rate. After reset the panel refreshes its (unwritten)
// buffer; at the first vsync the CPU model finishes orchestration, the
// decoder model streams one 4K frame, and with bypass and Frame Bursting
// enabled the frame goes straight from the decoder to the panel's back
// buffer at one pixel per cycle. Checked: no DRAM traffic; the burst takes
// about one cycle per pixel (far below the paced time); the PMU reaches C9
// once the frame is sent; the DRFB swaps at the end of the refresh; every
// pixel of the next refresh equals the decoded frame; the refresh lasts
// H*V*259/113 cycles.
module tb_burstlink_full;
  import burstlink_pkg::*;

  localparam int H = 3840, V = 2160, N = H * V;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

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

  burstlink_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s @%0t", msg, $time); end
  endtask
  initial begin
    #200000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic pixel_t vpix(input int i);
    return pixel_t'(i * 40503 + 17);
  endfunction

  always_ff @(posedge clk) edp_link_rx <= edp_link_tx;

  // CPU: orchestration done a few cycles after each vsync; only the first window has a frame
  int orch_timer; bit frame_taken;
  always @(posedge clk) begin
    orch_done <= (orch_timer == 1);
    if (window_start) orch_timer <= 5;
    else if (orch_timer > 0) orch_timer <= orch_timer - 1;
  end

  // decoder: one frame, a beat every cycle while its clock runs
  int vd_idx; bit vd_busy;
  assign frame_due = !frame_taken;
  always @(posedge clk) begin
    if (orch_done && !frame_taken) begin vd_busy <= 1; frame_taken <= 1; end
    if (vd_valid && vd_ready) begin
      if (vd_idx == N - 1) vd_busy <= 0;
      vd_idx <= vd_idx + 1;
    end
  end
  assign vd_valid    = vd_busy && vd_clk_en;
  assign vd_beat.pix = vpix(vd_idx);
  assign vd_beat.sof = (vd_idx == 0);
  assign vd_beat.eof = (vd_idx == N - 1);

  // measurements
  longint cyc, hdr_cyc, eof_cyc, sof_cyc, prev_sof_cyc;
  int pix_i, n_dram, n_swaps; bit swap_seen, check_refresh, c9_after_send, checked_one;
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (mem_wr_valid || mem_rd_valid) n_dram++;
    if (edp_link_tx.kind == LW_HDR) hdr_cyc = cyc;
    if (edp_link_tx.kind == LW_PIX && edp_link_tx.payload[$bits(pixel_t)]) eof_cyc = cyc;
    if (drfb_swapped) begin n_swaps++; swap_seen = 1; end
    if (cstate == PC9 && eof_cyc > 0) c9_after_send = 1;
    if (lcd_valid) begin
      if (lcd_sof) begin
        prev_sof_cyc = sof_cyc; sof_cyc = cyc; pix_i = 0;
        if (swap_seen) begin check_refresh = 1; swap_seen = 0; end
        if (checked_one) begin
          check(sof_cyc - prev_sof_cyc >= longint'(N) * 259 / 113 - 1 && sof_cyc - prev_sof_cyc <= longint'(N) * 259 / 113 + 1,
                $sformatf("refresh period %0d cycles", sof_cyc - prev_sof_cyc));
          $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
          $finish;
        end
      end
      if (check_refresh) begin
        if (lcd_pix != vpix(pix_i)) begin failures++; if (failures < 20) $display("FAIL pixel %0d", pix_i); end
        pix_i++;
        if (pix_i == N) begin
          checks++;  // the whole frame as one check
          check_refresh = 0; checked_one = 1;
          check(n_dram == 0, "no DRAM traffic in bypass");
          check(eof_cyc - hdr_cyc >= N && eof_cyc - hdr_cyc <= N + N / 100,
                $sformatf("burst of %0d pixels took %0d cycles", N, eof_cyc - hdr_cyc));
          check(c9_after_send, "C9 reached after the burst");
          check(n_swaps == 1 && self_refresh_count == 0, "one swap");
          check(halt_count == 0 || wake_count == halt_count, "halts matched by wakeups");
          check(residency[PC9] > residency[PC7], "most of the time in C9");
          $display("burst %0d cycles for %0d pixels; paced would take %0d", eof_cyc - hdr_cyc, N, longint'(N) * 259 / 113);
          $display("residency C0=%0d C7=%0d C7'=%0d C9=%0d", residency[PC0], residency[PC7], residency[PC7P], residency[PC9]);
        end
      end else pix_i++;
    end
  end

  initial begin
    csr_we = 0; csr_addr = 0; csr_wdata = 0; gfx_irq = 0; user_irq = 0;
    num_video_apps = 1; fb_base = 32'h0; panel_on = 1;
    mem_wr_ready = 1; mem_rd_ready = 1; mem_rsp_valid = 0; mem_rsp_data = '0;
    orch_timer = 0; orch_done = 0; frame_taken = 0; vd_idx = 0; vd_busy = 0;
    edp_link_rx = '{kind: LW_IDLE, payload: '0};
    cyc = 0; hdr_cyc = 0; eof_cyc = 0; sof_cyc = 0; prev_sof_cyc = 0; pix_i = 0; n_dram = 0; n_swaps = 0;
    check_refresh = 0; swap_seen = 0; c9_after_send = 0; checked_one = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); csr_we = 1; csr_addr = 3'd2; csr_wdata = 32'h1;   // Frame Bursting on
    rst_n = 1;
    @(negedge clk); csr_we = 0;
  end
endmodule
