// tb_pixel_formatter: self-checking test of the pixel formatter.
//
// A small DRFB model (two frames, registered read, swaps on swap_req when a
// new frame is marked ready) feeds the formatter. Checked: pixels reach the
// LCD port in raster order from the displayed frame with start-of-line and
// start-of-frame marks; one refresh lasts H*V*RATE_DEN/RATE_NUM cycles (within
// one cycle); swap_req comes with the last pixel of a refresh; the refresh and
// self-refresh counters match the number of refreshes with and without a new
// frame; enable=0 stops the output.
module tb_pixel_formatter;
  import burstlink_pkg::*;

  localparam int H = 8, V = 4, N = H * V, AW = $clog2(N), NUM = 113, DEN = 259;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic enable, rd_en, swap_req, swapped, lcd_valid, lcd_sol, lcd_sof, vsync;
  logic [AW-1:0] rd_addr; pixel_t rd_data, lcd_pix;
  logic [31:0] refresh_count, self_refresh_count;

  pixel_formatter #(.H_RES(H), .V_RES(V), .RATE_NUM(NUM), .RATE_DEN(DEN)) dut (.clk, .rst_n, .enable,
    .rd_en, .rd_addr, .rd_data, .swap_req, .swapped, .lcd_valid, .lcd_sol, .lcd_sof, .lcd_pix,
    .vsync, .refresh_count, .self_refresh_count);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask
  initial begin
    #5000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // DRFB model
  pixel_t fb [2][N];
  bit fr, ready;
  always @(posedge clk) begin
    swapped <= 1'b0;
    if (rd_en) rd_data <= fb[fr][rd_addr];
    if (swap_req && ready) begin fr <= !fr; ready <= 0; swapped <= 1'b1; end
  end

  // LCD-side checker
  int pos, frame_seen_front, cyc, last_sof_cyc, n_refresh, n_new, period_checks;
  bit shown_front;
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (lcd_valid) begin
      if (lcd_sof) begin
        if (last_sof_cyc >= 0 && enable) begin
          check(cyc - last_sof_cyc >= (N * DEN) / NUM - 1 && cyc - last_sof_cyc <= (N * DEN) / NUM + 1,
                $sformatf("refresh period %0d cycles", cyc - last_sof_cyc));
          period_checks++;
        end
        last_sof_cyc <= cyc;
        pos = 0;
        n_refresh++;
        if (n_refresh > 1 && fr != shown_front) n_new++;
        shown_front = fr;
      end
      check(lcd_pix == fb[shown_front][pos], $sformatf("pixel %0d", pos));
      check(lcd_sol == (pos % H == 0) && lcd_sof == (pos == 0), "line/frame marks");
      pos++;
    end
    if (swap_req) check(int'(rd_addr) == N - 1, "swap request with last pixel");
  end

  initial begin
    int r0;
    for (int b = 0; b < 2; b++) for (int a = 0; a < N; a++) fb[b][a] = pixel_t'($urandom);
    fr = 0; ready = 0; enable = 1; pos = 0; cyc = 0; last_sof_cyc = -1; n_refresh = 0; n_new = 0;
    period_checks = 0; shown_front = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 12; k++) begin
      // new content for the back frame on some refreshes
      if ($urandom_range(0, 1) == 1 && !ready) begin
        for (int a = 0; a < N; a++) fb[!fr][a] = pixel_t'($urandom);
        ready = 1;
      end
      r0 = n_refresh;
      wait (n_refresh == r0 + 1);
      @(negedge clk);
    end
    // stop the panel for a while: no output
    enable = 0;
    repeat (3) @(posedge clk);
    repeat (50) begin @(negedge clk); check(!lcd_valid && !rd_en, "disabled: no output"); end
    enable = 1; last_sof_cyc = -1;
    r0 = n_refresh; wait (n_refresh == r0 + 2); @(negedge clk);
    check(refresh_count == 32'(n_refresh), $sformatf("refresh count %0d vs %0d", refresh_count, n_refresh));
    check(self_refresh_count == 32'(n_refresh - 1 - n_new),
          $sformatf("self-refresh count %0d vs %0d", self_refresh_count, n_refresh - 1 - n_new));
    check(period_checks > 5, "refresh periods measured");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
