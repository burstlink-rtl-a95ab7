// tb_dc_csr: self-checking test of the display controller's registers and the
// mode signals derived from them.
//
// Writes plane enables, panel count and mode, reads every register back, and
// compares video_plane_only, single_plane, burst_en, psr2_active and the update
// region with values computed here from the same settings. Also checks that a
// graphics interrupt adds the graphics plane and leaves PSR2, and that a
// user-input interrupt leaves PSR2.
module tb_dc_csr;
  import burstlink_pkg::*;

  localparam int H = 64, V = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic csr_we = 0; logic [2:0] csr_addr = 0; logic [31:0] csr_wdata = 0, csr_rdata;
  logic gfx_irq = 0, user_irq = 0;
  logic vpo, single_plane, burst_en, psr2_active;
  region_t update_region;

  dc_csr #(.H_RES(H), .V_RES(V)) dut (.clk, .rst_n, .csr_we, .csr_addr, .csr_wdata, .csr_rdata,
    .gfx_irq, .user_irq, .video_plane_only(vpo), .single_plane, .burst_en, .psr2_active, .update_region);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask

  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wr(input logic [2:0] a, input logic [31:0] d);
    @(negedge clk); csr_we = 1; csr_addr = a; csr_wdata = d;
    @(negedge clk); csr_we = 0;
  endtask

  function automatic int ones4(input logic [3:0] v);
    return int'(v[0]) + int'(v[1]) + int'(v[2]) + int'(v[3]);
  endfunction

  logic [3:0] pl; logic [3:0] nd; logic [1:0] md;
  logic [12:0] wx, wy, ww, wh;
  bit exp_vpo, exp_psr2;
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    check(vpo && !psr2_active && !burst_en, "reset: video plane only, no PSR2, no burst");
    check(update_region == '{x: 0, y: 0, w: 13'(H), h: 13'(V)}, "reset region is full panel");
    for (int t = 0; t < 300; t++) begin
      pl = 4'($urandom); nd = 4'($urandom_range(0, 2)); md = 2'($urandom);
      wx = 13'($urandom_range(0, 20)); wy = 13'($urandom_range(0, 10));
      ww = 13'($urandom_range(1, 30)); wh = 13'($urandom_range(1, 20));
      wr(0, {28'd0, pl}); wr(1, {28'd0, nd}); wr(2, {30'd0, md});
      wr(3, {3'd0, wy, 3'd0, wx}); wr(4, {3'd0, wh, 3'd0, ww});
      exp_psr2 = md[1];
      exp_vpo  = (nd == 1) && ((pl == 4'b0010) || (exp_psr2 && pl[1]));
      check(vpo == exp_vpo, $sformatf("video_plane_only pl=%b nd=%0d md=%b", pl, nd, md));
      check(single_plane == ((nd == 1) && ones4(pl) == 1), "single_plane");
      check(burst_en == md[0], "burst_en");
      check(psr2_active == exp_psr2, "psr2_active");
      if (exp_psr2) check(update_region == '{x: wx, y: wy, w: ww, h: wh}, "PSR2 window");
      else          check(update_region == '{x: 0, y: 0, w: 13'(H), h: 13'(V)}, "full-frame region");
      csr_addr = 0; #1 check(csr_rdata == {28'd0, pl}, "read PLANE_EN");
      csr_addr = 3; #1 check(csr_rdata == {3'd0, wy, 3'd0, wx}, "read WIN_XY");
      if (t % 3 == 0) begin
        @(negedge clk); gfx_irq = 1; @(negedge clk); gfx_irq = 0;
        check(!vpo && !psr2_active, "graphics interrupt forces fallback");
        csr_addr = 0; #1 check(csr_rdata[2] == 1'b1, "graphics plane enabled by interrupt");
      end else if (t % 3 == 1) begin
        @(negedge clk); user_irq = 1; @(negedge clk); user_irq = 0;
        check(!psr2_active, "user input leaves PSR2");
        check(vpo == ((nd == 1) && pl == 4'b0010), "after PSR2 exit only a lone video plane bypasses");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
