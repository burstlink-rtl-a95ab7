// tb_dest_selector: self-checking test of the decoder's destination selector.
//
// Sends frames of FRAME_LEN beats with random valid gaps and random ready on
// both outputs, under every combination of video_plane_only and the number of
// running video applications. For each frame the expected route is worked out
// from the conditions at its first beat: DC only when video_plane_only is set
// and exactly one video application runs. Conditions are also flipped in the
// middle of frames to check that a frame is never split. DRAM-bound pixels must
// carry consecutive addresses from fb_base for each frame.
module tb_dest_selector;
  import burstlink_pkg::*;

  localparam int FRAME_LEN = 16;
  localparam int N_FRAMES  = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic vpo; logic [3:0] napps; logic [31:0] fb_base;
  logic in_valid, in_ready, dc_valid, dc_ready, mem_valid, mem_ready;
  beat_t in_beat, dc_beat, mem_beat;
  logic [31:0] mem_addr;
  logic single_video, bypass_active;

  dest_selector dut (.clk, .rst_n, .video_plane_only(vpo), .num_video_apps(napps), .fb_base,
    .in_valid, .in_ready, .in_beat, .dc_valid, .dc_ready, .dc_beat,
    .mem_valid, .mem_ready, .mem_beat, .mem_addr, .single_video, .bypass_active);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int frame, beat_i;
  bit expect_dc;
  initial begin
    vpo = 0; napps = 0; fb_base = 32'h1000; in_valid = 0; in_beat = '0;
    dc_ready = 0; mem_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (frame = 0; frame < N_FRAMES; frame++) begin
      vpo   = $urandom_range(0, 1);
      napps = 4'($urandom_range(0, 3));
      fb_base = 32'h1000 * (frame + 1);
      expect_dc = vpo && (napps == 1);
      check(single_video == (napps == 1), "single_video flag");
      beat_i = 0;
      while (beat_i < FRAME_LEN) begin
        @(negedge clk);
        dc_ready  = $urandom_range(0, 3) != 0;
        mem_ready = $urandom_range(0, 3) != 0;
        if (beat_i > 2 && $urandom_range(0, 7) == 0) begin
          vpo = ~vpo; napps = 4'($urandom_range(0, 3));   // change mid-frame
        end
        in_valid = $urandom_range(0, 4) != 0;
        in_beat.sof = (beat_i == 0);
        in_beat.eof = (beat_i == FRAME_LEN - 1);
        in_beat.pix = pixel_t'(frame * 256 + beat_i);
        #1;
        if (in_valid) begin
          check(dc_valid == expect_dc && mem_valid == !expect_dc, $sformatf("route frame %0d beat %0d", frame, beat_i));
          check(in_ready == (expect_dc ? dc_ready : mem_ready), "ready follows selected output");
          if (!expect_dc) check(mem_addr == fb_base + 32'(beat_i), "DRAM address");
          check((expect_dc ? dc_beat : mem_beat) == in_beat, "beat forwarded");
        end else begin
          check(!dc_valid && !mem_valid, "no valid without input");
        end
        @(posedge clk);
        if (in_valid && in_ready) beat_i++;
      end
      @(negedge clk); in_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
