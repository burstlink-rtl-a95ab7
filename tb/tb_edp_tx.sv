// tb_edp_tx: self-checking test of the eDP transmitter and its pacing.
//
// Frames come from an always-ready source. Checked for each frame: the first
// link word is a header carrying the region, burst and selective flags; then
// every pixel in order with its frame marks; frame_sent pulses with the last.
// Rate: in burst mode the N pixels take exactly N cycles after the header; in
// paced mode they take N*RATE_DEN/RATE_NUM cycles (within two cycles), and at
// no point does the count of sent pixels run ahead of the credit
// t*RATE_NUM/RATE_DEN. Turning link_on off must freeze the transfer.
module tb_edp_tx;
  import burstlink_pkg::*;

  localparam int NUM = 113, DEN = 259;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic link_on, burst_en, selective, in_valid, in_ready, sending, frame_sent;
  region_t region; beat_t in_beat; link_word_t link;

  edp_tx #(.RATE_NUM(NUM), .RATE_DEN(DEN)) dut (.clk, .rst_n, .link_on, .burst_en, .selective,
    .region, .in_valid, .in_ready, .in_beat, .link, .sending, .frame_sent);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask
  initial begin
    #20000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int n, idx;
  // source: frame of n pixels, value = idx
  always_comb begin
    in_beat.pix = pixel_t'(idx * 7 + 3);
    in_beat.sof = (idx == 0);
    in_beat.eof = (idx == n - 1);
  end
  always @(posedge clk) if (in_valid && in_ready) idx <= idx + 1;

  task automatic run_frame(input bit burst, input int len, input bit gap_test);
    link_hdr_t h; beat_t b; int t, sent, hdr_seen, sent_pulses;
    n = len; idx = 0; burst_en = burst; selective = $urandom_range(0, 1);
    region = '{x: 13'($urandom_range(0, 9)), y: 13'($urandom_range(0, 9)), w: 13'(len), h: 13'd1};
    t = 0; sent = 0; hdr_seen = 0; sent_pulses = 0;
    @(negedge clk);
    in_valid = 1;
    while (sent < len) begin
      if (gap_test && sent == len / 2 && t > 0 && link_on) begin
        link_on = 0;
        repeat (20) begin
          #1 check(link.kind == LW_IDLE && !in_ready, "link_on=0 freezes the transfer");
          @(negedge clk);
        end
        link_on = 1;
      end
      #1;
      if (link.kind == LW_HDR) begin
        h = link_hdr_t'(link.payload);
        check(hdr_seen == 0 && sent == 0, "header only once, before pixels");
        check(h.burst == burst && h.selective == selective && h.region == region, "header fields");
        hdr_seen = 1;
      end else if (link.kind == LW_PIX) begin
        b = beat_t'(link.payload[$bits(beat_t)-1:0]);
        check(hdr_seen == 1, "pixel after header");
        check(b.pix == pixel_t'(sent * 7 + 3) && b.sof == (sent == 0) && b.eof == (sent == len - 1), "pixel order and marks");
        check(frame_sent == (sent == len - 1), "frame_sent with last pixel");
        if (frame_sent) sent_pulses++;
        sent++;
        if (!burst && !gap_test) check(longint'(sent) * DEN <= longint'(t + 1) * NUM + DEN, "paced: not ahead of credit");
      end
      if (hdr_seen) t++;
      @(negedge clk);
    end
    if (burst && !gap_test) check(t == len + 1, $sformatf("burst: %0d pixels in %0d cycles after header", len, t - 1));
    if (!burst && !gap_test) check((t - 1) >= (len * DEN) / NUM - 2 && (t - 1) <= (len * DEN) / NUM + 2,
                                   $sformatf("paced: %0d pixels in %0d cycles, expected %0d", len, t - 1, (len * DEN) / NUM));
    check(sent_pulses == 1, "one frame_sent");
    in_valid = 0;
    #1 check(!sending, "idle after frame");
  endtask

  initial begin
    link_on = 1; burst_en = 0; selective = 0; in_valid = 0; region = '0; n = 1; idx = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 10; k++) begin
      run_frame(1'b1, $urandom_range(1, 300), 1'b0);
      run_frame(1'b0, $urandom_range(1, 300), 1'b0);
    end
    run_frame(1'b1, 100, 1'b1);
    run_frame(1'b0, 100, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
