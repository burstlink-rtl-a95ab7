// tb_edp_rx: self-checking test of the T-con eDP receiver.
//
// Sends random updates (full panel or a random window, burst or paced, with
// idle words in between) as link words and checks every DRFB write against
// the address (y0+row)*H_RES + x0+col worked out here, the pixel value, and
// wr_both = not burst. frame_done must pulse once at the end of a burst
// update only, update_done at the end of every update, and a pixel word
// outside an update must raise rx_error.
module tb_edp_rx;
  import burstlink_pkg::*;

  localparam int H = 16, V = 8, AW = $clog2(H * V);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  link_word_t link;
  logic wr_en, wr_both, frame_done, update_done, selective_q, rx_error;
  logic [AW-1:0] wr_addr; pixel_t wr_data;

  edp_rx #(.H_RES(H), .V_RES(V)) dut (.clk, .rst_n, .link, .wr_en, .wr_both, .wr_addr, .wr_data,
    .frame_done, .update_done, .selective_q, .rx_error);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask
  initial begin
    #5000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // expected writes
  int exp_addr[$]; pixel_t exp_data[$]; bit exp_both[$];
  int n_done, n_upd, n_err;
  always @(posedge clk) if (rst_n) begin
    if (wr_en) begin
      check(exp_addr.size() > 0, "unexpected write");
      if (exp_addr.size() > 0) begin
        check(int'(wr_addr) == exp_addr[0] && wr_data == exp_data[0] && wr_both == exp_both[0],
              $sformatf("write addr %0d exp %0d", wr_addr, exp_addr[0]));
        void'(exp_addr.pop_front()); void'(exp_data.pop_front()); void'(exp_both.pop_front());
      end
    end
    if (frame_done) n_done++;
    if (update_done) n_upd++;
    if (rx_error) n_err++;
  end

  task automatic send(input link_kind_e k, input logic [LINK_PAYLOAD_W-1:0] p);
    @(negedge clk); link.kind = k; link.payload = p;
    @(negedge clk); link = '{kind: LW_IDLE, payload: '0};
    if ($urandom_range(0, 3) == 0) @(negedge clk);
  endtask

  initial begin
    link_hdr_t h; beat_t b; int x0, y0, w, hh, d0, u0;
    link = '{kind: LW_IDLE, payload: '0};
    n_done = 0; n_upd = 0; n_err = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int u = 0; u < 40; u++) begin
      h.selective = $urandom_range(0, 1);
      h.burst = $urandom_range(0, 1);
      if (h.selective) begin
        x0 = $urandom_range(0, H - 1); y0 = $urandom_range(0, V - 1);
        w = $urandom_range(1, H - x0); hh = $urandom_range(1, V - y0);
      end else begin
        x0 = 0; y0 = 0; w = H; hh = V;
      end
      h.region = '{x: 13'(x0), y: 13'(y0), w: 13'(w), h: 13'(hh)};
      d0 = n_done; u0 = n_upd;
      send(LW_HDR, h);
      for (int r = 0; r < hh; r++)
        for (int c = 0; c < w; c++) begin
          b.pix = pixel_t'($urandom); b.sof = (r == 0 && c == 0); b.eof = (r == hh - 1 && c == w - 1);
          exp_addr.push_back((y0 + r) * H + x0 + c); exp_data.push_back(b.pix); exp_both.push_back(!h.burst);
          send(LW_PIX, LINK_PAYLOAD_W'(b));
        end
      repeat (2) @(negedge clk);
      check(exp_addr.size() == 0, "all pixels written");
      check(n_done - d0 == (h.burst ? 1 : 0), "frame_done only for burst updates");
      check(n_upd - u0 == 1, "update_done once");
      check(selective_q == h.selective, "selective flag");
    end
    check(n_err == 0, "no error in normal traffic");
    b = '0; send(LW_PIX, LINK_PAYLOAD_W'(b));
    @(negedge clk);
    check(n_err == 1, "orphan pixel flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
