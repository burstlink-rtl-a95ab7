// tb_dc_buffer: self-checking test of the DC double buffer.
//
// A random writer pushes frames of random length (shorter and longer than a
// half) and a random reader drains the buffer. Every beat read must equal the
// next beat written (order, pixel and frame marks). A reference model of the
// two halves (closed on BANK_WORDS beats or on an end-of-frame beat, freed
// when drained) predicts wr_ready, rd_valid, full and empty every cycle.
module tb_dc_buffer;
  import burstlink_pkg::*;

  localparam int BW = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_valid, wr_ready, rd_valid, rd_ready, full, empty;
  beat_t wr_beat, rd_beat;

  dc_buffer #(.BANK_WORDS(BW)) dut (.clk, .rst_n, .wr_valid, .wr_ready, .wr_beat,
    .rd_valid, .rd_ready, .rd_beat, .full, .empty);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask
  initial begin
    #5000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // reference model
  beat_t sb[$];
  int  m_cnt [2];     // beats in each closed half
  int  m_wcnt;        // beats written into the open half
  bit  m_full[2];
  bit  m_wsel, m_rsel;
  int  rd_in_bank;

  int frame_len, beat_i, frames_done, n_full_seen;
  initial begin
    wr_valid = 0; rd_ready = 0; wr_beat = '0;
    m_cnt = '{0, 0}; m_wcnt = 0; m_full = '{0, 0}; m_wsel = 0; m_rsel = 0; rd_in_bank = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    frame_len = $urandom_range(1, 3 * BW); beat_i = 0; frames_done = 0; n_full_seen = 0;
    while (frames_done < 60) begin
      @(negedge clk);
      wr_valid = $urandom_range(0, 3) != 0;
      // phases of slow and fast reading so the buffer both fills and drains
      rd_ready = ((frames_done / 5) % 2 == 0) ? ($urandom_range(0, 5) == 0) : ($urandom_range(0, 3) != 0);
      wr_beat.sof = (beat_i == 0);
      wr_beat.eof = (beat_i == frame_len - 1);
      wr_beat.pix = pixel_t'($urandom);
      #1;
      check(wr_ready == !m_full[m_wsel], $sformatf("wr_ready m_full=%0d%0d wsel=%0d rsel=%0d bf=%b ws=%0d rs=%0d rp=%0d", m_full[0], m_full[1], m_wsel, m_rsel, dut.bank_full, dut.w_sel, dut.r_sel, dut.r_ptr));
      check(rd_valid == m_full[m_rsel], "rd_valid");
      check(full == (m_full[0] && m_full[1]), "full");
      check(empty == !(m_full[0] && m_full[1]), "empty");
      if (full) n_full_seen++;
      if (rd_valid && rd_ready) begin
        check(sb.size() > 0 && rd_beat == sb[0], "read beat matches written order");
        if (sb.size() > 0) void'(sb.pop_front());
      end
      @(posedge clk);
      // update the model with what happened at this edge
      if (rd_valid && rd_ready) begin
        rd_in_bank++;
        if (rd_in_bank == m_cnt[m_rsel]) begin
          m_full[m_rsel] = 0; rd_in_bank = 0; m_rsel = !m_rsel;
        end
      end
      if (wr_valid && wr_ready) begin
        sb.push_back(wr_beat);
        m_wcnt++;
        if (wr_beat.eof || m_wcnt == BW) begin
          m_cnt[m_wsel] = m_wcnt; m_full[m_wsel] = 1; m_wsel = !m_wsel; m_wcnt = 0;
        end
        beat_i++;
        if (beat_i == frame_len) begin
          beat_i = 0; frames_done++; frame_len = $urandom_range(1, 3 * BW);
        end
      end
    end
    check(n_full_seen > 0, "buffer became full at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
