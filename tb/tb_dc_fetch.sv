// tb_dc_fetch: self-checking test of the DC's DRAM fetch engine.
//
// The engine reads frames from a DRAM model (random request stalls, in-order
// responses after a random 1-6 cycle latency) into a real DC double buffer
// that a random reader drains. Checked: request addresses run from fb_base
// through the whole frame; the beats that leave the buffer are the DRAM
// contents in order with correct start/end-of-frame marks; a chunk is only
// opened while the buffer has a free half (no response ever finds the buffer
// full, which the engine's assertion also watches); the number of chunk
// openings is ceil(frame/CHUNK).
module tb_dc_fetch;
  import burstlink_pkg::*;

  localparam int CH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0; logic [31:0] fb_base = 0, frame_pixels = 0;
  logic buf_empty, req_valid, req_ready, rsp_valid, out_valid, out_ready, busy, fetching;
  logic [31:0] req_addr; pixel_t rsp_data; beat_t out_beat;
  logic rd_valid, rd_ready, full; beat_t rd_beat;

  dc_fetch #(.CHUNK_WORDS(CH)) dut (.clk, .rst_n, .start, .fb_base, .frame_pixels, .buf_empty,
    .req_valid, .req_ready, .req_addr, .rsp_valid, .rsp_data, .out_valid, .out_ready, .out_beat,
    .busy, .fetching);
  dc_buffer #(.BANK_WORDS(CH)) u_buf (.clk, .rst_n, .wr_valid(out_valid), .wr_ready(out_ready),
    .wr_beat(out_beat), .rd_valid, .rd_ready, .rd_beat, .full, .empty(buf_empty));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask
  initial begin
    #5000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic pixel_t dram(input logic [31:0] a);
    return pixel_t'(a * 32'h9E3779B1 + 32'h1234);
  endfunction

  // DRAM model: in-order responses, each after a random latency
  logic [31:0] pend_addr[$]; int pend_due[$]; int cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (req_valid && req_ready) begin
      pend_addr.push_back(req_addr);
      pend_due.push_back(cyc + $urandom_range(1, 6));
    end
  end
  always @(negedge clk) begin
    req_ready = $urandom_range(0, 3) != 0;
    rsp_valid = 0; rsp_data = '0;
    if (pend_addr.size() > 0 && pend_due[0] <= cyc) begin
      rsp_valid = 1; rsp_data = dram(pend_addr[0]);
      void'(pend_addr.pop_front()); void'(pend_due.pop_front());
    end
    rd_ready = $urandom_range(0, 2) == 0;
  end

  // request address and chunk-opening checks
  logic [31:0] exp_req; int chunk_opens; bit prev_fetching;
  always @(posedge clk) if (rst_n) begin
    if (req_valid && req_ready) begin
      check(req_addr == exp_req, "request address sequential");
      exp_req <= exp_req + 1;
    end
    if (fetching && !prev_fetching) begin
      chunk_opens++;
      check(buf_empty, "chunk opened only with a free half");
    end
    prev_fetching <= fetching;
  end

  // output check
  logic [31:0] exp_rd; int rd_count;
  always @(posedge clk) if (rst_n && rd_valid && rd_ready) begin
    check(rd_beat.pix == dram(exp_rd), "pixel from DRAM in order");
    check(rd_beat.sof == (rd_count == 0), "sof mark");
    check(rd_beat.eof == (rd_count == int'(frame_pixels) - 1), "eof mark");
    exp_rd <= exp_rd + 1; rd_count <= rd_count + 1;
  end

  initial begin
    prev_fetching = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int f = 0; f < 12; f++) begin
      @(negedge clk);
      fb_base = 32'h100 * f + 32'h40; frame_pixels = 32'($urandom_range(1, 5 * CH));
      exp_req = fb_base; exp_rd = fb_base; rd_count = 0; chunk_opens = 0;
      start = 1; @(negedge clk); start = 0;
      check(busy, "busy after start");
      wait (rd_count == int'(frame_pixels));
      @(negedge clk);
      check(!busy && !fetching, "idle after frame");
      check(exp_req == fb_base + frame_pixels, "whole frame requested");
      check(chunk_opens == (int'(frame_pixels) + CH - 1) / CH,
            $sformatf("chunk count %0d for %0d pixels", chunk_opens, frame_pixels));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
