// dc_fetch: the display controller's DRAM fetch engine (conventional path).
//
// When a frame sits in the DRAM frame buffer (start pulse), the engine reads it
// in chunks of CHUNK_WORDS pixels. A chunk is requested only while the DC
// buffer reports a free half (its "empty" signal), so every pixel of a chunk
// in flight has room; with CHUNK_WORDS equal to the buffer's half size the
// chunks line up with the halves. This is the conventional refresh loop: the
// system sits in C2 while a chunk is fetched (fetching=1) and drops to C8 while
// the buffer is full.
//
// Interface: read requests with valid/ready and a pixel address; responses
// come back in order, one per cycle at most (rsp_valid), and are forwarded as
// beats with start/end-of-frame marks to the DC buffer. The request/response
// split and in-order returns are this design's assumptions about the memory
// port. A start that arrives while a frame is still being fetched is held
// (one deep) and served when the current frame is done.
module dc_fetch
  import burstlink_pkg::*;
#(
  parameter int unsigned CHUNK_WORDS = 174762,
  parameter int unsigned ADDR_W      = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,          // a frame is ready in DRAM
  input  logic [ADDR_W-1:0] fb_base,
  input  logic [31:0]       frame_pixels,   // pixels in the frame (or window)
  input  logic              buf_empty,      // DC buffer has a free half
  // memory port
  output logic              req_valid,
  input  logic              req_ready,
  output logic [ADDR_W-1:0] req_addr,
  input  logic              rsp_valid,
  input  pixel_t            rsp_data,
  // to the DC buffer
  output logic              out_valid,
  input  logic              out_ready,
  output beat_t             out_beat,
  // status
  output logic              busy,           // a frame is being fetched
  output logic              fetching        // a chunk is in flight (DRAM path open)
);

  logic [31:0]       req_left;     // pixels of the frame not yet requested
  logic [31:0]       rsp_count;    // pixels of the frame returned so far
  logic [31:0]       chunk_left;   // requests left in the current chunk
  logic [31:0]       inflight;     // requested, not yet returned
  logic [ADDR_W-1:0] addr;
  logic [31:0]       npix;
  logic              pend_q;       // a start that arrived while busy
  logic [ADDR_W-1:0] pend_base;
  logic [31:0]       pend_npix;

  assign req_valid = busy && (chunk_left != 0);
  assign req_addr  = addr;
  assign fetching  = busy && ((chunk_left != 0) || (inflight != 0));

  assign out_valid    = rsp_valid;
  assign out_beat.pix = rsp_data;
  assign out_beat.sof = (rsp_count == 0);
  assign out_beat.eof = (rsp_count == npix - 1);

  logic req_fire;
  assign req_fire = req_valid && req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      req_left   <= '0;
      rsp_count  <= '0;
      chunk_left <= '0;
      inflight   <= '0;
      addr       <= '0;
      npix       <= '0;
      pend_q     <= 1'b0;
      pend_base  <= '0;
      pend_npix  <= '0;
    end else begin
      if (start && busy && frame_pixels != 0) begin
        pend_q    <= 1'b1;
        pend_base <= fb_base;
        pend_npix <= frame_pixels;
      end
      if (!busy && (pend_q || (start && frame_pixels != 0))) begin
        busy      <= 1'b1;
        req_left  <= pend_q ? pend_npix : frame_pixels;
        npix      <= pend_q ? pend_npix : frame_pixels;
        addr      <= pend_q ? pend_base : fb_base;
        rsp_count <= '0;
        if (pend_q && !start) pend_q <= 1'b0;
        if (pend_q && start) begin
          pend_base <= fb_base;
          pend_npix <= frame_pixels;
        end
      end else if (busy) begin
        // open a new chunk when the previous one is complete and a half is free
        if (chunk_left == 0 && inflight == 0 && buf_empty && req_left != 0) begin
          chunk_left <= (req_left < CHUNK_WORDS) ? req_left : CHUNK_WORDS;
        end else if (req_fire) begin
          chunk_left <= chunk_left - 1;
        end
        if (req_fire) begin
          addr     <= addr + 1'b1;
          req_left <= req_left - 1;
        end
        inflight <= inflight + 32'(req_fire) - 32'(rsp_valid);
        if (rsp_valid) begin
          rsp_count <= rsp_count + 1;
          if (out_beat.eof) busy <= 1'b0;
        end
      end
    end
  end

  a_room: assert property (@(posedge clk) disable iff (!rst_n) rsp_valid |-> out_ready);

endmodule
