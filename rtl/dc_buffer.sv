// dc_buffer: the display controller's double buffer.
//
// Two halves of BANK_WORDS pixels each. The writer (the decoder in bypass
// mode, or the DC's DRAM fetch in the conventional path) fills one half while
// the link transmitter drains the other. A half is closed for writing when it
// holds BANK_WORDS pixels or when an end-of-frame beat is written into it, and
// is handed to the reader; once the reader has drained it, it is free again.
//
//   full  - no half can take data: the writer is stalled (in bypass mode the
//           power manager then clock-gates the decoder, state C7').
//   empty - the DC's "buffer almost empty" notification: at least one half is
//           free, so a stalled writer can be woken. It rises when the reader
//           starts on the last filled half.
//
// Bank size default: one 512 KB chunk of 24-bit pixels (174762 pixels), the
// example chunk size the paper gives for DC fetches; the paper does not give
// the DC buffer size itself. Reads are asynchronous from the array (the read
// beat is valid in the cycle rd_valid is high); writes take one cycle.
module dc_buffer
  import burstlink_pkg::*;
#(
  parameter int unsigned BANK_WORDS = 174762
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  wr_valid,
  output logic  wr_ready,
  input  beat_t wr_beat,
  output logic  rd_valid,
  input  logic  rd_ready,
  output beat_t rd_beat,
  output logic  full,
  output logic  empty
);

  localparam int unsigned PTR_W = (BANK_WORDS > 1) ? $clog2(BANK_WORDS) : 1;

  beat_t            mem [2*BANK_WORDS];
  logic [1:0]       bank_full;          // half closed and waiting for / being read
  logic [PTR_W-1:0] bank_len [2];       // pixels in a closed half
  logic             w_sel, r_sel;
  logic [PTR_W-1:0] w_ptr, r_ptr;

  function automatic int unsigned idx(input logic sel, input logic [PTR_W-1:0] ptr);
    return (sel ? BANK_WORDS : 0) + int'(ptr);
  endfunction

  assign wr_ready = !bank_full[w_sel];
  assign rd_valid = bank_full[r_sel];
  assign rd_beat  = mem[idx(r_sel, r_ptr)];
  assign full     = bank_full[0] && bank_full[1];
  assign empty    = !full;

  logic wr_fire, rd_fire, wr_close, rd_done;
  assign wr_fire  = wr_valid && wr_ready;
  assign rd_fire  = rd_valid && rd_ready;
  assign wr_close = wr_fire && (wr_beat.eof || (int'(w_ptr) == BANK_WORDS-1));
  assign rd_done  = rd_fire && (r_ptr == bank_len[r_sel]);

  always_ff @(posedge clk) begin
    if (wr_fire) mem[idx(w_sel, w_ptr)] <= wr_beat;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bank_full <= 2'b00;
      bank_len  <= '{default: '0};
      w_sel     <= 1'b0;
      r_sel     <= 1'b0;
      w_ptr     <= '0;
      r_ptr     <= '0;
    end else begin
      if (wr_fire) begin
        if (wr_close) begin
          w_ptr           <= '0;
          w_sel           <= !w_sel;
          bank_len[w_sel] <= w_ptr;           // index of the last pixel
        end else begin
          w_ptr <= w_ptr + 1'b1;
        end
      end
      if (rd_fire) begin
        if (rd_done) begin
          r_ptr <= '0;
          r_sel <= !r_sel;
        end else begin
          r_ptr <= r_ptr + 1'b1;
        end
      end
      // Close and free the halves; both may happen in one cycle on different halves.
      for (int b = 0; b < 2; b++) begin
        if (wr_close && (w_sel == b[0]))      bank_full[b] <= 1'b1;
        else if (rd_done && (r_sel == b[0]))  bank_full[b] <= 1'b0;
      end
    end
  end

  // A closed half is never written and never re-closed before it is read.
  a_no_write_full: assert property (@(posedge clk) disable iff (!rst_n) wr_close |-> !bank_full[w_sel]);

endmodule
