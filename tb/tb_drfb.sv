// tb_drfb: self-checking test of the double remote frame buffer.
//
// Keeps a reference model of both buffers and of which one is displayed. Runs
// random steps: paced writes (into both buffers), burst frames into the back
// buffer followed by frame_done, refresh-boundary swap requests, and reads of
// random addresses. Every read must return the model's front-buffer pixel one
// cycle later; a swap must happen exactly when a finished frame waits;
// overrun must flag a back-buffer write while a finished frame waits.
module tb_drfb;
  import burstlink_pkg::*;

  localparam int H = 8, V = 4, N = H * V, AW = $clog2(N);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_en, wr_both, frame_done, rd_en, swap_req, front, frame_ready, swapped, overrun;
  logic [AW-1:0] wr_addr, rd_addr; pixel_t wr_data, rd_data;

  drfb #(.H_RES(H), .V_RES(V)) dut (.clk, .rst_n, .wr_en, .wr_both, .wr_addr, .wr_data, .frame_done,
    .rd_en, .rd_addr, .rd_data, .swap_req, .front, .frame_ready, .swapped, .overrun);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask
  initial begin
    #5000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  pixel_t m [2][N];
  bit m_front, m_ready;
  int n_swaps, n_overrun;

  task automatic idle();
    wr_en = 0; wr_both = 0; frame_done = 0; rd_en = 0; swap_req = 0;
  endtask

  task automatic write_frame(input bit both);
    for (int a = 0; a < N; a++) begin
      @(negedge clk); idle();
      wr_en = 1; wr_both = both; wr_addr = AW'(a); wr_data = pixel_t'($urandom);
      frame_done = !both && (a == N - 1);
      m[!m_front][a] = wr_data; if (both) m[m_front][a] = wr_data;
      @(posedge clk); #1;
      if (!both && a == N - 1) m_ready = 1;
    end
    @(negedge clk); idle();
  endtask

  task automatic read_all();
    for (int a = 0; a < N; a++) begin
      @(negedge clk); idle(); rd_en = 1; rd_addr = AW'(a);
      @(posedge clk); #1;
      check(rd_data == m[m_front][a], $sformatf("read addr %0d", a));
    end
    @(negedge clk); idle();
  endtask

  task automatic do_swap();
    @(negedge clk); idle(); swap_req = 1;
    @(posedge clk); #1;
    check(swapped == m_ready, "swap exactly when a frame is ready");
    if (m_ready) begin m_front = !m_front; m_ready = 0; n_swaps++; end
    check(front == m_front && frame_ready == m_ready, "front/ready state");
    @(negedge clk); idle();
  endtask

  initial begin
    idle(); wr_addr = '0; wr_data = '0; rd_addr = '0;
    m_front = 0; m_ready = 0; n_swaps = 0; n_overrun = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    write_frame(1'b1);            // conventional update: both buffers
    read_all();
    do_swap();                    // nothing ready: self refresh
    for (int k = 0; k < 30; k++) begin
      int sel;
      sel = $urandom_range(0, 3);
      case (sel)
        0: write_frame(1'b1);
        1: if (!m_ready) write_frame(1'b0);
        2: do_swap();
        default: read_all();
      endcase
    end
    write_frame(1'b0); read_all(); do_swap(); read_all();
    // overrun: a second burst write while a finished frame waits
    write_frame(1'b0);
    @(negedge clk); wr_en = 1; wr_both = 0; wr_addr = '0; wr_data = 24'h123456;
    @(posedge clk); #1; check(overrun, "overrun flagged"); m[!m_front][0] = 24'h123456;
    @(negedge clk); idle();
    do_swap(); read_all();
    check(n_swaps >= 2, "several swaps exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
