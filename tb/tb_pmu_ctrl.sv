// tb_pmu_ctrl: self-checking test of the power-management sequencer.
//
// Drives the event inputs through the frame-window scenarios of the design
// and checks the C-state after each event with the enables it implies:
//   bypass window:       C0 -> C7 -> C7' (buffer full) -> C7 with a wakeup
//                        pulse (buffer empty) ... -> C9 (frame sent)
//   window with no frame: C0 -> C9
//   conventional window: C0 (decode) -> C2 -> C8 (buffer full) -> C2 (fetch)
//                        -> C9 (frame sent)
//   a transfer still running at the window start is not taken for this
//   window's frame.
// The residency counters must add up to the cycles simulated and match the
// cycles this test spent in each state.
module tb_pmu_ctrl;
  import burstlink_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic window_start, frame_due, orch_done, bypass, vd_frame_done, dc_full, dc_empty, dc_fetching;
  logic tx_sending, frame_sent, vd_clk_en, wakeup, dram_active, link_on;
  cstate_e cstate;
  logic [N_CSTATES-1:0][31:0] residency;
  logic [31:0] halt_count, wake_count;

  pmu_ctrl dut (.clk, .rst_n, .window_start, .frame_due, .orch_done, .bypass, .vd_frame_done,
    .dc_full, .dc_empty, .dc_fetching, .tx_sending, .frame_sent, .cstate, .vd_clk_en, .wakeup,
    .dram_active, .link_on, .residency, .halt_count, .wake_count);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (state %s) @%0t", msg, cstate.name(), $time); end
  endtask
  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int my_res [N_CSTATES]; int cycles;
  always @(posedge clk) if (rst_n) begin my_res[cstate]++; cycles++; end

  task automatic clear();
    window_start = 0; orch_done = 0; vd_frame_done = 0; frame_sent = 0;
  endtask
  // apply one cycle of inputs, then check the state that results
  bit win_due;   // a frame is due in the current window
  task automatic step(input string ev, input cstate_e exp);
    if (window_start) win_due = frame_due;
    @(posedge clk); #1;
    check(cstate == exp, $sformatf("%s: expected %s", ev, exp.name()));
    check(vd_clk_en == ((exp == PC0 && win_due) || exp == PC7), "decoder clock enable");
    check(dram_active == (exp == PC0 || exp == PC2), "DRAM active only in C0/C2");
    @(negedge clk); clear();
  endtask

  initial begin
    int h0, w0;
    clear(); frame_due = 0; bypass = 0; dc_full = 0; dc_empty = 1; dc_fetching = 0; tx_sending = 0;
    win_due = 0; cycles = 0; for (int i = 0; i < N_CSTATES; i++) my_res[i] = 0;
    repeat (2) @(posedge clk); @(negedge clk); rst_n = 1;
    // ---- Frame Buffer Bypass window ----
    bypass = 1; frame_due = 1;
    window_start = 1; step("window start", PC0);
    repeat (3) step("orchestration", PC0);
    orch_done = 1; step("orchestration done, bypass", PC7);
    h0 = int'(halt_count); w0 = int'(wake_count);
    for (int k = 0; k < 3; k++) begin
      tx_sending = 1;
      dc_full = 1; dc_empty = 0; step("DC buffer full", PC7P);
      step("still full", PC7P);
      dc_full = 0; dc_empty = 1;
      @(posedge clk); #1;
      check(cstate == PC7 && wakeup, "empty: wakeup pulse and back to C7");
      @(posedge clk); #1;
      check(!wakeup, "wakeup is a single pulse");
      @(negedge clk);
    end
    check(int'(halt_count) - h0 == 3 && int'(wake_count) - w0 == 3, "halt/wake counters");
    frame_sent = 1; step("frame sent", PC9);
    tx_sending = 0;
    #1 check(!link_on, "link off in C9");
    repeat (5) step("idle", PC9);
    // ---- window without a new frame (30 FPS on 60 Hz) ----
    frame_due = 0; window_start = 1; step("window start", PC0);
    orch_done = 1; step("no frame: straight to C9", PC9);
    // ---- conventional window ----
    bypass = 0; frame_due = 1; window_start = 1; step("window start", PC0);
    orch_done = 1; step("orchestration done, decoding", PC0);
    repeat (2) step("decoding into DRAM", PC0);
    vd_frame_done = 1; dc_fetching = 1; tx_sending = 1; step("decoded: fetch", PC2);
    dc_fetching = 0; dc_full = 1; dc_empty = 0; step("buffer full", PC8);
    check(link_on, "link on in C8");
    dc_full = 0; dc_empty = 1; dc_fetching = 1; step("next chunk", PC2);
    dc_fetching = 0; dc_full = 1; step("buffer full", PC8);
    frame_sent = 1; tx_sending = 0; step("frame sent", PC9);
    // ---- transfer crossing the window boundary ----
    dc_full = 0; dc_empty = 1;
    bypass = 1; frame_due = 1; tx_sending = 1; window_start = 1; step("window start while sending", PC0);
    orch_done = 1; step("orchestration", PC7);
    frame_sent = 1; step("previous window's frame ends: stay", PC7);
    frame_sent = 1; step("this window's frame sent", PC9);
    tx_sending = 0;
    @(posedge clk); #1;
    for (int i = 0; i < N_CSTATES; i++)
      check(int'(residency[i]) == my_res[i], $sformatf("residency[%0d] %0d vs %0d", i, residency[i], my_res[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
