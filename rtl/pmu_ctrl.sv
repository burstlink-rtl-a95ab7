// pmu_ctrl: power-management sequencer for the display path.
//
// Tracks the package C-state through each frame window (one panel refresh,
// started by vsync) and drives the enables the paper's power-management
// firmware changes call for:
//   - Frame Buffer Bypass: after the driver's orchestration in C0 the decoder
//     streams into the DC buffer in C7. When the DC buffer is full the decoder
//     is halted and clock-gated (C7'); when the DC signals "empty" (a half is
//     free) the PMU pulses wakeup and the decoder resumes (back to C7).
//   - Once the whole frame has left over the link the system enters C9: DC,
//     eDP link and decoder off, the panel refreshes from the DRFB.
//   - A window without a new frame (every other window of 30 FPS video on a
//     60 Hz panel) goes from the short C0 straight to C9; the decoder
//     clock stays off in that C0, as only the CPU's orchestration runs.
//   - Conventional (DRAM) path, used when bypass is not allowed: decode in C0,
//     then C2 while the DC fetches a chunk from DRAM and C8 while its buffer is
//     full, until the frame has been sent; then C9.
// The state meanings follow the paper's Table 1 and timelines (Figs. 3, 6,
// 7). The exact transition conditions, their encoding as inputs, and that
// the panel's vsync opens the frame window are this design's choices.
//
// Outputs are registered. residency[i] counts cycles spent in state i (order
// of cstate_e), like the processor's residency counters.
module pmu_ctrl
  import burstlink_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        window_start,    // frame window opens (panel vsync)
  input  logic        frame_due,       // a new decoded frame is due in this window (sampled at window_start)
  input  logic        orch_done,       // driver orchestration finished (pulse)
  input  logic        bypass,          // decoder output goes straight to the DC
  input  logic        vd_frame_done,   // decoder finished a frame into DRAM (conventional path)
  input  logic        dc_full,
  input  logic        dc_empty,
  input  logic        dc_fetching,     // DC DRAM fetch in flight
  input  logic        tx_sending,      // link transfer in progress
  input  logic        frame_sent,      // last pixel left over the link
  output cstate_e     cstate,
  output logic        vd_clk_en,       // decoder clock (off in C7', C2, C8, C9)
  output logic        wakeup,          // pulse: wake the halted decoder
  output logic        dram_active,     // DRAM out of self-refresh (C0, C2)
  output logic        link_on,         // DC and eDP powered
  output logic [N_CSTATES-1:0][31:0] residency,
  output logic [31:0] halt_count,      // C7 -> C7' transitions
  output logic [31:0] wake_count       // C7' -> C7 transitions
);

  logic due_q, orch_q, vd_done_q, sent_q, carry_q;

  // Events of this window, latched so that their order relative to the state does not matter.
  logic orch_seen, vd_done_seen, sent_seen;
  assign orch_seen    = orch_q    || orch_done;
  assign vd_done_seen = vd_done_q || vd_frame_done;
  assign sent_seen    = sent_q    || (frame_sent && !carry_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cstate     <= PC9;
      due_q      <= 1'b0;
      orch_q     <= 1'b0;
      vd_done_q  <= 1'b0;
      sent_q     <= 1'b0;
      carry_q    <= 1'b0;
      wakeup     <= 1'b0;
      residency  <= '0;
      halt_count <= '0;
      wake_count <= '0;
    end else begin
      wakeup <= 1'b0;
      residency[cstate] <= residency[cstate] + 1;
      if (window_start) begin
        cstate    <= PC0;
        due_q     <= frame_due;
        orch_q    <= 1'b0;
        vd_done_q <= 1'b0;
        sent_q    <= 1'b0;
        // a transfer still running belongs to the previous window
        carry_q   <= tx_sending && !frame_sent;
      end else begin
        orch_q    <= orch_seen;
        vd_done_q <= vd_done_seen;
        sent_q    <= sent_seen;
        if (frame_sent) carry_q <= 1'b0;
        unique case (cstate)
          PC0: if (orch_seen) begin
                 if (!due_q)                   cstate <= PC9;
                 else if (bypass)              cstate <= PC7;
                 else if (vd_done_seen)        cstate <= PC2;
               end
          PC7: if (sent_seen)                  cstate <= PC9;
               else if (dc_full) begin
                 cstate     <= PC7P;
                 halt_count <= halt_count + 1;
               end
          PC7P: if (sent_seen)                 cstate <= PC9;
                else if (dc_empty) begin
                  cstate     <= PC7;
                  wakeup     <= 1'b1;
                  wake_count <= wake_count + 1;
                end
          PC2: if (sent_seen)                  cstate <= PC9;
               else if (!dc_fetching && dc_full) cstate <= PC8;
          PC8: if (sent_seen)                  cstate <= PC9;
               else if (dc_fetching)           cstate <= PC2;
          PC9: ;
          default:                             cstate <= PC9;
        endcase
      end
    end
  end

  assign vd_clk_en   = (cstate == PC0 && due_q) || (cstate == PC7);
  assign dram_active = (cstate == PC0) || (cstate == PC2);
  assign link_on     = (cstate != PC9) || tx_sending;

endmodule
