// trigger_dispatcher: last stage before the detectors and the PC farm.
//
// Triggers leaving the latency buffer (in_*) are delivered on l0_* unless
//   - a choke or error is active: the chokes and errors of the detectors
//     (NDET asynchronous levels, each synchronized with two flip-flops and
//     enabled by choke_mask/error_mask) suspend all normal triggers;
//   - autochoke is active: the triggers offered in each window of ac_window
//     clocks are counted; once the count passes ac_max (the 1 MHz budget,
//     e.g. 100 per 4000 clocks) dispatching stops until a window ends within
//     budget;
//   - the previous trigger left fewer than MIN_GAP clocks ago (75 ns = 3
//     clocks, the time the trigger distribution needs per trigger).
// The start and the end of a choke, of an error and of autochoke are each
// announced at once, without latency, by a special trigger (TK_CHOKE_ON ...
// TK_AUTOCHOKE_OFF) stamped with the current time; specials have priority and
// wait, rather than being dropped, if the MIN_GAP spacing is not yet met.
// Dropped normal triggers are counted by cause.
// Inhibition, immediate specials, the 3-clock spacing and autochoke follow
// the paper; the window-count rate measure and dropping (not delaying) a
// normal trigger that comes too soon are this design's choices. The
// acknowledgement of special triggers by the detectors is not modelled.
// Timing: l0_valid/l0_trig registered, one clock after in_valid.
module trigger_dispatcher
  import l0tp_pkg::*;
#(
  parameter int ND      = l0tp_pkg::NDET,
  parameter int MIN_GAP = 3
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [TS_W-1:0] ts,
  input  logic [ND-1:0]   choke_in,
  input  logic [ND-1:0]   error_in,
  input  logic [ND-1:0]   choke_mask,
  input  logic [ND-1:0]   error_mask,
  input  logic [15:0]     ac_window,
  input  logic [15:0]     ac_max,
  input  logic            in_valid,
  input  trig_t           in_trig,
  output logic            l0_valid,
  output trig_t           l0_trig,
  output logic            choke_active,
  output logic            error_active,
  output logic            autochoke_active,
  output logic [15:0]     n_drop_inhibit,
  output logic [15:0]     n_drop_deadtime
);
  logic [ND-1:0]   choke_s, error_s;
  logic            choke_now, error_now, ac_now;
  logic [5:0]      pend;        // special triggers waiting: one bit per kind
  logic [15:0]     win_cnt, win_trig;
  logic            sent_any;
  logic [TS_W-1:0] last_ts;
  logic            gap_ok, inhibit;
  trig_kind_e      spec_kind;
  logic [5:0]      spec_bit;

  for (genvar d = 0; d < ND; d++) begin : g_sync
    sync_ff u_c (.clk, .rst_n, .d(choke_in[d]), .q(choke_s[d]));
    sync_ff u_e (.clk, .rst_n, .d(error_in[d]), .q(error_s[d]));
  end
  assign choke_now = |(choke_s & choke_mask);
  assign error_now = |(error_s & error_mask);
  assign ac_now    = autochoke_active;

  assign gap_ok  = !sent_any || ((ts - last_ts) >= TS_W'(MIN_GAP));
  assign inhibit = choke_active || error_active || autochoke_active;

  // Highest-priority pending special: bit order choke on/off, error on/off,
  // autochoke on/off.
  always_comb begin
    spec_kind = TK_NONE;
    spec_bit  = '0;
    for (int b = 5; b >= 0; b--) begin
      if (pend[b]) begin
        spec_kind = trig_kind_e'(int'(TK_CHOKE_ON) + b);
        spec_bit  = 6'(1) << b;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      choke_active     <= 1'b0;
      error_active     <= 1'b0;
      autochoke_active <= 1'b0;
      pend             <= '0;
      win_cnt          <= '0;
      win_trig         <= '0;
      sent_any         <= 1'b0;
      last_ts          <= '0;
      l0_valid         <= 1'b0;
      l0_trig          <= '0;
      n_drop_inhibit   <= '0;
      n_drop_deadtime  <= '0;
    end else begin
      logic [5:0] pend_nx;
      pend_nx = pend;
      // Condition changes raise a special trigger.
      choke_active <= choke_now;
      error_active <= error_now;
      if (choke_now && !choke_active) pend_nx[0] = 1'b1;
      if (!choke_now && choke_active) pend_nx[1] = 1'b1;
      if (error_now && !error_active) pend_nx[2] = 1'b1;
      if (!error_now && error_active) pend_nx[3] = 1'b1;

      // Autochoke: count offered triggers per window.
      if (win_cnt + 1'b1 >= ac_window) begin
        win_cnt  <= '0;
        win_trig <= '0;
        if (ac_now && win_trig <= ac_max) begin
          autochoke_active <= 1'b0;
          pend_nx[5]       = 1'b1;
        end
      end else begin
        win_cnt <= win_cnt + 1'b1;
        if (in_valid) win_trig <= win_trig + 1'b1;
        if (!ac_now && in_valid && (win_trig + 1'b1 > ac_max) && ac_window != '0) begin
          autochoke_active <= 1'b1;
          pend_nx[4]       = 1'b1;
        end
      end

      // Output: a pending special first, otherwise the buffered trigger.
      l0_valid <= 1'b0;
      if (pend != '0 && gap_ok) begin
        l0_valid      <= 1'b1;
        l0_trig       <= '0;
        l0_trig.kind  <= spec_kind;
        l0_trig.ts    <= ts;
        sent_any      <= 1'b1;
        last_ts       <= ts;
        pend_nx       = pend_nx & ~spec_bit;
        if (in_valid) n_drop_deadtime <= n_drop_deadtime + 1'b1;
      end else if (in_valid) begin
        if (inhibit) begin
          n_drop_inhibit <= n_drop_inhibit + 1'b1;
        end else if (!gap_ok) begin
          n_drop_deadtime <= n_drop_deadtime + 1'b1;
        end else begin
          l0_valid <= 1'b1;
          l0_trig  <= in_trig;
          sent_any <= 1'b1;
          last_ts  <= ts;
        end
      end
      pend <= pend_nx;
    end
  end
endmodule
