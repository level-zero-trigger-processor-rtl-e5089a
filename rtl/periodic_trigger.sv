// periodic_trigger: two independent periodic trigger flows.
//
// Flow k fires at every timestamp t with start[k] <= t <= stop[k] and
// (t - start[k]) a multiple of period[k], timestamps counted in 40 MHz periods
// from start of burst. A period of 0 disables the flow. Implemented with a
// down-counter per flow, reloaded with period-1 on each trigger, so no divider
// is needed. When both fire in the same clock flow 0 is offered first and
// flow 1 on the next clock (one trigger per clock leaves the block).
// Two flows with their own period, start and end follow the paper; the
// same-clock rule is this design's choice.
// Interface: out_valid/out_trig registered, one clock after the timestamp ts.
module periodic_trigger
  import l0tp_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            sob,
  input  logic [TS_W-1:0] ts,
  input  logic [TS_W-1:0] period [2],
  input  logic [TS_W-1:0] start  [2],
  input  logic [TS_W-1:0] stop   [2],
  output logic            out_valid,
  output trig_t           out_trig
);
  logic [TS_W-1:0] cnt [2];
  logic [1:0]      fire;
  logic            pend1;   // flow 1 waiting behind flow 0
  logic [TS_W-1:0] pend1_ts;

  always_comb begin
    for (int k = 0; k < 2; k++)
      fire[k] = !sob && (period[k] != '0) && (ts >= start[k]) && (ts <= stop[k]) && (cnt[k] == '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt[0]    <= '0;
      cnt[1]    <= '0;
      pend1     <= 1'b0;
      pend1_ts  <= '0;
      out_valid <= 1'b0;
      out_trig  <= '0;
    end else begin
      for (int k = 0; k < 2; k++) begin
        if (sob || ts < start[k]) cnt[k] <= '0;
        else if (cnt[k] == '0)    cnt[k] <= period[k] - 1'b1;
        else                      cnt[k] <= cnt[k] - 1'b1;
      end
      out_valid <= fire[0] || fire[1] || pend1;
      out_trig  <= '0;
      if (fire[0]) begin
        out_trig.kind <= TK_PERIODIC0;
        out_trig.ts   <= ts;
        pend1         <= fire[1] || pend1;
        if (fire[1]) pend1_ts <= ts;
      end else if (pend1) begin
        out_trig.kind <= TK_PERIODIC1;
        out_trig.ts   <= pend1_ts;
        pend1         <= fire[1];
        if (fire[1]) pend1_ts <= ts;
      end else if (fire[1]) begin
        out_trig.kind <= TK_PERIODIC1;
        out_trig.ts   <= ts;
      end
    end
  end
endmodule
