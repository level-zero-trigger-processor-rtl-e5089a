// burst_timer: the 40 MHz time base of the trigger processor.
//
// The start-of-burst (SOB) and end-of-burst (EOB) signals of the accelerator
// arrive asynchronously; each is synchronized with two flip-flops and its
// rising edge becomes a one-clock pulse. SOB clears the timestamp counter,
// which then counts master-clock periods (24.95 ns); it keeps counting after
// EOB so that triggers still waiting in the latency buffer are delivered.
// burst_active is high from SOB to EOB. The primitives' timestamps are taken
// to share this time base (counted from SOB).
// Timing: sob_pulse is high during the second clock after the clock edge that
// first samples SOB high; ts is 0 on the
// clock after sob_pulse.
module burst_timer
  import l0tp_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            sob_in,
  input  logic            eob_in,
  output logic            sob_pulse,
  output logic            eob_pulse,
  output logic            burst_active,
  output logic [TS_W-1:0] ts
);
  logic sob_s, eob_s, sob_d, eob_d;

  sync_ff u_sob (.clk, .rst_n, .d(sob_in), .q(sob_s));
  sync_ff u_eob (.clk, .rst_n, .d(eob_in), .q(eob_s));

  assign sob_pulse = sob_s && !sob_d;
  assign eob_pulse = eob_s && !eob_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sob_d        <= 1'b0;
      eob_d        <= 1'b0;
      burst_active <= 1'b0;
      ts           <= '0;
    end else begin
      sob_d <= sob_s;
      eob_d <= eob_s;
      if (sob_pulse)      burst_active <= 1'b1;
      else if (eob_pulse) burst_active <= 1'b0;
      ts <= sob_pulse ? '0 : ts + 1'b1;
    end
  end
endmodule
