// nim_calib_trigger: trigger from the calorimeter's calibration NIM signal.
//
// The NIM level (already converted to a logic level outside) is synchronized
// with two flip-flops; on its rising edge the current internal timestamp is
// latched into a TK_CALIB_NIM trigger word, which then goes through the
// latency buffer like any other trigger. Following the paper; the
// synchronizer is this design's choice.
// Interface: out_valid/out_trig registered; out_trig.ts is the timestamp seen
// 3 clocks after the NIM edge (the synchronizer delay).
module nim_calib_trigger
  import l0tp_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            nim_in,
  input  logic            enable,
  input  logic [TS_W-1:0] ts,
  output logic            out_valid,
  output trig_t           out_trig
);
  logic nim_s, nim_d;

  sync_ff u_sync (.clk, .rst_n, .d(nim_in), .q(nim_s));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nim_d     <= 1'b0;
      out_valid <= 1'b0;
      out_trig  <= '0;
    end else begin
      nim_d         <= nim_s;
      out_valid     <= enable && nim_s && !nim_d;
      out_trig      <= '0;
      out_trig.kind <= TK_CALIB_NIM;
      out_trig.ts   <= ts;
    end
  end
endmodule
