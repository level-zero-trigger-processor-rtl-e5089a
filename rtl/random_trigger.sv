// random_trigger: pseudo-random triggers from a linear feedback shift register.
//
// Every rate_div clocks (40 MHz) after the programmable start point the
// 32-bit Galois LFSR (polynomial x^32 + x^22 + x^2 + x + 1, maximal length)
// produces a new number; if its LSB is 1 a TK_RANDOM trigger is issued with
// the current timestamp, otherwise nothing happens until the next number. The
// mean trigger rate is therefore 40 MHz / (2 * rate_div). rate_div = 0 stops
// the generator. The LFSR with the LSB test, the programmable generation rate
// and the start point follow the paper; the polynomial, the seed and the
// stepping of one LFSR shift per number are this design's choices.
// Interface: out_valid/out_trig registered, one clock after the timestamp ts.
module random_trigger
  import l0tp_pkg::*;
#(
  parameter logic [31:0] SEED = 32'hACE1_2468
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [TS_W-1:0] ts,
  input  logic            burst_active,
  input  logic [TS_W-1:0] start,
  input  logic [15:0]     rate_div,
  output logic            out_valid,
  output trig_t           out_trig
);
  localparam logic [31:0] TAPS = 32'h8020_0003;

  logic [31:0] lfsr, lfsr_nx;
  logic [15:0] div_cnt;
  logic        gen;

  assign lfsr_nx = lfsr[0] ? ((lfsr >> 1) ^ TAPS) : (lfsr >> 1);
  assign gen     = burst_active && (rate_div != '0) && (ts >= start) && (div_cnt == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr      <= SEED;
      div_cnt   <= '0;
      out_valid <= 1'b0;
      out_trig  <= '0;
    end else begin
      if (gen)               div_cnt <= rate_div - 1'b1;
      else if (div_cnt != 0) div_cnt <= div_cnt - 1'b1;
      if (gen) lfsr <= lfsr_nx;
      out_valid     <= gen && lfsr_nx[0];
      out_trig      <= '0;
      out_trig.kind <= TK_RANDOM;
      out_trig.ts   <= ts;
    end
  end
endmodule
