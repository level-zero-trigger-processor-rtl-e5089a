// latency_buffer: the fixed-latency circular buffer of the output stage.
//
// Every trigger is written into a 2^AW-slot RAM at the address given by the
// low AW bits of its timestamp, so the buffer stays sorted in time no matter
// in which order triggers arrive. The burst timer counts 40 MHz periods from
// start of burst; while it is below latency the read pointer is idle, after
// that it reads one slot per clock, slot X at time X + latency. A slot whose
// stored trigger has the full timestamp being read out is delivered on out_*
// and then cleared. With AW = 16 the buffer spans 65536 periods (1.6 ms), so
// any latency up to 1 ms can be set.
// Writers: K request ports in priority order (port 0 highest), one write per
// clock; in_grant[k] says port k was written this clock. A trigger whose slot
// has already been read (it came later than the latency allows) is dropped
// and counted in n_late; two triggers with one timestamp share a slot and the
// later one wins. After reset the RAM is swept clear (busy, 2^AW clocks).
// The addressing, the idle pointer and the X + latency read follow the paper;
// the clearing, the late check and the write arbitration are this design's.
// Timing: out_valid/out_trig one clock after the pointer reaches the slot.
module latency_buffer
  import l0tp_pkg::*;
#(
  parameter int AW = l0tp_pkg::LAT_AW,
  parameter int K  = 5
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            sob,
  input  logic [TS_W-1:0] ts,          // burst timer
  input  logic [AW-1:0]   latency,     // in 40 MHz periods
  input  logic [K-1:0]    in_valid,
  input  trig_t           in_trig [K],
  output logic [K-1:0]    in_grant,
  output logic            out_valid,
  output trig_t           out_trig,
  output logic            busy,
  output logic [15:0]     n_late
);
  trig_t           mem [2**AW];
  logic [AW-1:0]   clr_addr;
  logic            seen_sob, rd_active, rd_d;
  logic [TS_W-1:0] rd_ts, rd_ts_d;
  trig_t           rd_q;
  logic            wr_en, late;
  trig_t           wr_trig;
  logic [K-1:0]    grant;
  logic            out_valid_nx_q;  // slot just read holds a current trigger

  assign rd_active = seen_sob && !busy && (ts >= TS_W'(latency));
  assign rd_ts     = ts - TS_W'(latency);

  // Fixed-priority choice of one writer.
  always_comb begin
    grant   = '0;
    wr_trig = '0;
    for (int k = K-1; k >= 0; k--) begin
      if (in_valid[k]) begin
        grant   = '0;
        grant[k] = 1'b1;
        wr_trig = in_trig[k];
      end
    end
    if (busy) grant = '0;
  end
  assign in_grant = grant;
  // Late: the read pointer has already passed (or is on) the trigger's slot.
  assign late  = rd_active && ($signed(rd_ts - wr_trig.ts) >= 0);
  assign wr_en = (grant != '0) && !late;

  always_ff @(posedge clk) begin
    if (busy)      mem[clr_addr]             <= '0;
    else begin
      if (rd_d && out_valid_nx_q) mem[rd_ts_d[AW-1:0]] <= '0;
      if (wr_en)   mem[wr_trig.ts[AW-1:0]]   <= wr_trig;
    end
    if (rd_active) rd_q <= mem[rd_ts[AW-1:0]];
  end

  assign out_valid_nx_q = (rd_q.kind != TK_NONE) && (rd_q.ts == rd_ts_d);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b1;
      clr_addr <= '0;
      seen_sob <= 1'b0;
      rd_d     <= 1'b0;
      rd_ts_d  <= '0;
      n_late   <= '0;
    end else begin
      if (busy) begin
        clr_addr <= clr_addr + 1'b1;
        if (clr_addr == '1) busy <= 1'b0;
      end
      if (sob) seen_sob <= 1'b1;
      rd_d    <= rd_active;
      rd_ts_d <= rd_ts;
      if ((grant != '0) && late) n_late <= n_late + 1'b1;
    end
  end

  assign out_valid = rd_d && out_valid_nx_q;
  assign out_trig  = rd_q;
endmodule
