// tb_latency_buffer: triggers written out of time order must come out sorted,
// each exactly `latency` clocks after its timestamp; the read pointer must be
// idle until the latency is reached; a trigger already passed by the pointer
// is counted late; and port 0 wins over port 1 in the same clock.
`include "tb_util.svh"
module tb_latency_buffer;
  import l0tp_pkg::*;
  localparam int AW = 8, K = 2;
  logic clk = 0, rst_n = 0;
  always #12.5 clk = ~clk;
  int checks = 0, failures = 0;

  logic            sob = 0;
  logic [TS_W-1:0] ts = 0;
  logic [AW-1:0]   latency = 8'd40;
  logic [K-1:0]    in_valid = '0, in_grant;
  trig_t           in_trig [K];
  logic            out_valid, busy;
  trig_t           out_trig;
  logic [15:0]     n_late;

  latency_buffer #(.AW(AW), .K(K)) dut (.*);

  always @(posedge clk) ts <= sob ? 0 : ts + 1;

  int out_ts[$], out_at[$];
  always @(posedge clk) if (rst_n && out_valid) begin
    out_ts.push_back(out_trig.ts); out_at.push_back(ts);
  end

  function automatic trig_t mk(input int t, input trig_kind_e k);
    trig_t x; x = '0; x.kind = k; x.ts = 32'(t); return x;
  endfunction

  initial begin
    repeat (3000) @(posedge clk);
    failures++; `TB_END
  end

  initial begin
    in_trig[0] = '0; in_trig[1] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (!busy);
    @(posedge clk); sob <= 1; @(posedge clk); sob <= 0;
    // at ts ~ 1..: write triggers for times 30, 12, 25 (out of order)
    repeat (5) @(posedge clk);
    in_valid <= 2'b01; in_trig[0] <= mk(30, TK_PHYSICS); @(posedge clk);
    in_valid <= 2'b11; in_trig[0] <= mk(12, TK_PHYSICS); in_trig[1] <= mk(13, TK_RANDOM); @(posedge clk);
    `CHECK(in_grant == 2'b01, "port 0 wins")
    in_valid <= 2'b10; @(posedge clk);
    in_valid <= 2'b01; in_trig[0] <= mk(25, TK_PHYSICS); @(posedge clk);
    in_valid <= 2'b00;
    `CHECK(out_ts.size() == 0, "nothing before the latency")
    wait (ts == 60);
    in_valid <= 2'b01; in_trig[0] <= mk(5, TK_PHYSICS); @(posedge clk);   // too late
    in_valid <= 2'b00;
    wait (ts == 120);
    `CHECK(out_ts.size() == 4, $sformatf("four triggers out (%0d)", out_ts.size()))
    if (out_ts.size() == 4) begin
      `CHECK(out_ts[0] == 12 && out_ts[1] == 13 && out_ts[2] == 25 && out_ts[3] == 30, "sorted by time")
      for (int i = 0; i < 4; i++)
        `CHECK(out_at[i] == out_ts[i] + 40 + 1, $sformatf("delivered at ts+latency (+1 register): %0d at %0d", out_ts[i], out_at[i]))
    end
    `CHECK(n_late == 1, "late trigger counted")
    // A second turn of the circle must not replay the cleared entries.
    wait (ts == 40 + 256 + 40);
    `CHECK(out_ts.size() == 4, "no replay one turn later")
    `TB_END
  end
endmodule
