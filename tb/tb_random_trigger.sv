// tb_random_trigger: a software copy of the LFSR predicts every trigger:
// one number per rate_div clocks from the start point, a trigger when its LSB
// is 1. Also checks that the mean rate is near 40 MHz / (2 rate_div).
`include "tb_util.svh"
module tb_random_trigger;
  import l0tp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #12.5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [TS_W-1:0] ts = 0, start = 100;
  logic            burst_active = 0;
  logic [15:0]     rate_div = 4;
  logic            out_valid;
  trig_t           out_trig;

  random_trigger dut (.*);
  always @(posedge clk) ts <= ts + 1;

  int got[$];
  always @(posedge clk) if (rst_n && out_valid) got.push_back(out_trig.ts);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; `TB_END
  end

  initial begin
    logic [31:0] l; int exp[$]; int mism;
    repeat (3) @(posedge clk);
    rst_n = 1;
    burst_active <= 1;
    wait (ts == 8100);
    // model: numbers at ts = 100, 104, ... (ts sampled one clock before out)
    l = 32'hACE1_2468;
    for (int t = 100; t < 8000; t += 4) begin
      l = l[0] ? ((l >> 1) ^ 32'h8020_0003) : (l >> 1);
      if (l[0]) exp.push_back(t);
    end
    mism = 0;
    for (int i = 0; i < exp.size() && i < got.size(); i++) if (got[i] != exp[i]) mism++;
    `CHECK(got.size() >= exp.size() && mism == 0, $sformatf("%0d triggers, %0d expected, %0d differ", got.size(), exp.size(), mism))
    `CHECK(got.size() > 0 && got[0] >= 100, "nothing before the start point")
    `CHECK(exp.size() > 850 && exp.size() < 1125, $sformatf("mean rate about 1 per 8 clocks (%0d in 7900)", exp.size()))
    `TB_END
  end
endmodule
