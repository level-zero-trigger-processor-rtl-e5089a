// tb_periodic_trigger: flow 0 with period 7 from 20 to 90, flow 1 with
// period 10 from 50 to 200; every trigger time must satisfy the start/stop and
// period rule of its flow, and every such time must get a trigger. Both
// flows fire at 90: flow 1 leaves a clock later but keeps its timestamp.
`include "tb_util.svh"
module tb_periodic_trigger;
  import l0tp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #12.5 clk = ~clk;
  int checks = 0, failures = 0;
  logic            sob = 0;
  logic [TS_W-1:0] ts = 0;
  logic [TS_W-1:0] period [2], start [2], stop [2];
  logic            out_valid;
  trig_t           out_trig;

  periodic_trigger dut (.*);
  always @(posedge clk) ts <= sob ? 0 : ts + 1;

  int got0[$], got1[$];
  always @(posedge clk) if (rst_n && out_valid) begin
    if (out_trig.kind == TK_PERIODIC0) got0.push_back(out_trig.ts);
    else if (out_trig.kind == TK_PERIODIC1) got1.push_back(out_trig.ts);
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++; `TB_END
  end

  initial begin
    int e0[$], e1[$];
    period[0] = 7;  start[0] = 20; stop[0] = 90;
    period[1] = 10; start[1] = 50; stop[1] = 200;
    for (int t = 20; t <= 90; t += 7) e0.push_back(t);
    for (int t = 50; t <= 200; t += 10) e1.push_back(t);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); sob <= 1; @(posedge clk); sob <= 0;
    wait (ts == 300);
    `CHECK(got0 == e0, $sformatf("flow 0: %p", got0))
    `CHECK(got1 == e1, $sformatf("flow 1: %p", got1))
    `TB_END
  end
endmodule
