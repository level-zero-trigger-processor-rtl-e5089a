// tb_nim_calib_trigger: each rising edge of the NIM input gives one
// TK_CALIB_NIM trigger stamped with the timestamp 3 clocks later; a long
// pulse gives only one; disabled gives none.
`include "tb_util.svh"
module tb_nim_calib_trigger;
  import l0tp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #12.5 clk = ~clk;
  int checks = 0, failures = 0;
  logic            nim_in = 0, enable = 1, out_valid;
  logic [TS_W-1:0] ts = 0;
  trig_t           out_trig;
  nim_calib_trigger dut (.*);
  always @(posedge clk) ts <= ts + 1;
  int got[$];
  always @(posedge clk) if (rst_n && out_valid) begin
    got.push_back(out_trig.ts);
    if (out_trig.kind != TK_CALIB_NIM) failures++;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++; `TB_END
  end
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (ts == 100); nim_in <= 1;   // sampled at the edge where ts becomes 101
    repeat (20) @(posedge clk); nim_in <= 0;
    wait (ts == 200); enable <= 0; nim_in <= 1;
    repeat (5) @(posedge clk); nim_in <= 0;
    repeat (20) @(posedge clk);
    `CHECK(got.size() == 1, $sformatf("one trigger for one edge while enabled (%0d)", got.size()))
    if (got.size() > 0) `CHECK(got[0] == 102, $sformatf("timestamp latched after the synchronizer (%0d)", got[0]))
    `TB_END
  end
endmodule
