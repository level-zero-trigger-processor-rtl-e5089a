// tb_burst_timer: the timestamp restarts from 0 two clocks after SOB rises,
// counts one per clock, keeps counting after EOB, and burst_active spans
// SOB to EOB.
`include "tb_util.svh"
module tb_burst_timer;
  import l0tp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #12.5 clk = ~clk;
  int checks = 0, failures = 0;
  logic sob_in = 0, eob_in = 0, sob_pulse, eob_pulse, burst_active;
  logic [TS_W-1:0] ts;
  int n_sob = 0;

  burst_timer dut (.*);
  always @(posedge clk) if (rst_n && sob_pulse) n_sob++;

  initial begin
    repeat (2000) @(posedge clk);
    failures++; `TB_END
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (50) @(posedge clk);
    sob_in <= 1;
    repeat (2) @(posedge clk);
    #1 `CHECK(sob_pulse, "SOB pulse two clocks after the input is taken")
    @(posedge clk); #1;
    `CHECK(ts == 0 && burst_active, "timestamp cleared, burst active")
    repeat (100) @(posedge clk); #1;
    `CHECK(ts == 100, $sformatf("counts one per clock (%0d)", ts))
    sob_in <= 0; eob_in <= 1;
    repeat (4) @(posedge clk); #1;
    `CHECK(!burst_active, "burst over after EOB")
    `CHECK(ts == 104, "still counting after EOB")
    `CHECK(n_sob == 1, "one SOB pulse for one SOB edge")
    `TB_END
  end
endmodule
