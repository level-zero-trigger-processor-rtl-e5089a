// tb_calib_trigger: calibration primitives (PID bit 15) from any source
// become TK_CALIB_PRIM triggers in arrival order, with their time and ID in
// the gid entry of their source; ordinary primitives are ignored; two in one
// clock keep the lower source and count one drop.
`include "tb_util.svh"
module tb_calib_trigger;
  import l0tp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NSRC-1:0] in_valid = '0;
  prim_t           in_prim [NSRC];
  logic            out_valid, out_ready = 0;
  trig_t           out_trig;
  logic [15:0]     n_dropped;

  calib_trigger #(.DEPTH(8)) dut (.*);

  task automatic put(input logic [NSRC-1:0] v, input logic [15:0] pid);
    in_valid <= v;
    for (int s = 0; s < NSRC; s++) in_prim[s] <= '{ts: 32'(50 + s), fine: 8'(s), pid: pid | 16'(s)};
    @(posedge clk);
  endtask

  initial begin
    repeat (500) @(posedge clk);
    failures++; `TB_END
  end

  initial begin
    foreach (in_prim[s]) in_prim[s] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    put(7'b0000100, 16'h0100);     // ordinary
    put(7'b0000100, 16'h8100);     // calibration from source 2
    put(7'b1001000, 16'h8200);     // sources 3 and 6 together: 3 kept
    in_valid <= '0; @(posedge clk);
    `CHECK(out_valid, "calibration trigger pending")
    `CHECK(out_trig.kind == TK_CALIB_PRIM && out_trig.ts == 32'd52 && out_trig.gid[2] == 16'h8102, "first: source 2")
    `CHECK(out_trig.gid[0] == 0 && out_trig.masks == 0, "other fields clear")
    out_ready <= 1; @(posedge clk); out_ready <= 0; @(posedge clk);
    `CHECK(out_valid && out_trig.ts == 32'd53 && out_trig.gid[3] == 16'h8203, "second: source 3")
    out_ready <= 1; @(posedge clk); out_ready <= 0; @(posedge clk);
    `CHECK(!out_valid, "ordinary primitive gave no trigger")
    `CHECK(n_dropped == 1, "one simultaneous calibration primitive dropped")
    `TB_END
  end
endmodule
