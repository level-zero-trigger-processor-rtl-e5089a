// tb_amm: drives three beats per reference primitive into the associative
// memory and compares its mask results with a reference model computed in
// the testbench: OR of the in-time IDs over the three slots, then each mask's
// requested/veto/ignored bits. Random IDs and masks, plus hand-made cases.
`include "tb_util.svh"
module tb_amm;
  import l0tp_pkg::*;
  localparam int N = 3, M = 4;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic              beat_valid = 0, beat_last = 0, beat_ctrl = 0;
  prim_t             beat_ref;
  logic [N-1:0]      beat_hit;
  logic [PID_W-1:0]  beat_pid [N];
  logic [M-1:0]      mask_enable;
  logic [PID_W-1:0]  mask_care [M][N], mask_value [M][N];
  logic              ctl_enable;
  logic [PID_W-1:0]  ctl_care [N], ctl_value [N];
  logic              out_valid, out_ctrl, out_ctl_match;
  logic [M-1:0]      out_match;
  prim_t             out_ref;
  logic [PID_W-1:0]  out_gid [N];

  amm #(.N(N), .M(M)) dut (.*);

  logic [PID_W-1:0] gid [N];
  logic [M-1:0]     exp_match;
  logic             exp_ctl;

  task automatic event_(input bit ctrl, input int dense);
    foreach (gid[s]) gid[s] = '0;
    for (int b = 0; b < 3; b++) begin
      beat_valid <= 1; beat_last <= (b == 2); beat_ctrl <= ctrl;
      beat_ref <= '{ts: 32'd777, fine: 8'd9, pid: 16'h1};
      for (int s = 0; s < N; s++) begin
        logic h; logic [15:0] p;
        h = ($urandom % 4) < dense;
        p = 16'(1) << ($urandom % 4);
        beat_hit[s] <= h; beat_pid[s] <= p;
        if (h) gid[s] |= p;
      end
      @(posedge clk);
    end
    beat_valid <= 0; beat_last <= 0;
    for (int m = 0; m < M; m++) begin
      exp_match[m] = mask_enable[m] && !ctrl;
      for (int s = 0; s < N; s++)
        for (int b = 0; b < PID_W; b++)
          if (mask_care[m][s][b] && (gid[s][b] != mask_value[m][s][b])) exp_match[m] = 0;
    end
    exp_ctl = ctl_enable && ctrl;
    for (int s = 0; s < N; s++)
      if (((gid[s] ^ ctl_value[s]) & ctl_care[s]) != 0) exp_ctl = 0;
    @(posedge clk);
    #1;
    `CHECK(out_valid, "result registered two clocks after the last beat is presented")
    `CHECK(out_match == exp_match, $sformatf("masks %b expected %b", out_match, exp_match))
    `CHECK(out_ctl_match == exp_ctl, "control mask")
    for (int s = 0; s < N; s++) `CHECK(out_gid[s] == gid[s], "global primitive ID")
    `CHECK(out_ref.ts == 32'd777, "reference time carried")
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; `TB_END
  end

  initial begin
    beat_ref = '0; beat_hit = '0; foreach (beat_pid[s]) beat_pid[s] = '0;
    // mask 0: source 0 bit 0 requested; mask 1: source 1 bit 1 requested,
    // source 2 bit 2 vetoed; mask 2: everything ignored; mask 3 disabled.
    mask_enable = 4'b0111;
    foreach (mask_care[m, s]) begin mask_care[m][s] = '0; mask_value[m][s] = '0; end
    mask_care[0][0] = 16'h1; mask_value[0][0] = 16'h1;
    mask_care[1][1] = 16'h2; mask_value[1][1] = 16'h2; mask_care[1][2] = 16'h4;
    ctl_enable = 1;
    foreach (ctl_care[s]) begin ctl_care[s] = '0; ctl_value[s] = '0; end
    ctl_care[2] = 16'h1; ctl_value[2] = 16'h1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int k = 0; k < 40; k++) event_(k % 5 == 4, 1 + k % 3);
    `TB_END
  end
endmodule
