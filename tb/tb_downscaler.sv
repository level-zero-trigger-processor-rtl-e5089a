// tb_downscaler: mask 0 unscaled, mask 1 scaled by 3, mask 2 by 4; the
// control mask by 2. Over a run of random matches the number of triggers per
// mask must be ceil(matches / factor) and each trigger word must list exactly
// the masks whose counter passed, with the reference time.
`include "tb_util.svh"
module tb_downscaler;
  import l0tp_pkg::*;
  localparam int M = 4;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic [DS_W-1:0]  factor [M];
  logic [DS_W-1:0]  ctl_factor = 16'd2;
  logic             in_valid = 0, in_ctl_match = 0;
  logic [M-1:0]     in_match = '0;
  prim_t            in_ref;
  logic [PID_W-1:0] in_gid [NSRC];
  logic             out_valid;
  trig_t            out_trig;

  downscaler #(.M(M)) dut (.*);

  int n_match [M], n_out [M], n_ctl, n_ctl_out, cnt_model [M], ctl_model;
  int bad_words;

  always @(posedge clk) if (rst_n && out_valid) begin
    for (int m = 0; m < M; m++) if (out_trig.masks[m]) n_out[m]++;
    if (out_trig.kind == TK_CONTROL) n_ctl_out++;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++; `TB_END
  end

  initial begin
    factor[0] = 0; factor[1] = 3; factor[2] = 4; factor[3] = 1;
    in_ref = '0; foreach (in_gid[s]) in_gid[s] = 16'(s);
    foreach (n_match[m]) begin n_match[m] = 0; n_out[m] = 0; cnt_model[m] = 0; end
    n_ctl = 0; n_ctl_out = 0; ctl_model = 0; bad_words = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      logic [M-1:0] mt; logic c; logic [M-1:0] exp_pass; logic exp_c;
      c  = ($urandom % 5) == 0;
      mt = c ? '0 : M'($urandom);
      in_valid <= 1; in_match <= mt; in_ctl_match <= c;
      in_ref <= '{ts: 32'(1000 + k), fine: 8'(k), pid: 16'h0};
      // model
      exp_pass = '0;
      for (int m = 0; m < M; m++) if (mt[m]) begin
        n_match[m]++;
        if (cnt_model[m] == 0) exp_pass[m] = 1;
        cnt_model[m] = (cnt_model[m] + 1 >= factor[m]) ? 0 : cnt_model[m] + 1;
      end
      exp_c = 0;
      if (c) begin
        n_ctl++;
        exp_c = (ctl_model == 0);
        ctl_model = (ctl_model + 1 >= ctl_factor) ? 0 : ctl_model + 1;
      end
      @(posedge clk);
      #1;
      if (out_valid != (exp_pass != 0 || exp_c)) bad_words++;
      else if (out_valid && (out_trig.masks != exp_pass || out_trig.ts != 32'(1000 + k)
               || out_trig.kind != (exp_c ? TK_CONTROL : TK_PHYSICS) || out_trig.gid[2] != 16'd2)) bad_words++;
    end
    in_valid <= 0;
    repeat (3) @(posedge clk);
    `CHECK(bad_words == 0, $sformatf("%0d trigger words differ from the model", bad_words))
    for (int m = 0; m < M; m++) begin
      int f; f = (factor[m] <= 1) ? 1 : factor[m];
      `CHECK(n_out[m] == (n_match[m] + f - 1) / f, $sformatf("mask %0d: %0d of %0d passed", m, n_out[m], n_match[m]))
    end
    `CHECK(n_ctl_out == (n_ctl + 1) / 2, "control downscaled by 2")
    `TB_END
  end
endmodule
