// downscaler: per-mask downscaling of the associative-memory results.
//
// Each physics mask, and the control mask, has a counter and a programmable
// factor F. Of every F consecutive matches of a mask only the first passes
// (F = 0 or 1 passes all of them). A trigger word is produced when at least one
// mask passes; its masks field lists the masks that passed, and it carries the
// reference time and the global primitive IDs for offline reconstruction.
// Control-detector events become TK_CONTROL triggers, all others TK_PHYSICS.
// Timing: out_valid/out_trig are registered, one clock after in_valid.
// Per-mask downscaling follows the paper; passing the first of every F is
// this design's choice.
module downscaler
  import l0tp_pkg::*;
#(
  parameter int M = l0tp_pkg::NMASK
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [DS_W-1:0]   factor [M],
  input  logic [DS_W-1:0]   ctl_factor,
  input  logic              in_valid,
  input  logic [M-1:0]      in_match,
  input  logic              in_ctl_match,
  input  prim_t             in_ref,
  input  logic [PID_W-1:0]  in_gid [NSRC],
  output logic              out_valid,
  output trig_t             out_trig
);
  logic [DS_W-1:0] cnt [M];
  logic [DS_W-1:0] ctl_cnt;
  logic [M-1:0]    pass;
  logic            ctl_pass;

  function automatic logic [DS_W-1:0] next_cnt(input logic [DS_W-1:0] c,
                                               input logic [DS_W-1:0] f);
    return (c + 1'b1 >= f) ? '0 : c + 1'b1;
  endfunction

  always_comb begin
    for (int m = 0; m < M; m++) pass[m] = in_valid && in_match[m] && (cnt[m] == '0);
    ctl_pass = in_valid && in_ctl_match && (ctl_cnt == '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int m = 0; m < M; m++) cnt[m] <= '0;
      ctl_cnt   <= '0;
      out_valid <= 1'b0;
      out_trig  <= '0;
    end else begin
      for (int m = 0; m < M; m++)
        if (in_valid && in_match[m]) cnt[m] <= next_cnt(cnt[m], factor[m]);
      if (in_valid && in_ctl_match) ctl_cnt <= next_cnt(ctl_cnt, ctl_factor);

      out_valid      <= (pass != '0) || ctl_pass;
      out_trig.kind  <= ctl_pass ? TK_CONTROL : TK_PHYSICS;
      out_trig.ts    <= in_ref.ts;
      out_trig.fine  <= in_ref.fine;
      out_trig.masks <= pass;
      for (int i = 0; i < NSRC; i++) out_trig.gid[i] <= in_gid[i];
    end
  end
endmodule
