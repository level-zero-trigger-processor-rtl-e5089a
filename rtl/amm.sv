// amm: Associative Memory Module, the trigger-mask matcher.
//
// Part 1 is a three-stage shift register that collects the three slots read
// for one reference primitive (previous, own and next slot) from every
// source; on the third beat the primitive IDs of the in-time hits are ORed
// into one global primitive ID per source (0 for a source with no hit).
// Part 2 compares the global IDs of all sources with NMASK masks at once, in
// one clock, like an associative PROM. A mask gives every ID bit of every
// source one of three meanings, encoded here as a care/value pair:
//   care = 0            ignored
//   care = 1, value = 1 requested (the bit must be set)
//   care = 1, value = 0 not requested / veto (the bit must be clear)
// A mask with mask_enable low never fires. Events driven by the control
// detector are compared only with the separate control mask (ctl_*), the
// others only with the NMASK physics masks.
// Timing: out_* are registered two clocks after the last beat.
// The three-slot OR and the parallel mask compare follow the paper; the
// care/value encoding and the single control mask are this design's choices.
module amm
  import l0tp_pkg::*;
#(
  parameter int N     = l0tp_pkg::NSRC,
  parameter int M     = l0tp_pkg::NMASK
) (
  input  logic              clk,
  input  logic              rst_n,
  // beats from the read sequencer
  input  logic              beat_valid,
  input  logic              beat_last,
  input  logic              beat_ctrl,
  input  prim_t             beat_ref,
  input  logic [N-1:0]      beat_hit,
  input  logic [PID_W-1:0]  beat_pid [N],
  // mask table
  input  logic [M-1:0]      mask_enable,
  input  logic [PID_W-1:0]  mask_care  [M][N],
  input  logic [PID_W-1:0]  mask_value [M][N],
  input  logic              ctl_enable,
  input  logic [PID_W-1:0]  ctl_care  [N],
  input  logic [PID_W-1:0]  ctl_value [N],
  // result
  output logic              out_valid,
  output logic              out_ctrl,
  output logic [M-1:0]      out_match,
  output logic              out_ctl_match,
  output prim_t             out_ref,
  output logic [PID_W-1:0]  out_gid [N]
);
  // Part 1: shift register of the slots read, and the OR.
  logic [PID_W-1:0] sr [2][N];
  logic [PID_W-1:0] cur_id [N];
  logic             g_valid, g_ctrl;
  prim_t            g_ref;
  logic [PID_W-1:0] gid [N];

  always_comb begin
    for (int i = 0; i < N; i++) cur_id[i] = beat_hit[i] ? beat_pid[i] : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g_valid <= 1'b0;
      g_ctrl  <= 1'b0;
      g_ref   <= '0;
      for (int i = 0; i < N; i++) begin
        sr[0][i] <= '0;
        sr[1][i] <= '0;
        gid[i]   <= '0;
      end
    end else begin
      g_valid <= beat_valid && beat_last;
      if (beat_valid) begin
        for (int i = 0; i < N; i++) begin
          sr[0][i] <= cur_id[i];
          sr[1][i] <= sr[0][i];
        end
      end
      if (beat_valid && beat_last) begin
        g_ctrl <= beat_ctrl;
        g_ref  <= beat_ref;
        for (int i = 0; i < N; i++) gid[i] <= cur_id[i] | sr[0][i] | sr[1][i];
      end
    end
  end

  // Part 2: all masks in parallel.
  logic [M-1:0] match_nx;
  logic         ctl_nx;
  always_comb begin
    for (int m = 0; m < M; m++) begin
      match_nx[m] = mask_enable[m] && !g_ctrl;
      for (int i = 0; i < N; i++)
        if (((gid[i] ^ mask_value[m][i]) & mask_care[m][i]) != '0) match_nx[m] = 1'b0;
    end
    ctl_nx = ctl_enable && g_ctrl;
    for (int i = 0; i < N; i++)
      if (((gid[i] ^ ctl_value[i]) & ctl_care[i]) != '0) ctl_nx = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid     <= 1'b0;
      out_ctrl      <= 1'b0;
      out_match     <= '0;
      out_ctl_match <= 1'b0;
      out_ref       <= '0;
      for (int i = 0; i < N; i++) out_gid[i] <= '0;
    end else begin
      out_valid     <= g_valid;
      out_ctrl      <= g_ctrl;
      out_match     <= g_valid ? match_nx : '0;
      out_ctl_match <= g_valid && ctl_nx;
      out_ref       <= g_ref;
      for (int i = 0; i < N; i++) out_gid[i] <= gid[i];
    end
  end
endmodule
