// calib_trigger: triggers for calibration primitives.
//
// A detector marks a calibration primitive by setting bit 15 of the primitive
// ID. Such primitives are accepted whatever the other sources do: as they leave
// the delay generator they are written into a FIFO, and while the FIFO is not
// empty a TK_CALIB_PRIM trigger is offered to the output stage, skipping the
// alignment RAMs and the mask matching. The trigger carries the primitive's
// time and its ID in the gid entry of its source.
// One primitive is written per clock; if several sources deliver one in the
// same clock the lowest-numbered source wins and the rest are counted in
// n_dropped (the FIFO depth and this rule are this design's choices).
// Interface: out_valid/out_trig are first-word fall-through; out_ready pops.
module calib_trigger
  import l0tp_pkg::*;
#(
  parameter int DEPTH = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NSRC-1:0]   in_valid,
  input  prim_t             in_prim [NSRC],
  output logic              out_valid,
  output trig_t             out_trig,
  input  logic              out_ready,
  output logic [15:0]       n_dropped
);
  logic [NSRC-1:0]  is_cal;
  logic             push, full, empty;
  logic [SRC_W-1:0] src;
  prim_t            sel;
  logic [SRC_W-1:0] h_src;
  prim_t            h_prim;
  logic [$clog2(DEPTH):0] unused_count;
  logic [3:0]       n_cal;

  always_comb begin
    src   = '0;
    sel   = '0;
    n_cal = '0;
    for (int i = NSRC-1; i >= 0; i--) begin
      is_cal[i] = in_valid[i] && in_prim[i].pid[PID_W-1];
      if (is_cal[i]) begin
        src = SRC_W'(i);
        sel = in_prim[i];
      end
      n_cal = n_cal + {3'b0, is_cal[i]};
    end
  end
  assign push = (is_cal != '0);

  sync_fifo #(.W(SRC_W + $bits(prim_t)), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n,
    .wr_en(push), .wr_data({src, sel}),
    .rd_en(out_ready), .rd_data({h_src, h_prim}),
    .full, .empty, .count(unused_count)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) n_dropped <= '0;
    else if (push) n_dropped <= n_dropped + 16'(n_cal) - 16'(!full);
  end

  assign out_valid = !empty;
  always_comb begin
    out_trig       = '0;
    out_trig.kind  = TK_CALIB_PRIM;
    out_trig.ts    = h_prim.ts;
    out_trig.fine  = h_prim.fine;
    for (int i = 0; i < NSRC; i++)
      if (SRC_W'(i) == h_src) out_trig.gid[i] = h_prim.pid;
  end
endmodule
