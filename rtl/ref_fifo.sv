// ref_fifo: list of the reference (or control) detector's primitives.
//
// Only the RAM slots holding a primitive of the reference detector are read
// back, so this FIFO records every primitive that the source selected by sel
// delivers from the delay generator (calibration primitives excepted),
// together with the number of the frame release it came in (frame_idx). The
// reader uses that number to wait until the following frame of all sources is
// in the RAMs. One instance serves the reference detector, a second one the
// control (minimum-bias) detector; sel is programmable in both.
// Depth and the overflow counter are this design's choices.
// Interface: first-word fall-through; head is valid while empty is low.
module ref_fifo
  import l0tp_pkg::*;
#(
  parameter int N     = l0tp_pkg::NSRC,
  parameter int DEPTH = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [SRC_W-1:0]  sel,
  input  logic [N-1:0]      in_valid,
  input  prim_t             in_prim [N],
  input  logic [15:0]       frame_idx,
  input  logic              rd_en,
  output logic              empty,
  output prim_t             head_prim,
  output logic [15:0]       head_idx,
  output logic [15:0]       n_overflow
);
  logic  push, full;
  prim_t sel_prim;
  logic  sel_valid;
  logic [$clog2(DEPTH):0] unused_count;

  always_comb begin
    sel_prim  = '0;
    sel_valid = 1'b0;
    for (int i = 0; i < N; i++) begin
      if (SRC_W'(i) == sel) begin
        sel_prim  = in_prim[i];
        sel_valid = in_valid[i];
      end
    end
  end

  assign push = sel_valid && !sel_prim.pid[PID_W-1];

  sync_fifo #(.W(16 + $bits(prim_t)), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n,
    .wr_en(push), .wr_data({frame_idx, sel_prim}),
    .rd_en, .rd_data({head_idx, head_prim}),
    .full, .empty, .count(unused_count)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           n_overflow <= '0;
    else if (push && full) n_overflow <= n_overflow + 1'b1;
  end
endmodule
