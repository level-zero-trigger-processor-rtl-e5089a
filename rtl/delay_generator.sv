// delay_generator: absorbs the fixed frame offsets between primitive sources.
//
// Each source has a frame FIFO (DEPTH words). After start of burst the first
// skip_frames[i] frames of source i are discarded: a slow detector that needs
// N extra frames to build its primitives sends N leading frames whose time has
// no partner, and skipping them lines its frame k+N up with frame k of the
// others. Meanwhile the faster sources keep writing, so their FIFOs hold the
// frames that wait for the slow one. Frames are then released in lock-step:
// as soon as every enabled source holds at least one complete frame, the
// words of that frame are popped from all sources in parallel (one word per
// source per clock) until each has reached its end-of-frame marker, and
// frame_done pulses. Sources with src_enable low are ignored.
//
// The skipping of frames and the 8192-word FIFOs follow the paper; releasing
// frames in lock-step, dropping words written to a full FIFO (counted in
// n_overflow) and the 8-bit skip count are this design's choices.
// Timing: a primitive leaves 2 clocks after its frame becomes releasable;
// out_valid/out_prim are registered.
module delay_generator
  import l0tp_pkg::*;
#(
  parameter int N     = l0tp_pkg::NSRC,
  parameter int DEPTH = 8192
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              sob,                 // start-of-burst pulse
  input  logic [N-1:0]      src_enable,
  input  logic [7:0]        skip_frames [N],
  input  logic [N-1:0]      in_valid,
  input  frame_word_t       in_word [N],
  output logic [N-1:0]      out_valid,
  output prim_t             out_prim [N],
  output logic              frame_done,
  output logic [15:0]       frame_count,         // frames released since SOB
  output logic [15:0]       n_overflow [N]
);
  localparam int CW = $clog2(DEPTH) + 1;

  logic [N-1:0]        wr_en, rd_en, full, empty, has_frame;
  frame_word_t         rd_word [N];
  logic [CW-1:0]       unused_count [N];
  logic [7:0]          skip_left [N];
  logic [15:0]         frames_in [N];
  logic [N-1:0]        active;
  logic                draining;

  for (genvar i = 0; i < N; i++) begin : g_src
    sync_fifo #(.W($bits(frame_word_t)), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .wr_en(wr_en[i]), .wr_data(in_word[i]),
      .rd_en(rd_en[i]), .rd_data(rd_word[i]),
      .full(full[i]), .empty(empty[i]), .count(unused_count[i])
    );

    // Write side: skip the first frames after SOB, then store.
    assign wr_en[i]     = in_valid[i] && src_enable[i] && (skip_left[i] == 0) && !full[i];
    assign has_frame[i] = (frames_in[i] != 0);
    assign rd_en[i]     = draining && active[i] && !empty[i];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        skip_left[i]  <= '0;
        frames_in[i]  <= '0;
        n_overflow[i] <= '0;
      end else begin
        if (sob) begin
          skip_left[i] <= skip_frames[i];
        end else if (in_valid[i] && src_enable[i] && skip_left[i] != 0 && in_word[i].eof) begin
          skip_left[i] <= skip_left[i] - 1'b1;
        end
        if (in_valid[i] && src_enable[i] && skip_left[i] == 0 && full[i])
          n_overflow[i] <= n_overflow[i] + 1'b1;
        frames_in[i] <= frames_in[i]
                        + ((wr_en[i] && in_word[i].eof) ? 16'd1 : 16'd0)
                        - ((rd_en[i] && rd_word[i].eof) ? 16'd1 : 16'd0);
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        out_valid[i] <= 1'b0;
        out_prim[i]  <= '0;
      end else begin
        out_valid[i] <= rd_en[i] && !rd_word[i].eof;
        out_prim[i]  <= rd_word[i].prim;
      end
    end
  end

  // Read side: release one frame of every enabled source at a time.
  logic [N-1:0] done_now;
  always_comb begin
    for (int i = 0; i < N; i++) done_now[i] = rd_en[i] && rd_word[i].eof;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      draining    <= 1'b0;
      active      <= '0;
      frame_done  <= 1'b0;
      frame_count <= '0;
    end else begin
      frame_done <= 1'b0;
      if (sob) frame_count <= '0;
      if (!draining) begin
        if (src_enable != '0 && ((has_frame | ~src_enable) == '1)) begin
          draining <= 1'b1;
          active   <= src_enable;
        end
      end else begin
        if ((active & ~done_now) == '0) begin
          draining    <= 1'b0;
          frame_done  <= 1'b1;
          if (!sob) frame_count <= frame_count + 1'b1;
        end
        active <= active & ~done_now;
      end
    end
  end
endmodule
