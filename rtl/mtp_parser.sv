// mtp_parser: unpacks the Multi-Trigger-Packets (MTP) of one input link.
//
// A detector sends one MTP per 6.4 us frame, even when it is empty. The MTP
// starts with a header word giving the source ID and the number of primitives,
// then the frame timestamp, then two words per primitive. This word layout is
// this design's choice (the paper names only the header's contents):
//   word 0 : {source_id[7:0], 8'h00, n_prim[15:0]}
//   word 1 : frame timestamp[31:0]
//   per primitive: {pid[15:0], 8'h00, fine[7:0]}, then timestamp[31:0]
// A state machine walks the packet, and a primitive is accepted only if its
// timestamp lies in the frame of the header (timestamp bits above FRAME_SHIFT
// match); otherwise it is dropped and counted (the time-consistency check).
// A packet whose source ID differs from src_id is dropped whole. After the
// last word (in_eop) one end-of-frame marker carrying the frame timestamp is
// emitted on the following clock; in_ready is low during that clock.
// Output: at most one frame word per clock, registered.
module mtp_parser
  import l0tp_pkg::*;
#(
  parameter int FRAME_SHIFT = l0tp_pkg::FRAME_BITS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [7:0]        src_id,
  input  logic              in_valid,
  input  logic [31:0]       in_data,
  input  logic              in_sop,
  input  logic              in_eop,
  output logic              in_ready,
  output logic              out_valid,
  output frame_word_t       out_word,
  output logic [15:0]       n_rejected,
  output logic [15:0]       n_bad_packets
);
  typedef enum logic [2:0] {S_IDLE, S_FRAME_TS, S_PRIM_A, S_PRIM_B, S_SKIP, S_EOF} state_e;

  state_e            state;
  logic [15:0]       n_left;
  logic [TS_W-1:0]   frame_ts;
  logic [PID_W-1:0]  pid_r;
  logic [FINE_W-1:0] fine_r;
  logic              take;
  logic              foreign;   // packet of another source being skipped

  assign in_ready = (state != S_EOF);
  assign take     = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      n_left        <= '0;
      frame_ts      <= '0;
      pid_r         <= '0;
      fine_r        <= '0;
      out_valid     <= 1'b0;
      out_word      <= '0;
      n_rejected    <= '0;
      n_bad_packets <= '0;
      foreign       <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      case (state)
        S_IDLE:
          if (take && in_sop) begin
            n_left  <= in_data[15:0];
            foreign <= (in_data[31:24] != src_id);
            if (in_data[31:24] != src_id) begin
              n_bad_packets <= n_bad_packets + 1'b1;
              state <= in_eop ? S_IDLE : S_SKIP;
            end else begin
              state <= in_eop ? S_IDLE : S_FRAME_TS;
            end
          end
        S_FRAME_TS:
          if (take) begin
            frame_ts <= in_data;
            state    <= in_eop ? S_EOF : ((n_left == 0) ? S_SKIP : S_PRIM_A);
          end
        S_PRIM_A:
          if (take) begin
            pid_r  <= in_data[31:16];
            fine_r <= in_data[7:0];
            state  <= in_eop ? S_EOF : S_PRIM_B;
          end
        S_PRIM_B:
          if (take) begin
            if (in_data[TS_W-1:FRAME_SHIFT] == frame_ts[TS_W-1:FRAME_SHIFT]) begin
              out_valid          <= 1'b1;
              out_word.eof       <= 1'b0;
              out_word.prim.ts   <= in_data;
              out_word.prim.fine <= fine_r;
              out_word.prim.pid  <= pid_r;
            end else begin
              n_rejected <= n_rejected + 1'b1;
            end
            n_left <= n_left - 1'b1;
            if (in_eop)           state <= S_EOF;
            else if (n_left == 1) state <= S_SKIP;
            else                  state <= S_PRIM_A;
          end
        S_SKIP:
          // Words past the declared size (or a foreign packet) up to its end.
          if (take && in_eop) state <= foreign ? S_IDLE : S_EOF;
        S_EOF: begin
          out_valid          <= 1'b1;
          out_word.eof       <= 1'b1;
          out_word.prim.ts   <= frame_ts;
          out_word.prim.fine <= '0;
          out_word.prim.pid  <= '0;
          state              <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
