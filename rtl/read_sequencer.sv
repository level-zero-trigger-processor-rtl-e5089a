// read_sequencer: the reading process of the alignment RAMs.
//
// For each primitive taken from the reference FIFO (or, when that one has
// nothing ready, from the control FIFO) it computes the primitive's slot S and
// reads slots S-1, S and S+1 from the RAMs of all sources in parallel, one
// slot per clock; reading the neighbours catches primitives of the same event
// that fell just across a slot edge. For every slot read and every source the
// returned entry counts as a hit only if
//   - it is valid and its stored time maps to exactly that slot number, i.e.
//     the timestamp MSBs written with it match (old data from an earlier turn
//     of the circular RAM is discarded), and
//   - its full time (timestamp and fine time) differs from the reference time
//     by at most window[i] fine-time LSBs (about 98 ps each), a separate cut
//     for each source.
// An entry is read only once the frame after its own has been released for
// all sources (frame_count - entry index >= 2), or at any time once flush is
// high (end of burst), so that slot S+1 is already written.
// Output: three beats per reference primitive, one per slot, registered, two
// clocks after the read was issued; beat_first/beat_last mark the first and
// third. Throughput: one reference primitive per four clocks (31 MHz at
// 125 MHz). The slot reading and both checks follow the paper; the readiness
// rule and the priority of the reference FIFO are this design's choices.
module read_sequencer
  import l0tp_pkg::*;
#(
  parameter int N  = l0tp_pkg::NSRC,
  parameter int AW = l0tp_pkg::ALIGN_AW
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [1:0]        fine_bits,
  input  logic [WIN_W-1:0]  window [N],
  input  logic [15:0]       frame_count,
  input  logic              flush,
  // reference and control FIFOs
  input  logic              ref_empty,
  input  prim_t             ref_prim,
  input  logic [15:0]       ref_idx,
  output logic              ref_rd,
  input  logic              ctl_empty,
  input  prim_t             ctl_prim,
  input  logic [15:0]       ctl_idx,
  output logic              ctl_rd,
  // alignment RAMs
  output logic              ram_rd_en,
  output logic [AW-1:0]     ram_rd_addr,
  input  logic [N-1:0]      ram_rd_valid,
  input  prim_t             ram_rd_prim [N],
  // beats to the associative memory
  output logic              beat_valid,
  output logic              beat_first,
  output logic              beat_last,
  output logic              beat_ctrl,
  output prim_t             beat_ref,
  output logic [N-1:0]      beat_hit,
  output logic [PID_W-1:0]  beat_pid [N]
);
  typedef enum logic [1:0] {S_IDLE, S_R0, S_R1, S_R2} state_e;

  state_e            state;
  prim_t             cur;
  logic              cur_ctrl;
  logic [SLOT_W-1:0] cur_slot, issue_slot_nx;
  logic              ref_ready, ctl_ready;

  // read issued last clock, whose data is on ram_rd_* now
  logic              iss_valid, iss_first, iss_last;
  logic [SLOT_W-1:0] iss_slot;

  assign ref_ready = !ref_empty && (flush || (frame_count - ref_idx) >= 16'd2);
  assign ctl_ready = !ctl_empty && (flush || (frame_count - ctl_idx) >= 16'd2);
  assign ref_rd    = (state == S_IDLE) && ref_ready;
  assign ctl_rd    = (state == S_IDLE) && !ref_ready && ctl_ready;

  always_comb begin
    case (state)
      S_R0:    issue_slot_nx = cur_slot - 1'b1;
      S_R1:    issue_slot_nx = cur_slot;
      default: issue_slot_nx = cur_slot + 1'b1;
    endcase
  end
  assign ram_rd_en   = (state != S_IDLE);
  assign ram_rd_addr = issue_slot_nx[AW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cur       <= '0;
      cur_ctrl  <= 1'b0;
      cur_slot  <= '0;
      iss_valid <= 1'b0;
      iss_first <= 1'b0;
      iss_last  <= 1'b0;
      iss_slot  <= '0;
    end else begin
      iss_valid <= ram_rd_en;
      iss_first <= (state == S_R0);
      iss_last  <= (state == S_R2);
      iss_slot  <= issue_slot_nx;
      case (state)
        S_IDLE:
          if (ref_ready || ctl_ready) begin
            cur      <= ref_ready ? ref_prim : ctl_prim;
            cur_ctrl <= !ref_ready;
            cur_slot <= ref_ready ? slot_of(ref_prim.ts, ref_prim.fine, fine_bits)
                                  : slot_of(ctl_prim.ts, ctl_prim.fine, fine_bits);
            state    <= S_R0;
          end
        S_R0:    state <= S_R1;
        S_R1:    state <= S_R2;
        default: state <= S_IDLE;
      endcase
    end
  end

  // Evaluate the slot just read for every source.
  logic [N-1:0] hit_nx;
  always_comb begin
    for (int i = 0; i < N; i++) begin
      hit_nx[i] = ram_rd_valid[i]
               && (slot_of(ram_rd_prim[i].ts, ram_rd_prim[i].fine, fine_bits) == iss_slot)
               && (time_dist({ram_rd_prim[i].ts, ram_rd_prim[i].fine}, {cur.ts, cur.fine})
                   <= TIME_W'(window[i]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat_valid <= 1'b0;
      beat_first <= 1'b0;
      beat_last  <= 1'b0;
      beat_ctrl  <= 1'b0;
      beat_ref   <= '0;
      beat_hit   <= '0;
      for (int i = 0; i < N; i++) beat_pid[i] <= '0;
    end else begin
      beat_valid <= iss_valid;
      beat_first <= iss_first;
      beat_last  <= iss_last;
      beat_ctrl  <= cur_ctrl;
      beat_ref   <= cur;
      beat_hit   <= iss_valid ? hit_nx : '0;
      for (int i = 0; i < N; i++) beat_pid[i] <= ram_rd_prim[i].pid;
    end
  end
endmodule
