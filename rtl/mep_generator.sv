// mep_generator: packs delivered triggers into packets for the PC farm.
//
// Every trigger sent to the detectors is also recorded for the PC farm, so
// that the conditions behind it can be studied offline. Records wait in a
// FIFO; a packet is started when EVENTS records are waiting or when the
// oldest has waited timeout clocks, and carries up to EVENTS records. The
// packet is a stream of 32-bit words for the Ethernet transmitter:
//   header : {packet number[15:0], record count[7:0], 8'h00}
//   record : {kind[3:0], 4'h0, fine[7:0], masks[15:0]}, timestamp[31:0],
//            then the global primitive IDs two per word, {gid[2j+1], gid[2j]}
// Only the name and purpose of this block come from the paper; the packet
// layout, the FIFO depth and the flush rule are this design's choices.
// Interface: out_valid/out_data/out_sop/out_eop, one word per clock while
// out_ready is high; n_lost counts records dropped because the FIFO was full.
module mep_generator
  import l0tp_pkg::*;
#(
  parameter int EVENTS = 8,
  parameter int DEPTH  = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] timeout,
  input  logic        in_valid,
  input  trig_t       in_trig,
  output logic        out_valid,
  output logic [31:0] out_data,
  output logic        out_sop,
  output logic        out_eop,
  input  logic        out_ready,
  output logic [15:0] n_lost
);
  localparam int GW   = (NSRC + 1) / 2;        // words of global IDs
  localparam int RECW = 2 + GW;                // words per record

  typedef enum logic [1:0] {S_IDLE, S_HDR, S_REC} state_e;

  logic               full, empty, pop;
  trig_t              head;
  logic [$clog2(DEPTH):0] count;
  state_e             state;
  logic [15:0]        pkt_no, wait_cnt;
  logic [7:0]         n_rec, rec_i;
  logic [3:0]         word_i;
  logic [PID_W-1:0]   gid_ext [2*GW];

  sync_fifo #(.W(TRIG_W), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n,
    .wr_en(in_valid), .wr_data(in_trig),
    .rd_en(pop), .rd_data(head),
    .full, .empty, .count
  );

  always_comb begin
    for (int j = 0; j < 2*GW; j++) gid_ext[j] = (j < NSRC) ? head.gid[j] : '0;
  end

  // Word being offered.
  always_comb begin
    out_valid = (state != S_IDLE);
    out_sop   = (state == S_HDR);
    out_eop   = (state == S_REC) && (rec_i + 1'b1 == n_rec) && (word_i == 4'(RECW-1));
    out_data  = '0;
    if (state == S_HDR) begin
      out_data = {pkt_no, n_rec, 8'h00};
    end else if (state == S_REC) begin
      if (word_i == 0)      out_data = {head.kind, 4'h0, head.fine, head.masks};
      else if (word_i == 1) out_data = head.ts;
      else                  out_data = {gid_ext[2*(word_i-2)+1], gid_ext[2*(word_i-2)]};
    end
  end
  assign pop = (state == S_REC) && out_ready && (word_i == 4'(RECW-1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      pkt_no   <= '0;
      wait_cnt <= '0;
      n_rec    <= '0;
      rec_i    <= '0;
      word_i   <= '0;
      n_lost   <= '0;
    end else begin
      if (in_valid && full) n_lost <= n_lost + 1'b1;
      case (state)
        S_IDLE: begin
          wait_cnt <= empty ? '0 : wait_cnt + 1'b1;
          if (count >= ($clog2(DEPTH)+1)'(EVENTS) || (!empty && wait_cnt >= timeout)) begin
            n_rec    <= (count >= ($clog2(DEPTH)+1)'(EVENTS)) ? 8'(EVENTS) : 8'(count);
            state    <= S_HDR;
            wait_cnt <= '0;
          end
        end
        S_HDR:
          if (out_ready) begin
            state  <= S_REC;
            rec_i  <= '0;
            word_i <= '0;
          end
        S_REC:
          if (out_ready) begin
            if (word_i == 4'(RECW-1)) begin
              word_i <= '0;
              if (rec_i + 1'b1 == n_rec) begin
                state  <= S_IDLE;
                pkt_no <= pkt_no + 1'b1;
              end else begin
                rec_i <= rec_i + 1'b1;
              end
            end else begin
              word_i <= word_i + 1'b1;
            end
          end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
