// align_ram: time-addressed circular buffer of one primitive source.
//
// A primitive is written at the slot given by its own time: the low bits of
// the timestamp followed by the top fine_bits (0..3) bits of the fine time,
// AW bits in all. This sorts the primitives of all sources onto a common time
// grid whose granularity is 25 ns >> fine_bits (3.125 ns with three bits) and
// whose span is 2^AW slots (51.2 us at 3.125 ns, 409.6 us at 25 ns). The RAM is
// never cleared while running: each slot keeps the primitive's full timestamp
// and fine time, so the reader can tell a current entry from one left by an
// earlier turn of the circle. Calibration primitives (PID bit 15) bypass the
// alignment and are not written. If two primitives land in one slot the later
// one wins (a choice of this design).
// After reset the RAM is swept once to clear the valid bits; busy is high for
// 2^AW clocks and writes are ignored meanwhile.
// Read: rd_en/rd_addr in one clock, rd_valid/rd_prim on the next.
module align_ram
  import l0tp_pkg::*;
#(
  parameter int AW = l0tp_pkg::ALIGN_AW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [1:0]    fine_bits,
  input  logic          wr_valid,
  input  prim_t         wr_prim,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic          rd_valid,
  output prim_t         rd_prim,
  output logic          busy
);
  typedef struct packed {
    logic  valid;
    prim_t prim;
  } slot_t;

  slot_t           mem [2**AW];
  logic [AW-1:0]   clr_addr;
  logic [AW-1:0]   wr_addr;
  logic [SLOT_W-1:0] wr_slot;
  logic            do_wr;
  slot_t           rd_q;

  assign wr_slot = slot_of(wr_prim.ts, wr_prim.fine, fine_bits);
  assign wr_addr = wr_slot[AW-1:0];
  assign do_wr   = wr_valid && !wr_prim.pid[PID_W-1] && !busy;

  always_ff @(posedge clk) begin
    if (busy)       mem[clr_addr] <= '0;
    else if (do_wr) mem[wr_addr]  <= '{valid: 1'b1, prim: wr_prim};
    if (rd_en)      rd_q          <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b1;
      clr_addr <= '0;
    end else if (busy) begin
      clr_addr <= clr_addr + 1'b1;
      if (clr_addr == '1) busy <= 1'b0;
    end
  end

  assign rd_valid = rd_q.valid;
  assign rd_prim  = rd_q.prim;
endmodule
