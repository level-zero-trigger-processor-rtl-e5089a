// tb_align_ram: writes primitives into a small alignment RAM and reads the
// slots back: each primitive must sit at the slot made of its timestamp LSBs
// and the chosen number of fine-time MSBs, a calibration primitive must not be
// written, unwritten slots must read empty after the reset sweep, and a
// primitive one turn of the circle later must replace the old one.
`include "tb_util.svh"
module tb_align_ram;
  import l0tp_pkg::*;
  localparam int AW = 6;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic [1:0]    fine_bits = 2'd2;
  logic          wr_valid = 0, rd_en = 0, rd_valid, busy;
  prim_t         wr_prim, rd_prim;
  logic [AW-1:0] rd_addr = '0;

  align_ram #(.AW(AW)) dut (.*);

  task automatic wr(input logic [31:0] ts, input logic [7:0] fine, input logic [15:0] pid);
    wr_valid <= 1; wr_prim <= '{ts: ts, fine: fine, pid: pid};
    @(posedge clk);
  endtask
  task automatic rd(input int a, output logic v, output prim_t p);
    wr_valid <= 0; rd_en <= 1; rd_addr <= AW'(a);
    @(posedge clk);
    rd_en <= 0;
    @(posedge clk);
    v = rd_valid; p = rd_prim;
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++; `TB_END
  end

  initial begin
    logic v; prim_t p; int cycles;
    wr_prim = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    cycles = 0;
    while (busy) begin @(posedge clk); cycles++; end
    `CHECK(cycles >= (1 << AW) - 2 && cycles <= (1 << AW) + 2, $sformatf("clear sweep takes 2^AW clocks (%0d)", cycles))
    // fine_bits = 2: slot = {ts[3:0], fine[7:6]}
    wr(32'h0000_0013, 8'hC5, 16'h0001);   // slot {3, 3} = 15
    wr(32'h0000_0014, 8'h40, 16'h8002);   // calibration: not stored (slot 17)
    wr(32'h0000_0015, 8'h80, 16'h0003);   // slot {5, 2} = 22
    rd(15, v, p);
    `CHECK(v && p.ts == 32'h13 && p.fine == 8'hC5 && p.pid == 16'h0001, "primitive at slot 15")
    rd(17, v, p);
    `CHECK(!v, "calibration primitive not written")
    rd(22, v, p);
    `CHECK(v && p.pid == 16'h0003, "primitive at slot 22")
    rd(40, v, p);
    `CHECK(!v, "untouched slot is empty")
    // One turn later (16 timestamps with 2 fine bits and 64 slots) overwrites slot 15.
    wr(32'h0000_0023, 8'hC0, 16'h0004);
    rd(15, v, p);
    `CHECK(v && p.ts == 32'h23 && p.pid == 16'h0004, "newer primitive replaces the old one")
    // fine_bits = 0: slot = ts[5:0]
    fine_bits <= 2'd0;
    wr(32'h0000_0029, 8'hFF, 16'h0005);
    rd(41, v, p);
    `CHECK(v && p.pid == 16'h0005, "granularity of one clock: slot = ts LSBs")
    `TB_END
  end
endmodule
