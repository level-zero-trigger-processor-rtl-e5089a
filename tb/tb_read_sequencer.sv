// tb_read_sequencer: two sources with real alignment RAMs. For a reference
// primitive the sequencer must read the slot and both neighbours, report a
// hit only for primitives of the right turn of the circular RAM and within
// each source's time window, wait for the frame after the reference one to
// be released, and take a control-FIFO entry when the reference FIFO is idle.
`include "tb_util.svh"
module tb_read_sequencer;
  import l0tp_pkg::*;
  localparam int N = 2, AW = 8;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic [1:0]        fine_bits = 2'd2;
  logic [WIN_W-1:0]  window [N];
  logic [15:0]       frame_count = 0;
  logic              flush = 0;
  logic              ref_empty = 1, ctl_empty = 1, ref_rd, ctl_rd;
  prim_t             ref_prim, ctl_prim;
  logic [15:0]       ref_idx = 0, ctl_idx = 0;
  logic              ram_rd_en;
  logic [AW-1:0]     ram_rd_addr;
  logic [N-1:0]      ram_rd_valid, busy;
  prim_t             ram_rd_prim [N];
  logic              beat_valid, beat_first, beat_last, beat_ctrl;
  prim_t             beat_ref;
  logic [N-1:0]      beat_hit;
  logic [PID_W-1:0]  beat_pid [N];
  logic [N-1:0]      wr_valid = '0;
  prim_t             wr_prim [N];

  read_sequencer #(.N(N), .AW(AW)) dut (.*);
  for (genvar i = 0; i < N; i++) begin : g_ram
    align_ram #(.AW(AW)) u_ram (.clk, .rst_n, .fine_bits, .wr_valid(wr_valid[i]), .wr_prim(wr_prim[i]),
      .rd_en(ram_rd_en), .rd_addr(ram_rd_addr), .rd_valid(ram_rd_valid[i]), .rd_prim(ram_rd_prim[i]), .busy(busy[i]));
  end

  // Collect beats: per reference, OR of hit pids per source, plus beat count.
  int beats; logic [15:0] acc [N]; logic last_ctrl; int n_refs;
  always @(posedge clk) if (rst_n && beat_valid) begin
    if (beat_first) begin beats = 0; foreach (acc[s]) acc[s] = 0; end
    beats++;
    foreach (acc[s]) if (beat_hit[s]) acc[s] |= beat_pid[s];
    if (beat_last) begin last_ctrl = beat_ctrl; n_refs++; end
  end

  task automatic wr(input int s, input logic [31:0] ts, input logic [7:0] fine, input logic [15:0] pid);
    wr_valid <= N'(1) << s; wr_prim[s] <= '{ts: ts, fine: fine, pid: pid};
    @(posedge clk);
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++; `TB_END
  end

  initial begin
    int t0;
    foreach (wr_prim[s]) wr_prim[s] = '0;
    ref_prim = '0; ctl_prim = '0; n_refs = 0;
    window[0] = 12'd0; window[1] = 12'd200;   // 200/256 of a clock
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (!busy[0]);
    @(posedge clk);
    // Reference at ts 100, fine 0x80 (slot {ts,fine[7:6]} = 402).
    wr(0, 32'd100, 8'h80, 16'h0001);
    wr(1, 32'd100, 8'h40, 16'h0010);   // slot 401, 64 LSBs away: in time
    wr(1, 32'd100, 8'hC0, 16'h0020);   // slot 403, 64 away: in time
    wr(1, 32'd100, 8'h90, 16'h0040);   // slot 402 itself... overwritten next
    wr(1, 32'd100, 8'hBF, 16'h0080);   // slot 402, 63 away: in time
    wr_valid <= '0;
    @(posedge clk);
    ref_prim <= '{ts: 32'd100, fine: 8'h80, pid: 16'h0001}; ref_idx <= 16'd3; ref_empty <= 0;
    frame_count <= 16'd4;              // only one release after the entry's: not yet
    repeat (10) @(posedge clk);
    `CHECK(n_refs == 0 && !ref_rd, "waits for the following frame to be released")
    frame_count <= 16'd5;
    t0 = $time;
    @(posedge clk iff ref_rd);
    ref_empty <= 1;
    wait (n_refs == 1);
    `CHECK(($time - t0) / 8 <= 7, $sformatf("three beats within 7 clocks (%0d)", ($time - t0) / 8))
    `CHECK(beats == 3, "three slots read")
    `CHECK(acc[0] == 16'h0001, "reference source hits itself")
    `CHECK(acc[1] == 16'h00B0, $sformatf("source 1: previous, own and next slot in time (%h)", acc[1]))
    `CHECK(!last_ctrl, "driven by the reference FIFO")
    // Narrow window on source 1 and an old-turn primitive in the next slot.
    window[1] <= 12'd10;
    wr(1, 32'd36, 8'hC0, 16'h0100);    // slot 147 = 403 - 256: old turn, same address
    wr_valid <= '0;
    ctl_prim <= '{ts: 32'd100, fine: 8'h80, pid: 16'h0001}; ctl_idx <= 16'd0; ctl_empty <= 0;
    @(posedge clk iff ctl_rd);
    ctl_empty <= 1;
    wait (n_refs == 2);
    @(posedge clk);
    `CHECK(last_ctrl, "control FIFO served when the reference FIFO is idle")
    `CHECK(acc[1] == 16'h0000, $sformatf("outside the window and old turn rejected (%h)", acc[1]))
    `CHECK(acc[0] == 16'h0001, "reference still in time with itself")
    `TB_END
  end
endmodule
