// tb_delay_generator: three sources, source 0 being two frames slower. Its
// first two frames must be skipped and frame k+2 of source 0 must come out
// together with frame k of sources 1 and 2; frames leave in lock-step and
// only once every source has one complete. A source that keeps sending while
// another is silent must overflow its (small) FIFO and count the loss.
`include "tb_util.svh"
module tb_delay_generator;
  import l0tp_pkg::*;
  localparam int N = 3;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic              sob = 0;
  logic [N-1:0]      src_enable = '1;
  logic [7:0]        skip_frames [N];
  logic [N-1:0]      in_valid = '0;
  frame_word_t       in_word [N];
  logic [N-1:0]      out_valid;
  prim_t             out_prim [N];
  logic              frame_done;
  logic [15:0]       frame_count;
  logic [15:0]       n_overflow [N];

  delay_generator #(.N(N), .DEPTH(16)) dut (.*);

  // Expected: frame f of source s carries primitives with pid {s, f, k}.
  // Source 0 sends frames 0..5, where frame f >= 2 holds the primitives of
  // time frame f-2; frames 0 and 1 hold junk (pid 8'hEE) that must vanish.
  prim_t got [N][$];
  int    got_rel [N][$];
  always @(posedge clk)
    for (int s = 0; s < N; s++)
      if (out_valid[s]) begin
        got[s].push_back(out_prim[s]);
        got_rel[s].push_back(frame_count);
      end

  task automatic put(input int s, input bit eof, input logic [15:0] pid);
    in_valid    <= N'(1) << s;
    in_word[s]  <= '{eof: eof, prim: '{ts: 32'(pid), fine: '0, pid: pid}};
    @(posedge clk);
  endtask
  task automatic idle(input int n);
    in_valid <= '0;
    repeat (n) @(posedge clk);
  endtask

  function automatic logic [15:0] pidof(int s, int f, int k);
    return 16'((s << 12) | (f << 4) | k);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++; `TB_END
  end

  initial begin
    foreach (in_word[s]) in_word[s] = '0;
    skip_frames[0] = 8'd2; skip_frames[1] = 8'd0; skip_frames[2] = 8'd0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); sob <= 1; @(posedge clk); sob <= 0;
    // Fast sources send frames 0..2 (2 primitives each), slow one its two junk frames.
    for (int f = 0; f < 3; f++)
      for (int s = 1; s < N; s++) begin
        for (int k = 0; k < 2; k++) put(s, 0, pidof(s, f, k));
        put(s, 1, 16'hFFFF);
      end
    for (int f = 0; f < 2; f++) begin put(0, 0, 16'h0EE0 + 16'(f)); put(0, 1, 16'hFFFF); end
    idle(20);
    `CHECK(frame_count == 0, "nothing released before the slow source delivers")
    foreach (got[s]) `CHECK(got[s].size() == 0, "no primitive before the slow source")
    // Slow source sends time frames 0..2 (one primitive each).
    for (int f = 0; f < 3; f++) begin put(0, 0, pidof(0, f, 0)); put(0, 1, 16'hFFFF); end
    idle(30);
    `CHECK(frame_count == 3, $sformatf("three frames released, got %0d", frame_count))
    $display("sizes %0d %0d %0d", got[0].size(), got[1].size(), got[2].size());
    `CHECK(got[0].size() == 3, "slow source: three primitives, junk skipped")
    for (int f = 0; f < 3 && f < got[0].size(); f++) begin
      `CHECK(got[0][f].pid == pidof(0, f, 0), "slow source order")
      `CHECK(got_rel[0][f] == f, "slow source frame f in release f")
    end
    for (int s = 1; s < N; s++) begin
      `CHECK(got[s].size() == 6, "fast source: six primitives")
      for (int i = 0; i < 6 && i < got[s].size(); i++) begin
        `CHECK(got[s][i].pid == pidof(s, i / 2, i % 2), "fast source order")
        `CHECK(got_rel[s][i] == i / 2, "fast source frame in lock-step")
      end
    end
    // Overflow: source 1 sends 20 words while source 0 is silent.
    for (int k = 0; k < 20; k++) put(1, 0, 16'h1000 + 16'(k));
    idle(5);
    `CHECK(n_overflow[1] == 4, $sformatf("overflow count %0d", n_overflow[1]))
    `CHECK(n_overflow[0] == 0 && n_overflow[2] == 0, "no overflow elsewhere")
    `TB_END
  end
endmodule
