// tb_ref_fifo: only the selected source's non-calibration primitives enter
// the FIFO, each with the release index current when it arrived, and they
// leave in order; a full FIFO counts its overflow.
`include "tb_util.svh"
module tb_ref_fifo;
  import l0tp_pkg::*;
  localparam int N = 3;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic [SRC_W-1:0] sel = 3'd1;
  logic [N-1:0]     in_valid = '0;
  prim_t            in_prim [N];
  logic [15:0]      frame_idx = 16'd5;
  logic             rd_en = 0, empty;
  prim_t            head_prim;
  logic [15:0]      head_idx, n_overflow;

  ref_fifo #(.N(N), .DEPTH(4)) dut (.*);

  task automatic put(input logic [N-1:0] v, input logic [15:0] pid);
    in_valid <= v;
    for (int s = 0; s < N; s++) in_prim[s] <= '{ts: 32'(100 * s) + 32'(pid), fine: 8'(s), pid: pid + 16'(s)};
    @(posedge clk);
  endtask

  initial begin
    repeat (500) @(posedge clk);
    failures++; `TB_END
  end

  initial begin
    foreach (in_prim[s]) in_prim[s] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    put(3'b111, 16'h0010);
    frame_idx <= 16'd6;
    put(3'b101, 16'h0020);       // source 1 silent: nothing
    put(3'b010, 16'h8000);       // calibration primitive: ignored
    put(3'b010, 16'h0030);
    in_valid <= '0; @(posedge clk);
    `CHECK(!empty, "FIFO holds entries")
    `CHECK(head_prim.pid == 16'h0011 && head_prim.ts == 32'd116 && head_idx == 16'd5, "first entry: source 1, index 5")
    rd_en <= 1; @(posedge clk); rd_en <= 0; @(posedge clk);
    `CHECK(head_prim.pid == 16'h0031 && head_idx == 16'd6, "second entry: index 6")
    rd_en <= 1; @(posedge clk); rd_en <= 0; @(posedge clk);
    `CHECK(empty, "FIFO empty after two reads")
    `CHECK(n_overflow == 0, "no overflow yet")
    for (int k = 0; k < 6; k++) put(3'b010, 16'h0040 + 16'(k));
    in_valid <= '0; @(posedge clk);
    `CHECK(n_overflow == 2, $sformatf("two entries lost at depth 4 (%0d)", n_overflow))
    `TB_END
  end
endmodule
