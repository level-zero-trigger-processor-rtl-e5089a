// tb_async_fifo: writes 200 words at 125 MHz and reads them at 40 MHz with
// random stalls on both sides; every word must arrive once, in order, and
// full must stop the writer without loss.
`include "tb_util.svh"
module tb_async_fifo;
  logic wclk = 0, rclk = 0, rst_n = 0;
  always #4 wclk = ~wclk;
  always #12.5 rclk = ~rclk;
  int checks = 0, failures = 0;

  logic        wr_en = 0, full, rd_en, empty;
  logic [15:0] wr_data = 0, rd_data;
  int          n_wr = 0, n_rd = 0, bad = 0, saw_full = 0;

  async_fifo #(.W(16), .DEPTH(8)) dut (.wr_clk(wclk), .wr_rst_n(rst_n), .wr_en, .wr_data, .full,
                                       .rd_clk(rclk), .rd_rst_n(rst_n), .rd_en, .rd_data, .empty);

  always @(posedge wclk) if (rst_n) begin
    if (wr_en && !full) n_wr++;
    if (full) saw_full++;
    wr_en   <= (n_wr < 200) && (($urandom % 3) != 0);
    wr_data <= 16'(n_wr);
  end
  logic stall_n = 1;
  assign rd_en = !empty && stall_n;
  always @(posedge rclk) if (rst_n) begin
    stall_n <= ($urandom % 4) != 0;
    if (rd_en) begin
      if (rd_data != 16'(n_rd)) bad++;
      n_rd++;
    end
  end

  initial begin
    repeat (5000) @(posedge rclk);
    failures++; `TB_END
  end

  initial begin
    repeat (3) @(posedge rclk);
    rst_n = 1;
    wait (n_rd == 200);
    repeat (10) @(posedge rclk);
    `CHECK(n_rd == 200, "all words read")
    `CHECK(bad == 0, $sformatf("%0d words out of order", bad))
    `CHECK(saw_full > 0, "writer was stopped by full")
    `CHECK(empty, "empty at the end")
    `TB_END
  end
endmodule
