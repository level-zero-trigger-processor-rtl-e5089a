// async_fifo: dual-clock FIFO carrying trigger words from the 125 MHz trigger
// logic to the 40 MHz output stage.
//
// Classic Gray-pointer design: each side keeps a binary pointer with one extra
// bit, converts it to Gray code, and passes it through two flip-flops into the
// other domain, where it is compared to decide full (write side) or empty (read
// side). Both flags are pessimistic, so no word is lost or read twice.
// First-word fall-through: rd_data is valid while empty is low; rd_en pops.
// DEPTH must be a power of two. The structure is this design's own choice;
// the trigger processor it belongs to is only said to use dual-clock FIFOs.
module async_fifo #(
  parameter int W     = 8,
  parameter int DEPTH = 16
) (
  input  logic         wr_clk,
  input  logic         wr_rst_n,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  output logic         full,
  input  logic         rd_clk,
  input  logic         rd_rst_n,
  input  logic         rd_en,
  output logic [W-1:0] rd_data,
  output logic         empty
);
  localparam int AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wbin, wgray, rbin, rgray;
  logic [AW:0]  rgray_w1, rgray_w2;   // read pointer seen by the write side
  logic [AW:0]  wgray_r1, wgray_r2;   // write pointer seen by the read side
  logic [AW:0]  wbin_nx, rbin_nx;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  assign wbin_nx = wbin + (AW+1)'(wr_en && !full);
  assign rbin_nx = rbin + (AW+1)'(rd_en && !empty);
  // Full when the Gray pointers differ exactly in the two top bits.
  assign full    = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
  assign empty   = (rgray == wgray_r2);
  assign rd_data = mem[rbin[AW-1:0]];

  always_ff @(posedge wr_clk) begin
    if (wr_en && !full) mem[wbin[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge wr_clk or negedge wr_rst_n) begin
    if (!wr_rst_n) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      wbin     <= wbin_nx;
      wgray    <= bin2gray(wbin_nx);
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
    end
  end

  always_ff @(posedge rd_clk or negedge rd_rst_n) begin
    if (!rd_rst_n) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      rbin     <= rbin_nx;
      rgray    <= bin2gray(rbin_nx);
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
    end
  end
endmodule
