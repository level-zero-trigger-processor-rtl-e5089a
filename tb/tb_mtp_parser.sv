// tb_mtp_parser: sends MTPs to one parser and compares the frame words it
// emits with the primitives put in: good primitives pass with their fields,
// a primitive outside the frame is rejected and counted, an empty MTP still
// yields an end-of-frame marker, and a packet of another source is dropped.
`include "tb_util.svh"
module tb_mtp_parser;
  import l0tp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic        in_valid = 0, in_sop, in_eop, in_ready;
  logic [31:0] in_data;
  logic        out_valid;
  frame_word_t out_word;
  logic [15:0] n_rejected, n_bad;

  mtp_parser dut (.clk, .rst_n, .src_id(8'h05), .in_valid, .in_data, .in_sop, .in_eop, .in_ready,
                  .out_valid, .out_word, .n_rejected, .n_bad_packets(n_bad));

  frame_word_t got[$];
  always @(posedge clk) if (out_valid) got.push_back(out_word);

  // Words wait in a queue and are presented one per clock while in_ready.
  logic [33:0] q[$];
  task automatic send(input logic [31:0] w, input bit sop, input bit eop);
    q.push_back({sop, eop, w});
  endtask
  always @(posedge clk) begin
    if (!in_valid || in_ready) begin
      if (q.size() > 0) begin
        {in_sop, in_eop, in_data} <= q[0];
        in_valid <= 1'b1;
        void'(q.pop_front());
      end else begin
        in_valid <= 1'b0;
      end
    end
  end

  // MTP with n primitives; primitive k has time frame*256 + 10*k + off.
  task automatic send_mtp(input logic [7:0] sid, input int frame, input int n, input int bad_k);
    send({sid, 8'h00, 16'(n)}, 1, 0);
    send(32'(frame * 256), 0, n == 0);
    for (int k = 0; k < n; k++) begin
      send({16'h0100 + 16'(k), 8'h00, 8'(17 * k)}, 0, 0);
      send((k == bad_k) ? 32'((frame + 1) * 256 + 3) : 32'(frame * 256 + 10 * k), 0, k == n - 1);
    end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++; `TB_END
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    send_mtp(8'h05, 7, 3, -1);     // three good primitives
    send_mtp(8'h05, 8, 0, -1);     // empty frame
    send_mtp(8'h05, 9, 2, 1);      // second primitive outside the frame
    send_mtp(8'h09, 10, 2, -1);    // foreign source ID
    wait (q.size() == 0);
    repeat (10) @(posedge clk);
    foreach (got[i]) $display("%0d eof=%0d ts=%0d pid=%h", i, got[i].eof, got[i].prim.ts, got[i].prim.pid);
    `CHECK(got.size() == 3 + 1 + 1 + 1 + 1, $sformatf("word count %0d", got.size()))
    if (got.size() == 7) begin
      for (int k = 0; k < 3; k++) begin
        `CHECK(!got[k].eof && got[k].prim.ts == 32'(7*256 + 10*k), "primitive timestamp")
        `CHECK(got[k].prim.pid == 16'h0100 + 16'(k) && got[k].prim.fine == 8'(17*k), "primitive id/fine")
      end
      `CHECK(got[3].eof && got[3].prim.ts == 32'(7*256), "eof of frame 7")
      `CHECK(got[4].eof && got[4].prim.ts == 32'(8*256), "eof of empty frame 8")
      `CHECK(!got[5].eof && got[5].prim.ts == 32'(9*256), "good primitive of frame 9")
      `CHECK(got[6].eof && got[6].prim.ts == 32'(9*256), "eof of frame 9")
    end
    `CHECK(n_rejected == 1, "one primitive rejected by the frame check")
    `CHECK(n_bad == 1, "one foreign packet")
    `TB_END
  end
endmodule
