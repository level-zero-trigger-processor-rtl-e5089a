// tb_mep_generator: ten triggers go in; with EVENTS = 4 the output must be
// two full packets of four records and, after the timeout, one of two, each
// with a header (packet number, record count) and records whose words match
// the triggers, with start and end flags on the first and last word. The
// receiver stalls at random.
`include "tb_util.svh"
module tb_mep_generator;
  import l0tp_pkg::*;
  localparam int EV = 4, RECW = 2 + (NSRC + 1) / 2;
  logic clk = 0, rst_n = 0;
  always #12.5 clk = ~clk;
  int checks = 0, failures = 0;
  logic        in_valid = 0, out_valid, out_sop, out_eop, out_ready = 1;
  trig_t       in_trig;
  logic [31:0] out_data;
  logic [15:0] n_lost, timeout = 16'd50;

  mep_generator #(.EVENTS(EV), .DEPTH(16)) dut (.*);

  logic [31:0] words[$]; int sops = 0, eops = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      words.push_back(out_data);
      if (out_sop) sops++;
      if (out_eop) eops++;
    end
    out_ready <= ($urandom % 4) != 0;
  end

  function automatic trig_t mk(input int i);
    trig_t t; t = '0; t.kind = TK_PHYSICS; t.ts = 32'(5000 + 7 * i); t.fine = 8'(i);
    t.masks = 16'(1 << (i % 16));
    for (int s = 0; s < NSRC; s++) t.gid[s] = 16'(i * 16 + s);
    return t;
  endfunction

  initial begin
    repeat (3000) @(posedge clk);
    failures++; `TB_END
  end

  initial begin
    int p, rec, bad;
    in_trig = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 10; i++) begin
      in_valid <= 1; in_trig <= mk(i); @(posedge clk);
      in_valid <= 0; repeat (3) @(posedge clk);
    end
    repeat (300) @(posedge clk);
    `CHECK(sops == 3 && eops == 3, $sformatf("three packets (%0d/%0d)", sops, eops))
    `CHECK(words.size() == 3 + 10 * RECW, $sformatf("word count %0d", words.size()))
    p = 0; rec = 0; bad = 0;
    for (int k = 0; k < 3 && p < words.size(); k++) begin
      int n; n = (k < 2) ? 4 : 2;
      if (words[p] != {16'(k), 8'(n), 8'h00}) bad++;
      p++;
      for (int r = 0; r < n && p + RECW <= words.size(); r++) begin
        trig_t t; t = mk(rec);
        if (words[p] != {t.kind, 4'h0, t.fine, t.masks}) bad++;
        if (words[p+1] != t.ts) bad++;
        if (words[p+2] != {t.gid[1], t.gid[0]}) bad++;
        if (words[p+5] != {16'h0, t.gid[6]}) bad++;
        p += RECW; rec++;
      end
    end
    `CHECK(bad == 0, $sformatf("%0d words differ", bad))
    `CHECK(n_lost == 0, "nothing lost")
    `TB_END
  end
endmodule
