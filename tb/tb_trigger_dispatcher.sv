// tb_trigger_dispatcher: offers triggers and checks the 3-clock minimum
// spacing, the choke on/off special triggers sent at once with suppression in
// between, error handling likewise, and autochoke when more than ac_max
// triggers arrive within one window, released after a quiet window.
`include "tb_util.svh"
module tb_trigger_dispatcher;
  import l0tp_pkg::*;
  localparam int ND = 4;
  logic clk = 0, rst_n = 0;
  always #12.5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [TS_W-1:0] ts = 0;
  logic [ND-1:0]   choke_in = 0, error_in = 0, choke_mask = 4'b0111, error_mask = 4'b1111;
  logic [15:0]     ac_window = 16'd100, ac_max = 16'd20;
  logic            in_valid = 0, l0_valid, choke_active, error_active, autochoke_active;
  trig_t           in_trig, l0_trig;
  logic [15:0]     n_drop_inhibit, n_drop_deadtime;

  trigger_dispatcher #(.ND(ND)) dut (.*);
  always @(posedge clk) ts <= ts + 1;

  trig_kind_e kinds[$]; int at[$];
  always @(posedge clk) if (rst_n && l0_valid) begin kinds.push_back(l0_trig.kind); at.push_back(l0_trig.ts); end

  function automatic int count(trig_kind_e k);
    int n = 0; foreach (kinds[i]) if (kinds[i] == k) n++; return n;
  endfunction

  task automatic offer(input int n, input int gap);
    for (int i = 0; i < n; i++) begin
      in_valid <= 1; in_trig <= '0; in_trig.kind <= TK_PHYSICS; in_trig.ts <= ts;
      @(posedge clk);
      in_valid <= 0;
      repeat (gap - 1) @(posedge clk);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; `TB_END
  end

  initial begin
    int min_gap;
    in_trig = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    // Spacing: triggers every 2 clocks, 10 of them: every other one is too close.
    offer(10, 2);
    repeat (5) @(posedge clk);
    `CHECK(count(TK_PHYSICS) == 5, $sformatf("half pass at a 2-clock spacing (%0d)", count(TK_PHYSICS)))
    `CHECK(n_drop_deadtime == 5, "five dropped by the dead time")
    min_gap = 1000;
    for (int i = 1; i < at.size(); i++) if (at[i] - at[i-1] < min_gap) min_gap = at[i] - at[i-1];
    `CHECK(min_gap >= 3, "no two triggers closer than 3 clocks")
    // Choke on detector 1.
    choke_in[1] <= 1;
    repeat (6) @(posedge clk);
    `CHECK(choke_active && count(TK_CHOKE_ON) == 1, "choke-on special trigger sent")
    offer(5, 4);
    `CHECK(count(TK_PHYSICS) == 5 && n_drop_inhibit == 5, "triggers suppressed during choke")
    choke_in[1] <= 0;
    repeat (6) @(posedge clk);
    `CHECK(!choke_active && count(TK_CHOKE_OFF) == 1, "choke-off special trigger sent")
    offer(3, 4);
    `CHECK(count(TK_PHYSICS) == 8, "triggers resume after choke")
    // A masked detector's choke is ignored.
    choke_in[3] <= 1; repeat (6) @(posedge clk);
    `CHECK(!choke_active, "masked choke ignored")
    choke_in[3] <= 0;
    // Error.
    error_in[2] <= 1; repeat (6) @(posedge clk);
    error_in[2] <= 0; repeat (6) @(posedge clk);
    `CHECK(count(TK_ERROR_ON) == 1 && count(TK_ERROR_OFF) == 1, "error on/off special triggers")
    // Autochoke: 30 triggers at 3-clock spacing exceed 20 per 100-clock window.
    offer(30, 3);
    `CHECK(count(TK_AUTOCHOKE_ON) == 1, "autochoke engaged")
    repeat (250) @(posedge clk);
    `CHECK(count(TK_AUTOCHOKE_OFF) == 1 && !autochoke_active, "autochoke released after a quiet window")
    `TB_END
  end
endmodule
