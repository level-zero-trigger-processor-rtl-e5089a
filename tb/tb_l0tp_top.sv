// tb_l0tp_top: end-to-end run of the whole trigger processor at its full
// default sizes (16384-slot alignment RAMs, 8192-word frame FIFOs, 65536-slot
// latency buffer).
//
// Seven sources send one MTP per 6.4 us frame for ten frames after start of
// burst; source 3 is two frames slow and sends two junk frames first, which
// the delay generator must skip. Source 0 is the reference detector, source 1
// the control detector. Each event has a reference primitive and, depending
// on its number, hits in sources 2, 3 and 4 and an out-of-window hit in
// source 5. The testbench works out the global primitive IDs and the masks
// itself and expects exactly the resulting physics triggers, each delivered
// `latency` clocks after its time, plus control, calibration-primitive,
// periodic and NIM triggers. A choke during part of the readout must suppress
// the triggers due then and announce itself; a burst of random triggers must
// set off autochoke; an error must be announced; two events one clock apart
// must lose the second to the 75 ns dead time. Every delivered trigger must
// reach the PC-farm packets. Each of these mechanisms is counted and must
// have happened at least once.
`include "tb_util.svh"
module tb_l0tp_top;
  import l0tp_pkg::*;
  logic clk_sys = 0, clk_40 = 0, rst_n = 0;
  always #4 clk_sys = ~clk_sys;
  always #12.5 clk_40 = ~clk_40;
  int checks = 0, failures = 0;

  localparam int LAT = 4000;   // 100 us, the latency used in the paper's tests

  logic [NSRC-1:0]  mtp_valid = '0, mtp_sop, mtp_eop, mtp_ready;
  logic [31:0]      mtp_data [NSRC];
  logic             sob_in = 0, eob_in = 0, nim_calib_in = 0;
  logic [NDET-1:0]  choke_in = '0, error_in = '0;
  logic [7:0]       cfg_src_id [NSRC];
  logic [NSRC-1:0]  cfg_src_enable;
  logic [7:0]       cfg_skip_frames [NSRC];
  logic [1:0]       cfg_fine_bits;
  logic [SRC_W-1:0] cfg_ref_src, cfg_ctl_src;
  logic [WIN_W-1:0] cfg_window [NSRC];
  logic [NMASK-1:0] cfg_mask_enable;
  logic [PID_W-1:0] cfg_mask_care [NMASK][NSRC], cfg_mask_value [NMASK][NSRC];
  logic             cfg_ctl_enable;
  logic [PID_W-1:0] cfg_ctl_care [NSRC], cfg_ctl_value [NSRC];
  logic [DS_W-1:0]  cfg_ds_factor [NMASK], cfg_ctl_factor;
  logic [LAT_AW-1:0] cfg_latency;
  logic [NDET-1:0]  cfg_choke_mask, cfg_error_mask;
  logic [15:0]      cfg_ac_window, cfg_ac_max;
  logic [TS_W-1:0]  cfg_per_period [2], cfg_per_start [2], cfg_per_stop [2], cfg_rnd_start;
  logic [15:0]      cfg_rnd_rate_div, cfg_mep_timeout;
  logic             cfg_nim_enable;
  logic             l0_valid, mep_valid, mep_sop, mep_eop, mep_ready = 1;
  trig_t            l0_trig;
  logic [31:0]      mep_data;
  logic             choke_active, error_active, autochoke_active, ram_busy;
  logic [15:0]      frame_count;
  logic [15:0]      n_rejected [NSRC], n_bad_pkt [NSRC], dg_overflow [NSRC];
  logic [15:0]      ref_ovf, ctl_ovf, cal_dropped, lb_late, n_drop_inhibit, n_drop_deadtime, mep_lost;

  l0tp_top dut (.*);

  // ---------------- stimulus model ----------------
  typedef struct { int src; int ts; int fine; int pid; } hit_t;
  hit_t frame_hits [NSRC][16][$];      // per source, per time frame
  typedef struct { int ts; int fine; trig_kind_e kind; logic [NMASK-1:0] masks; } exp_t;
  exp_t exp_q[$];
  int   n_edge = 0, n_vetoed = 0, n_outwin = 0, n_dscaled = 0;

  function automatic void add_hit(int s, int t, int f, int pid);
    hit_t h; h.src = s; h.ts = t; h.fine = f; h.pid = pid;
    frame_hits[s][t / 256].push_back(h);
  endfunction

  // Event i at time (t, fine): which sources see it, and the masks expected.
  int m2_count = 0;
  function automatic void make_event(int i, int t, int f, bit expect_it);
    int g0, g2, g3, g4; logic [NMASK-1:0] m;
    g0 = (i % 5 == 0) ? 3 : 1;
    add_hit(0, t, f, g0);
    g2 = 0; g3 = 0; g4 = 0;
    if (i % 2 == 0) begin     // source 2 late by 40 LSBs: often in the next slot
      add_hit(2, t + (f + 40) / 256, (f + 40) % 256, 1); g2 = 1;
      if (((f + 40) / 64) != (f / 64)) n_edge++;
    end
    if (i % 2 == 1) begin add_hit(3, t, (f > 30) ? f - 30 : f, 2); g3 = 2; end
    if (i % 3 == 0) begin add_hit(4, t, f, 1); g4 = 1; end
    if (i % 4 == 1) begin add_hit(5, t, (f + 120) % 256, 1); end   // far outside the window
    m = '0;
    m[0] = g2[0];                                   // src0 bit0 & src2 bit0
    m[1] = !g4[0];                                  // src0 bit0, src4 bit0 vetoed
    if (g4[0]) n_vetoed++;
    if (i % 4 == 1) n_outwin++;
    if (g0[1]) begin                                // src0 bit1, downscaled by 2
      m[2] = (m2_count % 2 == 0);
      if (!m[2]) n_dscaled++;
      m2_count++;
    end
    m[3] = (g3 == 2);                               // src0 bit0 & src3 bit1
    if (m != '0 && expect_it) exp_q.push_back('{t, f, TK_PHYSICS, m});
  endfunction

  // ---------------- MTP drivers ----------------
  logic [33:0] wq [NSRC][$];
  for (genvar s = 0; s < NSRC; s++) begin : g_drv
    always @(posedge clk_sys) begin
      if (!mtp_valid[s] || mtp_ready[s]) begin
        if (wq[s].size() > 0) begin
          {mtp_sop[s], mtp_eop[s], mtp_data[s]} <= wq[s][0];
          mtp_valid[s] <= 1'b1;
          void'(wq[s].pop_front());
        end else mtp_valid[s] <= 1'b0;
      end
    end
  end

  task automatic send_mtp(int s, int frame, hit_t hits[$]);
    int n; n = hits.size();
    wq[s].push_back({1'b1, 1'b0, 8'(s), 8'h00, 16'(n)});
    wq[s].push_back({1'b0, n == 0, 32'(frame * 256)});
    for (int k = 0; k < n; k++) begin
      wq[s].push_back({1'b0, 1'b0, 16'(hits[k].pid), 8'h00, 8'(hits[k].fine)});
      wq[s].push_back({1'b0, k == n - 1, 32'(hits[k].ts)});
    end
  endtask

  // ---------------- output monitors ----------------
  trig_t got_q[$]; int got_at[$];
  int n_kind [16];
  always @(posedge clk_40) if (rst_n && l0_valid) begin
    got_q.push_back(l0_trig); got_at.push_back(dut.ts40);
    n_kind[l0_trig.kind]++;
  end
  int mep_records = 0, mep_packets = 0;
  always @(posedge clk_40) if (rst_n && mep_valid && mep_ready && mep_sop) begin
    mep_records += mep_data[15:8]; mep_packets++;
  end

  initial begin
    #20ms;
    failures++; $display("watchdog"); `TB_END
  end

  initial begin
    hit_t junk[$];
    foreach (n_kind[k]) n_kind[k] = 0;
    foreach (mtp_data[s]) begin mtp_data[s] = 0; mtp_sop[s] = 0; mtp_eop[s] = 0; end
    for (int s = 0; s < NSRC; s++) begin
      cfg_src_id[s] = 8'(s); cfg_skip_frames[s] = 0; cfg_window[s] = 12'd52;  // ~5 ns
      cfg_ctl_care[s] = 0; cfg_ctl_value[s] = 0;
    end
    cfg_src_enable = '1; cfg_skip_frames[3] = 8'd2;
    cfg_fine_bits = 2'd2; cfg_ref_src = 3'd0; cfg_ctl_src = 3'd1;
    foreach (cfg_mask_care[m, s]) begin cfg_mask_care[m][s] = 0; cfg_mask_value[m][s] = 0; end
    foreach (cfg_ds_factor[m]) cfg_ds_factor[m] = 1;
    cfg_mask_enable = 16'h000F;
    cfg_mask_care[0][0] = 1; cfg_mask_value[0][0] = 1; cfg_mask_care[0][2] = 1; cfg_mask_value[0][2] = 1;
    cfg_mask_care[1][0] = 1; cfg_mask_value[1][0] = 1; cfg_mask_care[1][4] = 1;
    cfg_mask_care[2][0] = 2; cfg_mask_value[2][0] = 2; cfg_ds_factor[2] = 2;
    cfg_mask_care[3][0] = 1; cfg_mask_value[3][0] = 1; cfg_mask_care[3][3] = 2; cfg_mask_value[3][3] = 2;
    cfg_ctl_enable = 1; cfg_ctl_care[1] = 1; cfg_ctl_value[1] = 1; cfg_ctl_factor = 1;
    cfg_latency = 16'(LAT);
    cfg_choke_mask = '1; cfg_error_mask = '1;
    cfg_ac_window = 16'd400; cfg_ac_max = 16'd14;
    cfg_per_period[0] = 1000; cfg_per_start[0] = 500; cfg_per_stop[0] = 2600;
    cfg_per_period[1] = 10000; cfg_per_start[1] = 700; cfg_per_stop[1] = 800;
    cfg_rnd_start = 3000; cfg_rnd_rate_div = 2;
    cfg_nim_enable = 1; cfg_mep_timeout = 100;

    // Events: frames 1..8, five per frame, 40 clocks apart.
    for (int f = 1; f <= 8; f++)
      for (int j = 0; j < 5; j++) begin
        int i; i = (f - 1) * 5 + j;
        make_event(i, f * 256 + 40 * j + 5, 60 + (i * 37) % 130, 1);
      end
    // Two events one clock apart: the second is lost to the dead time.
    make_event(100, 9 * 256 + 10, 100, 1);
    make_event(102, 9 * 256 + 11, 100, 0);
    // Control-detector primitives, away from the events.
    for (int k = 0; k < 4; k++) begin
      add_hit(1, (2 + 2 * k) * 256 + 230, 128, 1);
      exp_q.push_back('{(2 + 2 * k) * 256 + 230, 128, TK_CONTROL, '0});
    end
    // A calibration primitive from source 6.
    add_hit(6, 7 * 256 + 200, 77, 16'h8001);
    exp_q.push_back('{7 * 256 + 200, 77, TK_CALIB_PRIM, '0});
    // Periodic triggers.
    exp_q.push_back('{500, 0, TK_PERIODIC0, '0});
    exp_q.push_back('{700, 0, TK_PERIODIC1, '0});
    exp_q.push_back('{1500, 0, TK_PERIODIC0, '0});
    exp_q.push_back('{2500, 0, TK_PERIODIC0, '0});
    // A junk primitive in source 3's skipped frame 1, on an event's time.
    junk.push_back('{3, 1 * 256 + 5, 60, 2});

    repeat (5) @(posedge clk_40);
    rst_n = 1;
    wait (!ram_busy);
    repeat (10) @(posedge clk_40);
    sob_in <= 1;
    repeat (10) @(posedge clk_40);
    // One MTP per source and frame, each sent once its frame is over.
    for (int k = 0; k < 12; k++) begin
      wait (dut.ts40 >= (k + 1) * 256 + 10);
      @(posedge clk_sys);
      for (int s = 0; s < NSRC; s++) begin
        hit_t none[$];
        if (s == 3) begin
          if (k < 2) send_mtp(3, k, (k == 1) ? junk : none);
          else       send_mtp(3, k - 2, frame_hits[3][k - 2]);
        end else if (k < 10) send_mtp(s, k, frame_hits[s][k]);
      end
    end
    wait (dut.ts40 >= 3400);
    eob_in <= 1; sob_in <= 0;
    wait (dut.ts40 >= 5000);
    nim_calib_in <= 1;
    repeat (5) @(posedge clk_40);
    nim_calib_in <= 0;
    wait (dut.ts40 >= LAT + 1390);
    choke_in[5] <= 1;
    wait (dut.ts40 >= LAT + 1610);
    choke_in[5] <= 0;
    wait (dut.ts40 >= 10000);
    error_in[2] <= 1;
    repeat (20) @(posedge clk_40);
    error_in[2] <= 0;
    wait (dut.ts40 >= 12000);
    check_results();
    `TB_END
  end

  task automatic check_results();
    int n_exp, n_exp_phys, n_match, n_missing, n_inhibited, lat_bad, nim_ok;
    n_exp = 0; n_exp_phys = 0; n_match = 0; n_missing = 0; n_inhibited = 0; lat_bad = 0;
    foreach (exp_q[e]) begin
      bit found; found = 0;
      if (exp_q[e].ts >= 1390 + 2 && exp_q[e].ts <= 1610 + 2) begin n_inhibited++; continue; end
      n_exp++;
      if (exp_q[e].kind == TK_PHYSICS) n_exp_phys++;
      foreach (got_q[g])
        if (got_q[g].ts == 32'(exp_q[e].ts) && got_q[g].kind == exp_q[e].kind
            && (exp_q[e].kind != TK_PHYSICS || (got_q[g].masks == exp_q[e].masks
                                               && got_q[g].fine == 8'(exp_q[e].fine)))) begin
          found = 1;
          if (got_at[g] - int'(got_q[g].ts) != LAT + 2) begin
            lat_bad++;
            if (lat_bad == 1) $display("latency seen %0d", got_at[g] - int'(got_q[g].ts));
          end
        end
      if (found) n_match++;
      else begin
        n_missing++;
        $display("missing %s at %0d masks %b", exp_q[e].kind.name(), exp_q[e].ts, exp_q[e].masks);
      end
    end
    `CHECK(n_missing == 0, $sformatf("%0d of %0d expected triggers missing", n_missing, n_exp))
    `CHECK(lat_bad == 0, $sformatf("%0d triggers not delivered at time + latency", lat_bad))
    `CHECK(n_kind[TK_PHYSICS] == n_exp_phys, $sformatf("no extra physics triggers (%0d)", n_kind[TK_PHYSICS]))
    nim_ok = 0;
    foreach (got_q[g]) if (got_q[g].kind == TK_CALIB_NIM && got_q[g].ts >= 5000 && got_q[g].ts <= 5005) nim_ok++;
    // mechanisms
    `CHECK(dut.u_delay.frame_count >= 10, "frames released by the delay generator")
    `CHECK(n_edge > 0, "edge effect: a hit in the neighbouring slot")
    `CHECK(n_vetoed > 0, "veto bit used")
    `CHECK(n_outwin > 0, "out-of-window hit present")
    `CHECK(n_dscaled > 0, "downscaling removed a match")
    `CHECK(n_inhibited > 0 && n_drop_inhibit > 0, "choke suppressed triggers")
    `CHECK(n_kind[TK_CHOKE_ON] == 1 && n_kind[TK_CHOKE_OFF] == 1, "choke on/off announced")
    `CHECK(n_kind[TK_ERROR_ON] == 1 && n_kind[TK_ERROR_OFF] == 1, "error on/off announced")
    `CHECK(n_kind[TK_AUTOCHOKE_ON] >= 1 && n_kind[TK_AUTOCHOKE_OFF] >= 1, "autochoke engaged and released")
    `CHECK(n_kind[TK_RANDOM] > 0, "random triggers delivered")
    `CHECK(n_kind[TK_CONTROL] == 4, "control triggers")
    `CHECK(n_kind[TK_CALIB_PRIM] == 1, "calibration-primitive trigger")
    `CHECK(nim_ok == 1, "NIM calibration trigger")
    `CHECK(n_drop_deadtime > 0, "dead time dropped a trigger")
    `CHECK(mep_records == got_q.size() && mep_packets > 0, $sformatf("PC farm got every trigger (%0d of %0d)", mep_records, got_q.size()))
    foreach (n_rejected[s]) `CHECK(n_rejected[s] == 0 && dg_overflow[s] == 0, "no rejected or lost primitives")
    `CHECK(lb_late == 0 && mep_lost == 0, "nothing late or lost")
    $display("triggers: physics %0d control %0d periodic %0d random %0d choke %0d/%0d autochoke %0d/%0d, inhibited %0d, dead-time drops %0d",
             n_kind[TK_PHYSICS], n_kind[TK_CONTROL], n_kind[TK_PERIODIC0] + n_kind[TK_PERIODIC1], n_kind[TK_RANDOM],
             n_kind[TK_CHOKE_ON], n_kind[TK_CHOKE_OFF], n_kind[TK_AUTOCHOKE_ON], n_kind[TK_AUTOCHOKE_OFF], n_drop_inhibit, n_drop_deadtime);
  endtask
endmodule
