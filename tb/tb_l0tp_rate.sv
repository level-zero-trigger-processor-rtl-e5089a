// tb_l0tp_rate: the design operating point, run on the whole trigger
// processor at its full default sizes.
//
// All seven sources send primitives at 10 MHz each, the rate the design is
// built for: 64 primitives per 6.4 us frame, one every 4 master-clock periods,
// for twelve frames. Every source sees every event (same time, fine times a
// few LSBs apart). Source 0 is the reference detector. Source 1 marks every
// tenth event with ID bit 1, and the single physics mask asks for reference
// bit 0 and source 1 bit 1, so the trigger output is about 1 MHz, the
// experiment's maximum. Source 4 runs two frames late and has its first two
// frames skipped, so the delay generator buffers the other six sources
// meanwhile.
// Checks: exactly the expected triggers come out, each at time + latency + 2
// master clocks (the pipeline kept up); no primitive is rejected, overflowed
// or late; no trigger is lost on the way to the PC farm; every frame is
// released. Autochoke, periodic, random and NIM triggers are switched off.
`include "tb_util.svh"
module tb_l0tp_rate;
  import l0tp_pkg::*;
  logic clk_sys = 0, clk_40 = 0, rst_n = 0;
  always #4 clk_sys = ~clk_sys;
  always #12.5 clk_40 = ~clk_40;
  int checks = 0, failures = 0;

  localparam int LAT     = 4000;  // 100 us
  localparam int NFRAMES = 12;
  localparam int PER_FRAME = 64;  // 10 MHz x 6.4 us
  localparam int SLOW    = 4;     // source two frames late

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

  function automatic int ev_ts(int f, int j); return f * 256 + 4 * j + 1; endfunction

  // One full frame of source s: PER_FRAME primitives (an empty one if junk).
  task automatic send_frame(int s, int f, bit junk);
    int n; n = junk ? 0 : PER_FRAME;
    wq[s].push_back({1'b1, 1'b0, 8'(s), 8'h00, 16'(n)});
    wq[s].push_back({1'b0, n == 0, 32'(f * 256)});
    for (int j = 0; j < n; j++) begin
      int pid; pid = (s == 1 && j % 10 == 0) ? 3 : 1;
      wq[s].push_back({1'b0, 1'b0, 16'(pid), 8'h00, 8'(100 + s)});
      wq[s].push_back({1'b0, j == n - 1, 32'(ev_ts(f, j))});
    end
  endtask

  // ---------------- output monitors ----------------
  int n_phys = 0, n_other = 0, lat_bad = 0, ts_bad = 0, n_expected = 0;
  int next_j = 0, next_f = 1;
  always @(posedge clk_40) if (rst_n && l0_valid) begin
    if (l0_trig.kind != TK_PHYSICS) n_other++;
    else begin
      n_phys++;
      if (dut.ts40 - l0_trig.ts != 32'(LAT + 2)) lat_bad++;
      if (l0_trig.ts != 32'(ev_ts(next_f, next_j)) || l0_trig.masks != 16'h0001) ts_bad++;
      next_j += 10;
      if (next_j >= PER_FRAME) begin next_j = 0; next_f++; end
    end
  end
  int mep_records = 0;
  always @(posedge clk_40) if (rst_n && mep_valid && mep_ready && mep_sop) mep_records += mep_data[15:8];

  initial begin
    #20ms;
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (mtp_data[s]) begin mtp_data[s] = 0; mtp_sop[s] = 0; mtp_eop[s] = 0; end
    for (int s = 0; s < NSRC; s++) begin
      cfg_src_id[s] = 8'(s); cfg_skip_frames[s] = 0; cfg_window[s] = 12'd52;
      cfg_ctl_care[s] = 0; cfg_ctl_value[s] = 0;
    end
    cfg_src_enable = '1; cfg_skip_frames[SLOW] = 8'd2;
    cfg_fine_bits = 2'd2; cfg_ref_src = 3'd0; cfg_ctl_src = 3'd1;
    foreach (cfg_mask_care[m, s]) begin cfg_mask_care[m][s] = 0; cfg_mask_value[m][s] = 0; end
    foreach (cfg_ds_factor[m]) cfg_ds_factor[m] = 1;
    cfg_mask_enable = 16'h0001;
    cfg_mask_care[0][0] = 1; cfg_mask_value[0][0] = 1;
    cfg_mask_care[0][1] = 2; cfg_mask_value[0][1] = 2;
    cfg_ctl_enable = 0; cfg_ctl_factor = 1;
    cfg_latency = 16'(LAT);
    cfg_choke_mask = '1; cfg_error_mask = '1;
    cfg_ac_window = 16'd0; cfg_ac_max = 16'd0;
    foreach (cfg_per_period[k]) begin cfg_per_period[k] = 0; cfg_per_start[k] = 0; cfg_per_stop[k] = 0; end
    cfg_rnd_start = '1; cfg_rnd_rate_div = 16'd1;
    cfg_nim_enable = 0; cfg_mep_timeout = 100;
    for (int f = 1; f <= NFRAMES; f++)
      for (int j = 0; j < PER_FRAME; j += 10) n_expected++;

    repeat (5) @(posedge clk_40);
    rst_n = 1;
    wait (!ram_busy);
    repeat (10) @(posedge clk_40);
    sob_in <= 1;
    repeat (10) @(posedge clk_40);
    // Frame k of each source is sent once it is over; source SLOW sends two
    // junk frames first and is two frames late from then on.
    for (int k = 0; k <= NFRAMES + 2; k++) begin
      wait (dut.ts40 >= (k + 1) * 256 + 10);
      @(posedge clk_sys);
      for (int s = 0; s < NSRC; s++) begin
        if (s == SLOW) begin
          if (k < 2) send_frame(s, k, 1);
          else if (k - 2 == 0) send_frame(s, 0, 1);
          else send_frame(s, k - 2, 0);
        end else if (k == 0) send_frame(s, 0, 1);
        else if (k <= NFRAMES) send_frame(s, k, 0);
      end
    end
    wait (dut.ts40 >= (NFRAMES + 5) * 256);
    eob_in <= 1; sob_in <= 0;
    wait (dut.ts40 >= LAT + (NFRAMES + 2) * 256);
    repeat (400) @(posedge clk_40);

    `CHECK(n_phys == n_expected, $sformatf("physics triggers %0d, expected %0d", n_phys, n_expected))
    `CHECK(ts_bad == 0, $sformatf("%0d triggers with a wrong time or mask", ts_bad))
    `CHECK(lat_bad == 0, $sformatf("%0d triggers not at time + latency + 2", lat_bad))
    `CHECK(n_other == 0, "no other trigger kinds")
    `CHECK(dut.u_delay.frame_count >= NFRAMES + 1, $sformatf("frames released: %0d", dut.u_delay.frame_count))
    foreach (n_rejected[s])
      `CHECK(n_rejected[s] == 0 && n_bad_pkt[s] == 0 && dg_overflow[s] == 0, $sformatf("source %0d lost nothing", s))
    `CHECK(ref_ovf == 0 && ctl_ovf == 0, "reference and control FIFOs kept up")
    `CHECK(lb_late == 0 && n_drop_deadtime == 0 && n_drop_inhibit == 0, "nothing late or dropped at the output")
    `CHECK(mep_records == n_phys && mep_lost == 0, $sformatf("PC farm records %0d", mep_records))
    $display("rate run: %0d primitives in, %0d triggers out (%0d per frame)", NSRC * NFRAMES * PER_FRAME, n_phys,
             n_phys / NFRAMES);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
