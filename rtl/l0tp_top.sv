// l0tp_top: the NA62 Level-0 Trigger Processor.
//
// Seven detector links deliver Multi-Trigger-Packets of primitives, one packet
// per 6.4 us frame. Per link, an MTP parser extracts and checks the
// primitives; the delay generator removes the fixed frame offset of slow
// detectors and releases frames of all links in lock-step; each link writes
// its primitives into an alignment RAM at an address given by their time.
// The reference detector's primitives are listed in a FIFO (the control
// detector's in a second one); for each of them the read sequencer reads the
// slot and its two neighbours from all seven RAMs at once and keeps the
// primitives within each source's time window. The associative memory ORs
// the three slots per source and matches the result against 16 masks; the
// downscaler thins each mask's rate. Calibration primitives (PID bit 15) skip
// all this. Everything above runs on clk_sys (125 MHz).
// Two dual-clock FIFOs hand triggers to the clk_40 (40 MHz master clock)
// output stage, where they join the periodic, random and NIM calibration
// triggers in the latency buffer, a circular buffer addressed by timestamp
// that delivers each trigger a fixed latency after its time. The dispatcher
// applies choke/error inhibition, autochoke and the 75 ns spacing and sends
// the trigger to the detectors (l0_*) and, packed into packets, to the PC
// farm (mep_*). The Ethernet stack, the PHYs, the PLL and the auxiliary
// board are outside: their signals are the ports of this module.
// All configuration is given as static inputs; rst_n is the common reset of
// both clock domains.
module l0tp_top
  import l0tp_pkg::*;
(
  input  logic                 clk_sys,
  input  logic                 clk_40,
  input  logic                 rst_n,
  // MTP words from the receive ports of the Ethernet links
  input  logic [NSRC-1:0]      mtp_valid,
  input  logic [31:0]          mtp_data [NSRC],
  input  logic [NSRC-1:0]      mtp_sop,
  input  logic [NSRC-1:0]      mtp_eop,
  output logic [NSRC-1:0]      mtp_ready,
  // machine and detector signals (via the auxiliary board)
  input  logic                 sob_in,
  input  logic                 eob_in,
  input  logic [NDET-1:0]      choke_in,
  input  logic [NDET-1:0]      error_in,
  input  logic                 nim_calib_in,
  // configuration: inputs and alignment
  input  logic [7:0]           cfg_src_id [NSRC],
  input  logic [NSRC-1:0]      cfg_src_enable,
  input  logic [7:0]           cfg_skip_frames [NSRC],
  input  logic [1:0]           cfg_fine_bits,
  input  logic [SRC_W-1:0]     cfg_ref_src,
  input  logic [SRC_W-1:0]     cfg_ctl_src,
  input  logic [WIN_W-1:0]     cfg_window [NSRC],
  // configuration: masks and downscaling
  input  logic [NMASK-1:0]     cfg_mask_enable,
  input  logic [PID_W-1:0]     cfg_mask_care  [NMASK][NSRC],
  input  logic [PID_W-1:0]     cfg_mask_value [NMASK][NSRC],
  input  logic                 cfg_ctl_enable,
  input  logic [PID_W-1:0]     cfg_ctl_care  [NSRC],
  input  logic [PID_W-1:0]     cfg_ctl_value [NSRC],
  input  logic [DS_W-1:0]      cfg_ds_factor [NMASK],
  input  logic [DS_W-1:0]      cfg_ctl_factor,
  // configuration: output stage
  input  logic [LAT_AW-1:0]    cfg_latency,
  input  logic [NDET-1:0]      cfg_choke_mask,
  input  logic [NDET-1:0]      cfg_error_mask,
  input  logic [15:0]          cfg_ac_window,
  input  logic [15:0]          cfg_ac_max,
  input  logic [TS_W-1:0]      cfg_per_period [2],
  input  logic [TS_W-1:0]      cfg_per_start  [2],
  input  logic [TS_W-1:0]      cfg_per_stop   [2],
  input  logic [TS_W-1:0]      cfg_rnd_start,
  input  logic [15:0]          cfg_rnd_rate_div,
  input  logic                 cfg_nim_enable,
  input  logic [15:0]          cfg_mep_timeout,
  // trigger to the detectors (40 MHz)
  output logic                 l0_valid,
  output trig_t                l0_trig,
  // packets to the PC farm (40 MHz)
  output logic                 mep_valid,
  output logic [31:0]          mep_data,
  output logic                 mep_sop,
  output logic                 mep_eop,
  input  logic                 mep_ready,
  // status
  output logic                 choke_active,
  output logic                 error_active,
  output logic                 autochoke_active,
  output logic                 ram_busy,        // RAMs still clearing after reset
  output logic [15:0]          frame_count,
  // error and drop counters
  output logic [15:0]          n_rejected [NSRC],     // primitives failing the frame check
  output logic [15:0]          n_bad_pkt [NSRC],      // packets with a foreign source ID
  output logic [15:0]          dg_overflow [NSRC],    // words lost at full frame FIFOs
  output logic [15:0]          ref_ovf,
  output logic [15:0]          ctl_ovf,
  output logic [15:0]          cal_dropped,
  output logic [15:0]          lb_late,               // triggers later than the latency
  output logic [15:0]          n_drop_inhibit,        // suppressed by choke/error/autochoke
  output logic [15:0]          n_drop_deadtime,       // closer than 75 ns to the previous one
  output logic [15:0]          mep_lost
);
  // ---------------- 125 MHz trigger logic ----------------
  logic            sys_sob, sys_eob, sys_burst;
  logic [TS_W-1:0] sys_ts_unused;
  burst_timer u_sys_timer (
    .clk(clk_sys), .rst_n, .sob_in, .eob_in,
    .sob_pulse(sys_sob), .eob_pulse(sys_eob), .burst_active(sys_burst), .ts(sys_ts_unused)
  );

  logic [NSRC-1:0] fw_valid;
  frame_word_t     fw_word [NSRC];

  for (genvar i = 0; i < NSRC; i++) begin : g_parser
    mtp_parser u_parser (
      .clk(clk_sys), .rst_n, .src_id(cfg_src_id[i]),
      .in_valid(mtp_valid[i]), .in_data(mtp_data[i]), .in_sop(mtp_sop[i]), .in_eop(mtp_eop[i]),
      .in_ready(mtp_ready[i]), .out_valid(fw_valid[i]), .out_word(fw_word[i]),
      .n_rejected(n_rejected[i]), .n_bad_packets(n_bad_pkt[i])
    );
  end

  logic [NSRC-1:0] dg_valid;
  prim_t           dg_prim [NSRC];
  logic            frame_done;
  delay_generator u_delay (
    .clk(clk_sys), .rst_n, .sob(sys_sob),
    .src_enable(cfg_src_enable), .skip_frames(cfg_skip_frames),
    .in_valid(fw_valid), .in_word(fw_word),
    .out_valid(dg_valid), .out_prim(dg_prim),
    .frame_done, .frame_count, .n_overflow(dg_overflow)
  );

  logic                ram_rd_en;
  logic [ALIGN_AW-1:0] ram_rd_addr;
  logic [NSRC-1:0]     ram_rd_valid, ram_busy_v;
  prim_t               ram_rd_prim [NSRC];
  for (genvar i = 0; i < NSRC; i++) begin : g_ram
    align_ram u_ram (
      .clk(clk_sys), .rst_n, .fine_bits(cfg_fine_bits),
      .wr_valid(dg_valid[i]), .wr_prim(dg_prim[i]),
      .rd_en(ram_rd_en), .rd_addr(ram_rd_addr),
      .rd_valid(ram_rd_valid[i]), .rd_prim(ram_rd_prim[i]), .busy(ram_busy_v[i])
    );
  end

  logic        ref_empty, ref_rd, ctl_empty, ctl_rd;
  prim_t       ref_prim, ctl_prim;
  logic [15:0] ref_idx, ctl_idx;
  ref_fifo u_ref_fifo (
    .clk(clk_sys), .rst_n, .sel(cfg_ref_src), .in_valid(dg_valid), .in_prim(dg_prim),
    .frame_idx(frame_count), .rd_en(ref_rd), .empty(ref_empty),
    .head_prim(ref_prim), .head_idx(ref_idx), .n_overflow(ref_ovf)
  );
  ref_fifo u_ctl_fifo (
    .clk(clk_sys), .rst_n, .sel(cfg_ctl_src), .in_valid(dg_valid), .in_prim(dg_prim),
    .frame_idx(frame_count), .rd_en(ctl_rd), .empty(ctl_empty),
    .head_prim(ctl_prim), .head_idx(ctl_idx), .n_overflow(ctl_ovf)
  );

  logic             beat_valid, beat_first, beat_last, beat_ctrl;
  prim_t            beat_ref;
  logic [NSRC-1:0]  beat_hit;
  logic [PID_W-1:0] beat_pid [NSRC];
  read_sequencer u_reader (
    .clk(clk_sys), .rst_n, .fine_bits(cfg_fine_bits), .window(cfg_window),
    .frame_count, .flush(!sys_burst),
    .ref_empty, .ref_prim, .ref_idx, .ref_rd,
    .ctl_empty, .ctl_prim, .ctl_idx, .ctl_rd,
    .ram_rd_en, .ram_rd_addr, .ram_rd_valid, .ram_rd_prim,
    .beat_valid, .beat_first, .beat_last, .beat_ctrl, .beat_ref, .beat_hit, .beat_pid
  );

  logic             amm_valid, amm_ctrl, amm_ctl_match;
  logic [NMASK-1:0] amm_match;
  prim_t            amm_ref;
  logic [PID_W-1:0] amm_gid [NSRC];
  amm u_amm (
    .clk(clk_sys), .rst_n,
    .beat_valid, .beat_last, .beat_ctrl, .beat_ref, .beat_hit, .beat_pid,
    .mask_enable(cfg_mask_enable), .mask_care(cfg_mask_care), .mask_value(cfg_mask_value),
    .ctl_enable(cfg_ctl_enable), .ctl_care(cfg_ctl_care), .ctl_value(cfg_ctl_value),
    .out_valid(amm_valid), .out_ctrl(amm_ctrl), .out_match(amm_match),
    .out_ctl_match(amm_ctl_match), .out_ref(amm_ref), .out_gid(amm_gid)
  );

  logic  phys_valid;
  trig_t phys_trig;
  downscaler u_ds (
    .clk(clk_sys), .rst_n, .factor(cfg_ds_factor), .ctl_factor(cfg_ctl_factor),
    .in_valid(amm_valid), .in_match(amm_match), .in_ctl_match(amm_ctl_match),
    .in_ref(amm_ref), .in_gid(amm_gid), .out_valid(phys_valid), .out_trig(phys_trig)
  );

  logic        cal_valid, cal_full;
  trig_t       cal_trig;
  calib_trigger u_calib (
    .clk(clk_sys), .rst_n, .in_valid(dg_valid), .in_prim(dg_prim),
    .out_valid(cal_valid), .out_trig(cal_trig), .out_ready(!cal_full), .n_dropped(cal_dropped)
  );

  // ---------------- clock-domain crossing ----------------
  logic  phys_full, phys_empty, cal_empty;
  trig_t phys_q, cal_q;
  logic [4:0] grant;
  async_fifo #(.W(TRIG_W), .DEPTH(16)) u_cdc_phys (
    .wr_clk(clk_sys), .wr_rst_n(rst_n), .wr_en(phys_valid), .wr_data(phys_trig), .full(phys_full),
    .rd_clk(clk_40), .rd_rst_n(rst_n), .rd_en(grant[0]), .rd_data(phys_q), .empty(phys_empty)
  );
  async_fifo #(.W(TRIG_W), .DEPTH(16)) u_cdc_cal (
    .wr_clk(clk_sys), .wr_rst_n(rst_n), .wr_en(cal_valid), .wr_data(cal_trig), .full(cal_full),
    .rd_clk(clk_40), .rd_rst_n(rst_n), .rd_en(grant[1]), .rd_data(cal_q), .empty(cal_empty)
  );

  // ---------------- 40 MHz output stage ----------------
  logic            sob40, eob40, burst40;
  logic [TS_W-1:0] ts40;
  burst_timer u_timer (
    .clk(clk_40), .rst_n, .sob_in, .eob_in,
    .sob_pulse(sob40), .eob_pulse(eob40), .burst_active(burst40), .ts(ts40)
  );

  logic  nim_valid, per_valid, rnd_valid;
  trig_t nim_trig, per_trig, rnd_trig;
  nim_calib_trigger u_nim (
    .clk(clk_40), .rst_n, .nim_in(nim_calib_in), .enable(cfg_nim_enable), .ts(ts40),
    .out_valid(nim_valid), .out_trig(nim_trig)
  );
  periodic_trigger u_periodic (
    .clk(clk_40), .rst_n, .sob(sob40), .ts(ts40),
    .period(cfg_per_period), .start(cfg_per_start), .stop(cfg_per_stop),
    .out_valid(per_valid), .out_trig(per_trig)
  );
  random_trigger u_random (
    .clk(clk_40), .rst_n, .ts(ts40), .burst_active(burst40),
    .start(cfg_rnd_start), .rate_div(cfg_rnd_rate_div),
    .out_valid(rnd_valid), .out_trig(rnd_trig)
  );

  logic        lb_valid, lb_busy;
  trig_t       lb_trig;
  latency_buffer #(.K(5)) u_latency (
    .clk(clk_40), .rst_n, .sob(sob40), .ts(ts40), .latency(cfg_latency),
    .in_valid({rnd_valid, per_valid, nim_valid, !cal_empty, !phys_empty}),
    .in_trig('{phys_q, cal_q, nim_trig, per_trig, rnd_trig}),
    .in_grant(grant),
    .out_valid(lb_valid), .out_trig(lb_trig), .busy(lb_busy), .n_late(lb_late)
  );
  assign ram_busy = (|ram_busy_v) | lb_busy;

  trigger_dispatcher u_dispatch (
    .clk(clk_40), .rst_n, .ts(ts40),
    .choke_in, .error_in, .choke_mask(cfg_choke_mask), .error_mask(cfg_error_mask),
    .ac_window(cfg_ac_window), .ac_max(cfg_ac_max),
    .in_valid(lb_valid), .in_trig(lb_trig),
    .l0_valid, .l0_trig, .choke_active, .error_active, .autochoke_active,
    .n_drop_inhibit, .n_drop_deadtime
  );

  mep_generator u_mep (
    .clk(clk_40), .rst_n, .timeout(cfg_mep_timeout),
    .in_valid(l0_valid), .in_trig(l0_trig),
    .out_valid(mep_valid), .out_data(mep_data), .out_sop(mep_sop), .out_eop(mep_eop),
    .out_ready(mep_ready), .n_lost(mep_lost)
  );
endmodule
