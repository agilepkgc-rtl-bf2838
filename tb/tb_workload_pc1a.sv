// tb_workload_pc1a -- runs the full subsystem (default size) through traces of
// busy and fully idle periods shaped like the evaluated services, and measures
// how much of the fully idle time the hardware actually spends in PC1A.
//
// Each workload point is given by the fraction of time all cores are in CC1
// (the PC1A opportunity reported for that service and load) and is replayed as
// NPER idle periods of 20..200 us (uniform, the range holding most fully idle
// periods at low load) separated by busy periods sized to hit that fraction.
// An idle period ends like a network request: traffic on a PCIe link first,
// then 100 ns later the interrupt reaches a core through the global PMU. Some
// idle periods are instead broken by a timer wakeup that leaves the cores idle.
// During busy periods one to three cores run and links and DRAM carry traffic.
//
// Checked per point: the PC1A residency is at least 98 % of the fully idle
// time (entry plus exit cost well under 1 % of a 20 us period), and every
// entry+exit pair met the 200 ns budget. Package power is estimated with the
// per-state figures of the reference server (SoC + DRAM: 49.5 W with all cores
// in CC1 outside PC1A, 29.1 W in PC1A, 92 W as the active upper bound); for the
// fully idle server the saving must come out at 41 % (1 - 29.1 / 49.5). With
// busy time charged at the 92 W upper bound, the savings printed for the loaded
// points are lower bounds.
module tb_workload_pc1a;
  import apc_pkg::*;

  localparam int NC   = N_CORES;
  localparam int US   = 1000 / NS_PER_CYC;   // cycles per microsecond
  localparam int NPER = 12;

  logic clk = 1'b0, clk_clm = 1'b0, rst_n = 1'b0;
  logic [NC-1:0] core_in_cc1;
  logic gpmu_wakeup, in_pc1a;
  pkg_state_e pkg_state;
  logic [N_IO-1:0] io_dev_present, io_link_active, io_cfg_aspm_l0s_en, io_cfg_l0s_entry_lat;
  logic [N_IO-1:0] io_in_l0s, io_link_ready;
  link_state_e [N_IO-1:0] io_lstate;
  logic [N_IO-1:0][MAX_LANES-1:0] io_lanes_awake;
  logic [N_MC-1:0][N_DDR_CH-1:0] mc_ch_busy, mc_cke, mc_ch_ready;
  logic [N_MC-1:0] mc_cfg_cke_on, mc_in_cke_off;
  logic [N_CLM_VR-1:0] vr_vid_we, vr_rvid_we;
  logic [VID_W-1:0] vr_wdata;
  logic [N_CLM_VR-1:0][VID_W-1:0] vr_vid_out;
  logic clm_pwr_ok, gclk_clm, clm_clk_gated;
  logic allow_l0s, allow_cke_off, ret, clk_gate;

  apc_top dut (.*);

  always #1 clk = ~clk;            // time unit here is 1 ns: 2 ns period
  always #0.4 clk_clm = ~clk_clm;

  int checks = 0, failures = 0;

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // Per-point accumulators, sampled every PM clock.
  longint cyc_total, cyc_allidle, cyc_pc1a, cyc_busy;
  int n_entries, worst_pair;
  int entry_len, exit_len;
  logic measuring = 0;

  pkg_state_e prev_st = PKG_PC0;
  always @(posedge clk) begin
    if (measuring) begin
      cyc_total++;
      if (&core_in_cc1) cyc_allidle++; else cyc_busy++;
      if (pkg_state == PKG_PC1A) cyc_pc1a++;
      // entry: cycles in ACC1 with cores and links idle, plus the entry step;
      // exit: cycles in the exit state, plus the step back to ACC1
      if ((pkg_state == PKG_ACC1 && (&core_in_cc1) && io_link_active == '0) || pkg_state == PKG_ENTRY)
        entry_len++;
      if (pkg_state == PKG_EXIT) exit_len++;
      if (prev_st != PKG_PC1A && pkg_state == PKG_PC1A) n_entries++;
      if (prev_st == PKG_EXIT && pkg_state == PKG_ACC1) begin
        if (entry_len + exit_len + 1 > worst_pair) worst_pair = entry_len + exit_len + 1;
        entry_len = 0; exit_len = 0;
      end
      if (pkg_state == PKG_PC0) begin entry_len = 0; exit_len = 0; end
    end
    prev_st = pkg_state;
  end

  task automatic wait_cyc(input int n);
    repeat (n) @(negedge clk);
  endtask

  // Busy period: 1..3 cores run, links and DRAM carry traffic.
  task automatic busy(input int len);
    int c0 = $urandom % NC;
    core_in_cc1 = '1;
    core_in_cc1[c0] = 0;
    for (int k = 0; k < len; k++) begin
      @(negedge clk);
      if ($urandom % 200 == 0) core_in_cc1[$urandom % NC] = 0;
      if ($urandom % 300 == 0) begin core_in_cc1 = '1; core_in_cc1[c0] = 0; end
      for (int i = 0; i < N_IO; i++) io_link_active[i] = ($urandom % 5 == 0);
      for (int m = 0; m < N_MC; m++) mc_ch_busy[m] = N_DDR_CH'($urandom);
    end
    io_link_active = '0; mc_ch_busy = '0;
    core_in_cc1 = '1;
  endtask

  // Fully idle period, ended by a request (or, if timer, by a GPMU wakeup
  // that leaves the cores idle, followed by the rest of the idle time).
  task automatic idle(input int len, input bit timer);
    if (timer) begin
      wait_cyc(len / 2);
      gpmu_wakeup = 1; wait_cyc(2); gpmu_wakeup = 0;
      wait_cyc(len - len / 2 - 2);
    end else wait_cyc(len);
    io_link_active[2] = 1;           // request arrives on a PCIe link
    wait_cyc(50);                    // 100 ns later the interrupt
    gpmu_wakeup = 1;
    core_in_cc1[$urandom % NC] = 0;
    wait_cyc(2);
    gpmu_wakeup = 0;
  endtask

  task automatic run_point(input string name, input int pct_idle, input real paper_res);
    real res, opp, capt, p_base, p_apc, saving;
    cyc_total = 0; cyc_allidle = 0; cyc_pc1a = 0; cyc_busy = 0;
    n_entries = 0; worst_pair = 0; entry_len = 0; exit_len = 0;
    measuring = 1;
    for (int p = 0; p < NPER; p++) begin
      int il = (20 + $urandom % 181) * US;
      int bl = (pct_idle >= 100) ? 0 : int'(real'(il) * (100 - pct_idle) / pct_idle);
      if (bl > 0) busy(bl);
      else begin core_in_cc1 = '1; io_link_active = '0; mc_ch_busy = '0; end
      idle(il, (p % 4 == 3));
    end
    if (pct_idle >= 100) begin core_in_cc1 = '1; io_link_active = '0; end
    measuring = 0;
    opp  = real'(cyc_allidle) / real'(cyc_total);
    res  = real'(cyc_pc1a) / real'(cyc_total);
    capt = res / opp;
    p_base = (real'(cyc_busy) * 92.0 + real'(cyc_allidle) * 49.5) / real'(cyc_total);
    p_apc  = (real'(cyc_busy) * 92.0 + real'(cyc_allidle - cyc_pc1a) * 49.5
              + real'(cyc_pc1a) * 29.1) / real'(cyc_total);
    saving = 1.0 - p_apc / p_base;
    $display("%-20s all-idle %5.1f%% (reported opportunity %4.1f%%)  PC1A %5.1f%%  captured %5.2f%%  entries %0d  worst entry+exit %0d ns  power %5.1f -> %5.1f W (-%4.1f%%)",
             name, 100*opp, paper_res, 100*res, 100*capt, n_entries, worst_pair * NS_PER_CYC,
             p_base, p_apc, 100*saving);
    check(capt >= 0.98, $sformatf("%s: PC1A captures %.2f%% of the idle time", name, 100*capt));
    check(n_entries >= NPER, $sformatf("%s: %0d PC1A entries", name, n_entries));
    check(worst_pair * NS_PER_CYC <= 200, $sformatf("%s: entry+exit %0d ns", name, worst_pair * NS_PER_CYC));
    if (pct_idle >= 100)
      check(saving > 0.40 && saving < 0.42, $sformatf("idle server saving %.1f%%, expected 41%%", 100*saving));
  endtask

  initial begin
    core_in_cc1 = '1; gpmu_wakeup = 0; io_dev_present = '1; io_link_active = '0; io_cfg_aspm_l0s_en = '0;
    io_cfg_l0s_entry_lat = '0; mc_ch_busy = '0; mc_cfg_cke_on = '1; vr_vid_we = '0;
    vr_rvid_we = '0; vr_wdata = '0;
    wait_cyc(4); rst_n = 1; wait_cyc(4);

    run_point("idle server (0 QPS)",  100, 100.0);
    run_point("Memcached 4K QPS",      77,  77.0);
    run_point("Memcached 50K QPS",     20,  20.0);
    run_point("MySQL low load",        37,  37.0);
    run_point("MySQL high load",       20,  20.0);
    run_point("Kafka low load",        47,  47.0);
    run_point("Kafka high load",       15,  15.0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
